// tb_snn_sparse: a feed-forward spiking layer with unstructured sparse
// connectivity, the kind of model used for event-camera digit
// classification, run on the full default-size SoC with the sparse
// spike-propagation kernel.
//
// Network: 256 input neurons with random spike trains (about 10% active per
// step) project with 90% sparsity onto 128 LIF neurons, over 16 timesteps.
// Target neuron n = 32*q + l lives in lane l, element q of the lane-local
// memories (4 targets per lane). A presynaptic neuron's connections are
// packed into vector rows: lane l of a row holds one connection to a target
// in lane l as a 16-bit word, weight in bits [15:3] and 2*q in bits [2:0]
// (lane-local addresses are byte addresses); unused slots hold weight 0.
// Rows come from DDR by one MM2S transfer.
// Per timestep the host propagates every input spike with the 6-instruction
// double-buffered loop
//   VLOAD.V d_next; VANDADD a = (d & 7) + base; VLOAD.L i, a;
//   VSRI w = d >> 3; VADD.S i += w; VSTORE.L a, i
// which must issue one instruction per cycle, then updates the 128 neurons
// (read and clear their inputs, V = (V*alpha >> 14) + I, VTGE, subtract the
// threshold with VSUB.S/VSEL). The spike raster and final potentials are
// compared with a network-level integer model.
module tb_snn_sparse;
  import fenn_pkg::*;
  import fenn_ref_pkg::*;

  localparam int ROWS = 8192, DEPTH = 1024, IW = 8192, DW = 8192;
  localparam int LATENCY = 60, GAP = 2;

  logic clk = 0, rst_n = 0;
  logic issue_valid, issue_ready, issue_accept, issue_writeback;
  word_t issue_instr, issue_rs1, issue_rs2;
  id_t issue_id;
  logic commit_valid, commit_kill;
  id_t commit_id;
  logic result_valid;
  id_t result_id;
  logic [4:0] result_rd;
  word_t result_data;
  logic imem_en, dmem_en;
  logic [12:0] imem_addr, dmem_addr, ps_imem_addr, ps_dmem_addr;
  logic [3:0] dmem_we, ps_imem_we, ps_dmem_we;
  word_t imem_rdata, dmem_wdata, dmem_rdata, ps_imem_wdata, ps_imem_rdata, ps_dmem_wdata, ps_dmem_rdata;
  logic ps_imem_en, ps_dmem_en;
  logic csr_en, csr_we;
  logic [11:0] csr_addr;
  word_t csr_wdata, csr_rdata;
  logic [4:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic [71:0] mm_cmd, s2_cmd;
  logic mm_cmd_v, mm_cmd_r, s2_cmd_v, s2_cmd_r;
  logic [7:0] mm_sts, s2_sts;
  logic mm_sts_v, mm_sts_r, s2_sts_v, s2_sts_r;
  vec_t mm_tdata, s2_tdata;
  logic mm_tvalid, mm_tready, mm_tlast, s2_tvalid, s2_tready, s2_tlast;
  logic ev_fwd_ex, ev_fwd_wb, ev_load_stall, ev_kill, ev_dma_conflict;

  fenn_dma_soc dut (
    .clk, .rst_n,
    .issue_valid, .issue_ready, .issue_instr, .issue_rs1, .issue_rs2, .issue_id,
    .issue_accept, .issue_writeback, .commit_valid, .commit_id, .commit_kill,
    .result_valid, .result_id, .result_rd, .result_data,
    .imem_en, .imem_addr, .imem_rdata,
    .dmem_en, .dmem_we, .dmem_addr, .dmem_wdata, .dmem_rdata,
    .csr_en, .csr_we, .csr_addr, .csr_wdata, .csr_rdata,
    .ps_imem_en, .ps_imem_we, .ps_imem_addr, .ps_imem_wdata, .ps_imem_rdata,
    .ps_dmem_en, .ps_dmem_we, .ps_dmem_addr, .ps_dmem_wdata, .ps_dmem_rdata,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_mm2s_cmd_tdata(mm_cmd), .m_mm2s_cmd_tvalid(mm_cmd_v), .m_mm2s_cmd_tready(mm_cmd_r),
    .s_mm2s_sts_tdata(mm_sts), .s_mm2s_sts_tvalid(mm_sts_v), .s_mm2s_sts_tready(mm_sts_r),
    .m_s2mm_cmd_tdata(s2_cmd), .m_s2mm_cmd_tvalid(s2_cmd_v), .m_s2mm_cmd_tready(s2_cmd_r),
    .s_s2mm_sts_tdata(s2_sts), .s_s2mm_sts_tvalid(s2_sts_v), .s_s2mm_sts_tready(s2_sts_r),
    .s_mm2s_tdata(mm_tdata), .s_mm2s_tvalid(mm_tvalid), .s_mm2s_tready(mm_tready),
    .m_s2mm_tdata(s2_tdata), .m_s2mm_tvalid(s2_tvalid), .m_s2mm_tready(s2_tready), .m_s2mm_tlast(s2_tlast),
    .ev_fwd_ex, .ev_fwd_wb, .ev_load_stall, .ev_kill, .ev_dma_conflict
  );

  datamover_model #(.DDR_WORDS(4096), .LATENCY(LATENCY), .BEAT_GAP(GAP)) u_dm (
    .clk, .rst_n,
    .mm2s_cmd_tdata(mm_cmd), .mm2s_cmd_tvalid(mm_cmd_v), .mm2s_cmd_tready(mm_cmd_r),
    .mm2s_sts_tdata(mm_sts), .mm2s_sts_tvalid(mm_sts_v), .mm2s_sts_tready(mm_sts_r),
    .s2mm_cmd_tdata(s2_cmd), .s2mm_cmd_tvalid(s2_cmd_v), .s2mm_cmd_tready(s2_cmd_r),
    .s2mm_sts_tdata(s2_sts), .s2mm_sts_tvalid(s2_sts_v), .s2mm_sts_tready(s2_sts_r),
    .mm2s_tdata(mm_tdata), .mm2s_tvalid(mm_tvalid), .mm2s_tready(mm_tready), .mm2s_tlast(mm_tlast),
    .s2mm_tdata(s2_tdata), .s2mm_tvalid(s2_tvalid), .s2mm_tready(s2_tready), .s2mm_tlast(s2_tlast)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_fwd_ex = 0, n_fwd_wb = 0, n_stall = 0, n_kill = 0, n_hold = 0, n_conflict = 0;
  int n_mm_beats = 0, n_s2_beats = 0, n_csr = 0, n_axil = 0, n_smem = 0;
  int n_sat = 0, n_stoch = 0, n_spikes = 0;
  int mm_beat_cyc [$];
  int mm_cmd_cyc = 0;

  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    #4;
    n_fwd_ex += int'(ev_fwd_ex); n_fwd_wb += int'(ev_fwd_wb);
    n_stall += int'(ev_load_stall); n_kill += int'(ev_kill);
    n_hold += int'(issue_valid && !issue_ready);
    n_conflict += int'(ev_dma_conflict);
    if (mm_tvalid && mm_tready) begin n_mm_beats++; mm_beat_cyc.push_back(cyc); end
    if (mm_cmd_v && mm_cmd_r) mm_cmd_cyc = cyc;
    n_s2_beats += int'(s2_tvalid && s2_tready);
    n_csr += int'(csr_en);
    n_axil += int'((awvalid && awready) || (arvalid && arready));
    n_smem += int'(imem_en || dmem_en || ps_imem_en || ps_dmem_en);
  end

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, s);
  endtask
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) fail(s);
  endtask

  // ------------------------------------------------------------------
  // host core: issue / commit / result
  vec_model m;
  typedef struct { id_t id; bit kill; int due; } cq_t;
  cq_t cq [$];
  typedef struct { id_t id; logic [4:0] rd; word_t data; } rq_t;
  rq_t rq [$];
  id_t next_id = 0;
  int kill_pct = 0;
  int max_cdelay = 1;    // commit in the cycle the instruction reaches execute
  word_t last_x;

  always @(negedge clk) begin
    commit_valid = 0;
    if (cq.size() > 0 && cq[0].due <= cyc) begin
      commit_valid = 1; commit_id = cq[0].id; commit_kill = cq[0].kill;
    end
  end
  always @(posedge clk) if (commit_valid) void'(cq.pop_front());

  always @(negedge clk) if (rst_n && result_valid) begin
    checks++;
    if (rq.size() == 0) fail("unexpected result");
    else begin
      rq_t e;
      e = rq.pop_front();
      if (result_id !== e.id || result_rd !== e.rd || result_data !== e.data)
        fail($sformatf("result id %0d rd %0d data %h, expected id %0d rd %0d data %h",
                       result_id, result_rd, result_data, e.id, e.rd, e.data));
    end
  end

  // counts lanes of a saturating add/sub that actually clip
  function automatic bit clips(word_t ins);
    longint s;
    if (ins[6:2] != 5'(MOP_VARITH) || ins[14:13] != 2'b00 || !ins[31]) return 0;
    for (int l = 0; l < 32; l++) begin
      s = ins[12] ? longint'($signed(m.vr[ins[19:15]][l])) - longint'($signed(m.vr[ins[24:20]][l]))
                  : longint'($signed(m.vr[ins[19:15]][l])) + longint'($signed(m.vr[ins[24:20]][l]));
      if (s > 32767 || s < -32768) return 1;
    end
    return 0;
  endfunction

  task automatic issue(word_t ins, word_t x1 = 0, word_t x2 = 0);
    bit kill, hx, ok;
    word_t xv;
    @(negedge clk);
    issue_valid = 1; issue_instr = ins; issue_rs1 = x1; issue_rs2 = x2; issue_id = next_id;
    ok = 0;
    while (!ok) begin #4; ok = issue_ready; @(posedge clk); if (!ok) @(negedge clk); end
    checks++;
    if (!issue_accept) fail($sformatf("instruction %h not accepted", ins));
    kill = ($urandom_range(0, 99) < kill_pct);
    if (!kill) n_sat += int'(clips(ins));
    if (!kill) n_stoch += int'((ins[6:2] == 5'(MOP_VARITH) && ins[14:12] == 3'd5 && ins[30:29] == 2'd2) ||
                               (ins[6:2] == 5'(MOP_VSHI) && ins[14:12] == 3'd1 && ins[25:24] == 2'd2));
    hx = m.exec(ins, x1, x2, kill, xv);
    if (hx && !kill) rq.push_back('{next_id, ins[11:7], xv});
    last_x = kill ? '0 : xv;
    cq.push_back('{next_id, kill, cyc + $urandom_range(1, max_cdelay) - 1});
    next_id++;
    #1 issue_valid = 0;
  endtask

  task automatic drain();
    repeat (4) @(posedge clk);
    while (cq.size() > 0 || rq.size() > 0) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  // ------------------------------------------------------------------
  // register access: PS over AXI4-Lite, host over CSRs
  task automatic axil_write(int idx, logic [31:0] d);
    bit aw_done, w_done, b_done;
    @(negedge clk);
    awvalid = 1; awaddr = 5'(idx * 4); wvalid = 1; wdata = d; wstrb = 4'hf; bready = 1;
    aw_done = 0; w_done = 0; b_done = 0;
    while (!b_done) begin
      #4;
      if (awvalid && awready) aw_done = 1;
      if (wvalid && wready) w_done = 1;
      if (bvalid && bready) b_done = 1;
      @(posedge clk);
      @(negedge clk);
      if (aw_done) awvalid = 0;
      if (w_done) wvalid = 0;
    end
    bready = 0;
  endtask

  task automatic axil_read(int idx, output logic [31:0] d);
    bit ar_done, r_done;
    @(negedge clk);
    arvalid = 1; araddr = 5'(idx * 4); rready = 1; ar_done = 0; r_done = 0;
    while (!r_done) begin
      #4;
      if (arvalid && arready) ar_done = 1;
      if (rvalid && rready) begin r_done = 1; d = rdata; end
      @(posedge clk);
      @(negedge clk);
      if (ar_done) arvalid = 0;
    end
    rready = 0;
  endtask

  task automatic csr_write(int idx, logic [31:0] d);
    @(negedge clk);
    csr_en = 1; csr_we = 1; csr_addr = 12'h800 + 12'(idx); csr_wdata = d;
    @(negedge clk);
    csr_en = 0; csr_we = 0;
  endtask

  task automatic csr_read(int idx, output logic [31:0] d);
    @(negedge clk);
    csr_en = 1; csr_we = 0; csr_addr = 12'h800 + 12'(idx);
    #4 d = csr_rdata;
    @(negedge clk);
    csr_en = 0;
  endtask

  // ------------------------------------------------------------------
  // DDR / model helpers
  function automatic vec_t model_row(int r);
    vec_t v;
    for (int l = 0; l < 32; l++) v[16*l +: 16] = m.vmem[r][l];
    return v;
  endfunction

  task automatic ddr_to_model(int ddr_row, int vrow, int n);
    for (int k = 0; k < n; k++)
      for (int l = 0; l < 32; l++) m.vmem[vrow + k][l] = u_dm.ddr[ddr_row + k][16*l +: 16];
  endtask

  task automatic check_ddr(int ddr_row, int vrow, int n, string what);
    for (int k = 0; k < n; k++)
      chk(u_dm.ddr[ddr_row + k] === model_row(vrow + k),
          $sformatf("%s: DDR row %0d differs from vector row %0d", what, ddr_row + k, vrow + k));
  endtask

  // reads one vector register back through VEXTRACT (checked in order)
  task automatic check_reg(logic [4:0] r);
    for (int l = 0; l < 32; l++) issue(enc_r(MOP_VEXTRACT, 3'd0, 7'd0, 5'd8, r, 5'(l)));
  endtask



  localparam int NIN = 256, N = 128, NT = 4, T = 16;
  localparam logic [4:0] R_ZERO = 0, R_A = 2, R_I = 3, R_W = 4, R_D0 = 5, R_D1 = 6,
                         R_V = 7, R_ALPHA = 8, R_TH = 9, R_TMP = 11;
  localparam logic [15:0] ALPHA = 16'h3800, TH = 16'd1500;
  localparam int ROW_V = 4000;

  logic [15:0] wgt [NIN][N];               // 0 where there is no connection
  int          row_first [NIN];
  int          row_count [NIN];
  bit          zin [T][NIN];
  int          vref [N];
  int          iref [N];
  bit          zref [T][N];
  bit          zdut [T][N];
  int          accept_cyc [$];
  int          n_rows;

  function automatic int sat16(int x);
    return x > 32767 ? 32767 : (x < -32768 ? -32768 : x);
  endfunction
  function automatic int s16(logic [15:0] x);
    return int'($signed(x));
  endfunction

  task automatic reference();
    for (int n = 0; n < N; n++) begin vref[n] = 0; iref[n] = 0; end
    for (int t = 0; t < T; t++) begin
      for (int j = 0; j < NIN; j++) if (zin[t][j])
        for (int n = 0; n < N; n++) if (wgt[j][n] != 0) iref[n] = sat16(iref[n] + s16(wgt[j][n]));
      for (int n = 0; n < N; n++) begin
        vref[n] = s16(16'((vref[n] * s16(ALPHA)) >>> 14));
        vref[n] = sat16(vref[n] + iref[n]);
        iref[n] = 0;
        zref[t][n] = vref[n] >= s16(TH);
        if (zref[t][n]) vref[n] = sat16(vref[n] - s16(TH));
      end
    end
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (issue_valid && issue_ready) accept_cyc.push_back(cyc);

  initial begin
    logic [31:0] v;
    logic [31:0] zw;
    int rows [$];
    int n_spk, c0, q;
    logic [4:0] dp, dn;
    int lane_list [32][$];
    issue_valid = 0; issue_instr = 0; issue_rs1 = 0; issue_rs2 = 0; issue_id = 0;
    commit_valid = 0; commit_id = 0; commit_kill = 0;
    imem_en = 0; imem_addr = 0; dmem_en = 0; dmem_we = 0; dmem_addr = 0; dmem_wdata = 0;
    ps_imem_en = 0; ps_imem_we = 0; ps_imem_addr = 0; ps_imem_wdata = 0;
    ps_dmem_en = 0; ps_dmem_we = 0; ps_dmem_addr = 0; ps_dmem_wdata = 0;
    csr_en = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0; wstrb = 0;
    kill_pct = 0;
    m = new(ROWS, DEPTH);
    #1;
    // random sparse connectivity, weights in [-512, 1024) excluding 0
    n_rows = 0;
    for (int j = 0; j < NIN; j++) begin
      for (int l = 0; l < 32; l++) lane_list[l].delete();
      for (int n = 0; n < N; n++) begin
        wgt[j][n] = 0;
        if ($urandom_range(0, 9) == 0) begin
          wgt[j][n] = 16'($urandom_range(1, 1535) - 512);
          if (wgt[j][n] == 0) wgt[j][n] = 16'd1;
          lane_list[n % 32].push_back(n);
        end
      end
      row_first[j] = n_rows;
      row_count[j] = 0;
      foreach (lane_list[l]) if (lane_list[l].size() > row_count[j]) row_count[j] = lane_list[l].size();
      for (int r = 0; r < row_count[j]; r++) begin
        for (int l = 0; l < 32; l++) begin
          logic [15:0] w;
          w = '0;
          if (r < lane_list[l].size()) begin
            q = lane_list[l][r] / 32;
            w = {13'(wgt[j][lane_list[l][r]]), 2'(q), 1'b0};
          end
          u_dm.ddr[n_rows][16*l +: 16] = w;
        end
        n_rows++;
      end
    end
    for (int t = 0; t < T; t++)
      for (int j = 0; j < NIN; j++) zin[t][j] = ($urandom_range(0, 9) == 0);
    reference();
    repeat (4) @(posedge clk);
    rst_n = 1;

    axil_write(0, 32'h0); axil_write(1, 32'h0); axil_write(2, 32'(n_rows * 64));
    axil_write(6, 32'h1);
    do axil_read(7, v); while (v[0]);
    chk(v[2] && !v[4], "connectivity transfer");
    ddr_to_model(0, 0, n_rows);

    issue(enc_lui(R_ZERO, 16'h0));
    issue(enc_lui(R_ALPHA, ALPHA));
    issue(enc_lui(R_TH, TH));
    for (int k = 0; k < N / 32; k++) begin
      issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, R_ZERO), 32'((ROW_V + k) * 64));
      issue(enc_r(MOP_VFILL, 3'd0, 7'd0, R_A, 5'd0, 5'd0), 32'(2 * k));
      issue(enc_s(MOP_VSTORE, 3'd1, 12'h0, R_A, R_ZERO));
    end

    n_spk = 0;
    for (int t = 0; t < T; t++) begin
      rows.delete();
      for (int j = 0; j < NIN; j++) if (zin[t][j])
        for (int r = 0; r < row_count[j]; r++) rows.push_back(row_first[j] + r);
      if (rows.size() > 0) begin
        drain();
        accept_cyc.delete();
        dp = R_D0; dn = R_D1;
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, dp, 5'd0), 32'(rows[0] * 64));
        foreach (rows[it]) begin
          issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, dn, 5'd0), 32'(rows[(it + 1) % rows.size()] * 64));
          issue(enc_r(MOP_VANDADD, 3'd0, 7'd3, R_A, dp, 5'd0), 32'h0, 32'h0);
          issue(enc_i(MOP_VLOAD, 3'd1, 12'h0, R_I, R_A));
          issue(enc_i(MOP_VSHI, 3'd1, 12'h003, R_W, dp));
          issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_I, R_I, R_W));
          issue(enc_s(MOP_VSTORE, 3'd1, 12'h0, R_A, R_I));
          {dp, dn} = {dn, dp};
        end
        @(posedge clk); #1;
        c0 = accept_cyc[0];
        chk(accept_cyc.size() == 6 * rows.size() + 1 &&
            accept_cyc[accept_cyc.size() - 1] - c0 == 6 * rows.size(),
            $sformatf("t=%0d: %0d rows took %0d cycles, expected %0d",
                      t, rows.size(), accept_cyc[accept_cyc.size() - 1] - c0, 6 * rows.size()));
      end
      for (int k = 0; k < N / 32; k++) begin
        issue(enc_r(MOP_VFILL, 3'd0, 7'd0, R_A, 5'd0, 5'd0), 32'(2 * k));
        issue(enc_i(MOP_VLOAD, 3'd1, 12'h0, R_I, R_A));
        issue(enc_s(MOP_VSTORE, 3'd1, 12'h0, R_A, R_ZERO));
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_V, 5'd0), 32'((ROW_V + k) * 64));
        issue(enc_r(MOP_VARITH, 3'd5, 7'h0e, R_V, R_V, R_ALPHA));
        issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_V, R_V, R_I));
        issue(enc_r(MOP_VTST, 3'd3, 7'd0, 5'd9, R_V, R_TH));
        zw = last_x;
        issue(enc_r(MOP_VARITH, 3'd1, 7'h40, R_TMP, R_V, R_TH));
        issue(enc_r(MOP_VSEL, 3'd0, 7'd0, R_V, 5'd0, R_TMP), zw);
        issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, R_V), 32'((ROW_V + k) * 64));
        for (int l = 0; l < 32; l++) begin zdut[t][32 * k + l] = zw[l]; n_spk += int'(zw[l]); end
      end
    end
    drain();
    for (int t = 0; t < T; t++)
      for (int n = 0; n < N; n++)
        chk(zdut[t][n] == zref[t][n], $sformatf("spike of neuron %0d at step %0d", n, t));
    for (int k = 0; k < N / 32; k++) begin
      issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_V, 5'd0), 32'((ROW_V + k) * 64));
      for (int l = 0; l < 32; l++) begin
        issue(enc_r(MOP_VEXTRACT, 3'd0, 7'd0, 5'd9, R_V, 5'(l)));
        chk(int'($signed(last_x)) == vref[32 * k + l], $sformatf("final V of neuron %0d", 32 * k + l));
      end
    end
    drain();
    $display("rows=%0d spikes=%0d over %0d steps", n_rows, n_spk, T);
    chk(n_spk > 0 && n_spk < N * T, "layer neither silent nor saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
