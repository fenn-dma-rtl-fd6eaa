// tb_snn_dense_dma: dense spike propagation with the weights kept in DDR,
// the way large networks run on the SoC, on the full default-size design.
//
// Network: 64 input neurons with random spike trains (about 8% active per
// step) densely connected to 1024 LIF neurons (32 vectors), 4 timesteps.
// Presynaptic neuron j's weight row (1024 x 16 bit = 32 vector rows) is in
// DDR at row 32*j. Per timestep the host walks the input spikes with a
// double-buffered loop: it waits (polling the DMA status CSR) for the row of
// the current spike, starts the MM2S transfer of the next spike's row into
// the other buffer, and meanwhile adds the current row to the neuron inputs
// with the 4-instruction dense kernel
//   VLOAD.V w; VLOAD.V i_next; VADD.S i_prev += w; VSTORE.V i_prev
// which must issue one instruction per cycle (32 synapses every 4 cycles)
// while the DMA writes the other buffer. It then updates the neurons
// (V = (V*alpha >> 14) + I with VMUL and VADD.S, VTGE, threshold subtraction
// with VSUB.S and VSEL, inputs cleared). Spike raster and final potentials
// are compared with a network-level integer model; the testbench also
// checks that DMA beats arrived while the kernel was running.
module tb_snn_dense_dma;
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




  localparam int NIN = 64, N = 1024, NV = N / 32, T = 4;
  localparam logic [4:0] R_ZERO = 0, R_W = 4, R_I0 = 5, R_I1 = 6,
                         R_V = 7, R_ALPHA = 8, R_TH = 9, R_TMP = 11;
  localparam logic [15:0] ALPHA = 16'h3800, TH = 16'd3000;
  localparam int ROW_I = 2000, ROW_V = 2100, ROW_BUF = 2200;   // buffers at 2200 and 2232

  logic [15:0] wgt [NIN][N];
  bit          zin [T][NIN];
  int          vref [N];
  int          iref [N];
  bit          zref [T][N];
  bit          zdut [T][N];
  int          accept_cyc [$];
  int          overlap_beats = 0;
  bit          in_kernel = 0;

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
        for (int n = 0; n < N; n++) iref[n] = sat16(iref[n] + s16(wgt[j][n]));
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
  always @(negedge clk) begin
    #4;
    if (in_kernel && mm_tvalid && mm_tready) overlap_beats++;
  end

  // host: start MM2S of presynaptic row j into buffer b (CSRs)
  task automatic fetch_row(int j, int b);
    csr_write(0, 32'(32 * j * 64));
    csr_write(1, 32'((ROW_BUF + 32 * b) * 64));
    csr_write(2, 32'(32 * 64));
    csr_write(6, 32'h1);
  endtask

  task automatic wait_row(int j, int b);
    logic [31:0] v;
    do csr_read(7, v); while (v[0]);
    chk(v[2] && !v[4], "weight row transfer");
    ddr_to_model(32 * j, ROW_BUF + 32 * b, 32);
  endtask

  initial begin
    logic [31:0] zw;
    int spk [$];
    int n_spk, c0, cur;
    logic [4:0] ip, inx;
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
    for (int j = 0; j < NIN; j++)
      for (int n = 0; n < N; n++) begin
        wgt[j][n] = 16'($urandom_range(0, 1800) - 500);
        u_dm.ddr[32 * j + n / 32][16 * (n % 32) +: 16] = wgt[j][n];
      end
    for (int t = 0; t < T; t++)
      for (int j = 0; j < NIN; j++) zin[t][j] = ($urandom_range(0, 11) == 0);
    reference();
    repeat (4) @(posedge clk);
    rst_n = 1;

    issue(enc_lui(R_ZERO, 16'h0));
    issue(enc_lui(R_ALPHA, ALPHA));
    issue(enc_lui(R_TH, TH));
    for (int k = 0; k < NV; k++) begin
      issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, R_ZERO), 32'((ROW_V + k) * 64));
      issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, R_ZERO), 32'((ROW_I + k) * 64));
    end

    n_spk = 0;
    for (int t = 0; t < T; t++) begin
      spk.delete();
      for (int j = 0; j < NIN; j++) if (zin[t][j]) spk.push_back(j);
      if (spk.size() > 0) fetch_row(spk[0], 0);
      foreach (spk[s]) begin
        cur = s % 2;
        wait_row(spk[s], cur);
        if (s + 1 < spk.size()) fetch_row(spk[s + 1], 1 - cur);
        // dense kernel over the 32 target vectors
        in_kernel = 1;
        accept_cyc.delete();
        ip = R_I0; inx = R_I1;
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, ip, 5'd0), 32'(ROW_I * 64));
        for (int k = 0; k < NV; k++) begin
          issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_W, 5'd0), 32'((ROW_BUF + 32 * cur + k) * 64));
          issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, inx, 5'd0), 32'((ROW_I + (k + 1) % NV) * 64));
          issue(enc_r(MOP_VARITH, 3'd0, 7'h40, ip, ip, R_W));
          issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, ip), 32'((ROW_I + k) * 64));
          {ip, inx} = {inx, ip};
        end
        @(posedge clk); #1;
        in_kernel = 0;
        c0 = accept_cyc[0];
        chk(accept_cyc.size() == 4 * NV + 1 && accept_cyc[accept_cyc.size() - 1] - c0 == 4 * NV,
            $sformatf("t=%0d spike %0d: kernel took %0d cycles, expected %0d",
                      t, s, accept_cyc[accept_cyc.size() - 1] - c0, 4 * NV));
      end
      // neuron update
      for (int k = 0; k < NV; k++) begin
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_V, 5'd0), 32'((ROW_V + k) * 64));
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_TMP, 5'd0), 32'((ROW_I + k) * 64));
        issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, R_ZERO), 32'((ROW_I + k) * 64));
        issue(enc_r(MOP_VARITH, 3'd5, 7'h0e, R_V, R_V, R_ALPHA));
        issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_V, R_V, R_TMP));
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
    for (int k = 0; k < NV; k++) begin
      issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_V, 5'd0), 32'((ROW_V + k) * 64));
      for (int l = 0; l < 32; l++) begin
        issue(enc_r(MOP_VEXTRACT, 3'd0, 7'd0, 5'd9, R_V, 5'(l)));
        chk(int'($signed(last_x)) == vref[32 * k + l], $sformatf("final V of neuron %0d", 32 * k + l));
      end
    end
    drain();
    $display("spikes=%0d over %0d steps, DMA beats during the kernel=%0d", n_spk, T, overlap_beats);
    chk(n_spk > 0 && n_spk < N * T, "layer neither silent nor saturated");
    chk(overlap_beats > 0, "no DMA transfer overlapped the kernel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
