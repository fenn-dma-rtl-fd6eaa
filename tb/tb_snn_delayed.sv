// tb_snn_delayed: a small recurrent spiking network with synaptic delays,
// the kind of model used for spoken-digit classification, run on the full
// default-size SoC with the delayed spike-propagation kernel.
//
// Network: 64 LIF neurons (two 32-lane vectors), all-to-all recurrent
// connections with random 12-bit weights and delays of 1-7 timesteps,
// constant random external input, 24 timesteps. Each connection is one
// 16-bit word: weight in bits [15:4], twice the delay in bits [3:0] (lane-
// local addresses are byte addresses, so slot indices are kept doubled).
// Every neuron owns an 8-slot ring buffer of inputs in its lane's local
// memory (neuron vector k at byte base 16*k).
// Weights are brought from DDR into vector memory by one MM2S transfer.
// Per timestep the host, for each neuron vector,
//   reads and clears ring slot t mod 8 (VFILL, VLOAD.L, VSTORE.L),
//   updates V = (V*alpha >> 14) + I + I_ext (VMUL, saturating VADD),
//   tests V >= threshold (VTGE, spike mask returned to the host) and
//   subtracts the threshold from spiking neurons (VSUB.S, VSEL);
// then, for every spike, propagates the spiking neuron's two rows with the
// 7-instruction double-buffered loop
//   VLOAD.V d_next; VADD a = d + t; VANDADD a = (a & 15) + base;
//   VLOAD.L i, a; VSRI w = d >> 4; VADD.S i += w; VSTORE.L a, i
// which must issue one instruction per cycle (32 synapses every 7 cycles).
// The spike raster and final membrane potentials are compared with a
// network-level integer model written directly from the equations; every
// scalar result is also checked against the instruction-level model.
module tb_snn_delayed;
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


  localparam int N = 64, ND = 8, T = 24;
  localparam logic [4:0] R_ZERO = 0, R_T = 1, R_A = 2, R_I = 3, R_W = 4, R_D0 = 5, R_D1 = 6,
                         R_V = 7, R_ALPHA = 8, R_TH = 9, R_EXT = 10, R_TMP = 11;
  localparam logic [15:0] ALPHA = 16'h3a00, TH = 16'd2000;
  localparam int ROW_W0 = 0, ROW_EXT = 200, ROW_V = 210;

  logic [15:0] wrow [N][N];               // packed connection words, [pre][post]
  logic [15:0] iext [N];
  int          vref [N];
  int          buf_ref [N][ND];
  bit          zref [T][N];
  bit          zdut [T][N];
  int          accept_cyc [$];

  function automatic int sat16(int x);
    return x > 32767 ? 32767 : (x < -32768 ? -32768 : x);
  endfunction
  function automatic int s16(logic [15:0] x);
    return int'($signed(x));
  endfunction

  // network-level reference, straight from the LIF and propagation equations
  task automatic reference();
    int slot, d;
    for (int n = 0; n < N; n++) begin
      vref[n] = 0;
      for (int k = 0; k < ND; k++) buf_ref[n][k] = 0;
    end
    for (int t = 0; t < T; t++) begin
      slot = t % ND;
      for (int n = 0; n < N; n++) begin
        int i_in;
        i_in = buf_ref[n][slot];
        buf_ref[n][slot] = 0;
        vref[n] = s16(16'((vref[n] * s16(ALPHA)) >>> 14));
        vref[n] = sat16(vref[n] + i_in);
        vref[n] = sat16(vref[n] + s16(iext[n]));
        zref[t][n] = vref[n] >= s16(TH);
        if (zref[t][n]) vref[n] = sat16(vref[n] - s16(TH));
      end
      for (int j = 0; j < N; j++) if (zref[t][j])
        for (int n = 0; n < N; n++) begin
          d = int'(wrow[j][n][3:1]);
          buf_ref[n][(t + d) % ND] = sat16(buf_ref[n][(t + d) % ND] + s16(16'($signed(wrow[j][n]) >>> 4)));
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
    logic [31:0] zw [2];
    int pre [$];
    int n_iter, c0, n_spk;
    logic [4:0] dp, dn;
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
    // random network: weights in [-400, 240), delays 1..7; external input
    for (int j = 0; j < N; j++)
      for (int n = 0; n < N; n++)
        wrow[j][n] = {12'($urandom_range(0, 639) - 400), 3'($urandom_range(1, ND - 1)), 1'b0};
    for (int n = 0; n < N; n++) iext[n] = 16'($urandom_range(200, 450));
    // DDR image: row 2j+k = targets 32k..32k+31 of presynaptic neuron j
    for (int j = 0; j < N; j++)
      for (int k = 0; k < 2; k++)
        for (int l = 0; l < 32; l++) u_dm.ddr[2 * j + k][16*l +: 16] = wrow[j][32 * k + l];
    for (int k = 0; k < 2; k++)
      for (int l = 0; l < 32; l++) u_dm.ddr[ROW_EXT + k][16*l +: 16] = iext[32 * k + l];
    reference();
    repeat (4) @(posedge clk);
    rst_n = 1;

    // weights and external input: DDR -> vector memory (two MM2S transfers)
    axil_write(0, 32'h0); axil_write(1, 32'(ROW_W0 * 64)); axil_write(2, 32'(2 * N * 64));
    axil_write(6, 32'h1);
    do axil_read(7, v); while (v[0]);
    chk(v[2] && !v[4], "weight transfer");
    axil_write(0, 32'(ROW_EXT * 64)); axil_write(1, 32'(ROW_EXT * 64)); axil_write(2, 32'(2 * 64));
    axil_write(6, 32'h1);
    do axil_read(7, v); while (v[0]);
    chk(v[2] && !v[4], "input transfer");
    ddr_to_model(0, ROW_W0, 2 * N);
    ddr_to_model(ROW_EXT, ROW_EXT, 2);

    // initial state: V = 0, ring buffers cleared
    issue(enc_lui(R_ZERO, 16'h0));
    issue(enc_lui(R_ALPHA, ALPHA));
    issue(enc_lui(R_TH, TH));
    for (int k = 0; k < 2; k++) issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, R_ZERO), 32'((ROW_V + k) * 64));
    for (int a = 0; a < 2 * 2 * ND; a += 2) begin
      issue(enc_r(MOP_VFILL, 3'd0, 7'd0, R_A, 5'd0, 5'd0), 32'(a));
      issue(enc_s(MOP_VSTORE, 3'd1, 12'h0, R_A, R_ZERO));
    end

    n_spk = 0;
    for (int t = 0; t < T; t++) begin
      // neuron update
      for (int k = 0; k < 2; k++) begin
        issue(enc_r(MOP_VFILL, 3'd0, 7'd0, R_A, 5'd0, 5'd0), 32'(16 * k + 2 * (t % ND)));
        issue(enc_i(MOP_VLOAD, 3'd1, 12'h0, R_I, R_A));
        issue(enc_s(MOP_VSTORE, 3'd1, 12'h0, R_A, R_ZERO));
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_V, 5'd0), 32'((ROW_V + k) * 64));
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_EXT, 5'd0), 32'((ROW_EXT + k) * 64));
        issue(enc_r(MOP_VARITH, 3'd5, 7'h0e, R_V, R_V, R_ALPHA));
        issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_V, R_V, R_I));
        issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_V, R_V, R_EXT));
        issue(enc_r(MOP_VTST, 3'd3, 7'd0, 5'd9, R_V, R_TH));
        zw[k] = last_x;
        issue(enc_r(MOP_VARITH, 3'd1, 7'h40, R_TMP, R_V, R_TH));
        issue(enc_r(MOP_VSEL, 3'd0, 7'd0, R_V, 5'd0, R_TMP), zw[k]);
        issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, R_V), 32'((ROW_V + k) * 64));
        for (int l = 0; l < 32; l++) zdut[t][32 * k + l] = zw[k][l];
      end
      // spike propagation: rows of every spiking neuron, double-buffered
      pre.delete();
      for (int j = 0; j < N; j++) if (zw[j / 32][j % 32]) begin pre.push_back(2 * j); pre.push_back(2 * j + 1); end
      n_spk += pre.size() / 2;
      if (pre.size() == 0) continue;
      issue(enc_r(MOP_VFILL, 3'd0, 7'd0, R_T, 5'd0, 5'd0), 32'(2 * t));
      drain();
      accept_cyc.delete();
      dp = R_D0; dn = R_D1;
      issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, dp, 5'd0), 32'(pre[0] * 64));
      foreach (pre[it]) begin
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, dn, 5'd0), 32'(pre[(it + 1) % pre.size()] * 64));
        issue(enc_r(MOP_VARITH, 3'd0, 7'h00, R_A, dp, R_T));
        issue(enc_r(MOP_VANDADD, 3'd0, 7'd4, R_A, R_A, 5'd0), 32'h0, 32'(16 * (pre[it] % 2)));
        issue(enc_i(MOP_VLOAD, 3'd1, 12'h0, R_I, R_A));
        issue(enc_i(MOP_VSHI, 3'd1, 12'h004, R_W, dp));
        issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_I, R_I, R_W));
        issue(enc_s(MOP_VSTORE, 3'd1, 12'h0, R_A, R_I));
        {dp, dn} = {dn, dp};
      end
      @(posedge clk); #1;
      n_iter = pre.size();
      c0 = accept_cyc[0];
      chk(accept_cyc.size() == 7 * n_iter + 1 && accept_cyc[accept_cyc.size() - 1] - c0 == 7 * n_iter,
          $sformatf("t=%0d: %0d propagation iterations took %0d cycles, expected %0d",
                    t, n_iter, accept_cyc[accept_cyc.size() - 1] - c0, 7 * n_iter));
    end
    drain();
    for (int t = 0; t < T; t++)
      for (int n = 0; n < N; n++)
        chk(zdut[t][n] == zref[t][n], $sformatf("spike of neuron %0d at step %0d", n, t));
    for (int k = 0; k < 2; k++) begin
      issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_V, 5'd0), 32'((ROW_V + k) * 64));
      for (int l = 0; l < 32; l++) begin
        issue(enc_r(MOP_VEXTRACT, 3'd0, 7'd0, 5'd9, R_V, 5'(l)));
        chk(int'($signed(last_x)) == vref[32 * k + l], $sformatf("final V of neuron %0d", 32 * k + l));
      end
    end
    drain();
    $display("spikes=%0d over %0d steps, load_stall=%0d fwd_ex=%0d", n_spk, T, n_stall, n_fwd_ex);
    chk(n_spk > 0 && n_spk < N * T, "network neither silent nor saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
