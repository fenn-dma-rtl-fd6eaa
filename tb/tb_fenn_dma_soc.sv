// tb_fenn_dma_soc: end-to-end test of the programmable-logic top at its
// full default size (8192-row vector memory, 1024-word lane-local memories,
// 8192-word scalar memories).
//
// The testbench plays three external parties:
//   * the host RISC-V core: issues vector instructions with scalar operands,
//     commits each 1-3 cycles later (some killed), checks every scalar
//     result, programs the DMA through CSRs and fetches/loads from the
//     scalar memories;
//   * the processing system: fills the scalar memories through their second
//     ports and programs the DMA through AXI4-Lite;
//   * the AXI DataMover with DDR behind it (datamover_model, with a 60-cycle
//     first-beat latency and one beat every 2 cycles).
// Workload, each step checked against the reference model:
//   1. PS loads 128 weight/index rows from DDR into vector memory (MM2S),
//      checking the first-beat latency and the beat rate;
//   2. dense spike propagation over rows 0-63 while the host concurrently
//      runs an MM2S into rows 128-191 and an S2MM of rows 0-63 (the arbiter
//      interleaves them per beat);
//   3. sparse propagation: per-lane target index rows scatter-accumulate
//      into lane-local memory;
//   4. delayed propagation into a lane-local ring buffer (VANDADD);
//   5. LIF neuron updates with stochastic-rounded decay (VMUL), saturating
//      input, threshold test (VTGE) and reset (VSEL), plus RNG noise;
//   6. S2MM of the result rows back to DDR, compared with the model;
//   7. read-back of every vector register and of the lane-local region used.
// Mechanism counters (bypass from EX and WB, load-use stall, kill, commit
// hold, DMA conflict, MM2S/S2MM beats, CSR and AXI4-Lite accesses, scalar
// memory accesses, saturation, stochastic rounding, emitted spikes) must all
// be non-zero.
module tb_fenn_dma_soc;
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
    cq.push_back('{next_id, kill, cyc + $urandom_range(1, 3) - 1});
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

  // register numbers used by the kernels
  localparam logic [4:0] R_ZERO = 0, R_W = 1, R_ACC = 2, R_IDX = 3, R_MASK = 4, R_T = 5,
                         R_V = 10, R_ALPHA = 11, R_TH = 12, R_RST = 13, R_NOISE = 14, R_TMP = 15;

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // registers the kernels write (the others keep their power-up contents)
  localparam logic [4:0] used_regs [12] = '{R_TMP, R_ZERO, R_W, R_ACC, R_IDX, R_MASK, R_T, R_V, R_ALPHA,
                                             R_TH, R_RST, R_NOISE};

  initial begin
    logic [31:0] v;
    int spk;
    issue_valid = 0; issue_instr = 0; issue_rs1 = 0; issue_rs2 = 0; issue_id = 0;
    commit_valid = 0; commit_id = 0; commit_kill = 0;
    imem_en = 0; imem_addr = 0; dmem_en = 0; dmem_we = 0; dmem_addr = 0; dmem_wdata = 0;
    ps_imem_en = 0; ps_imem_we = 0; ps_imem_addr = 0; ps_imem_wdata = 0;
    ps_dmem_en = 0; ps_dmem_we = 0; ps_dmem_addr = 0; ps_dmem_wdata = 0;
    csr_en = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0; wstrb = 0;
    m = new(ROWS, DEPTH);
    #1;
    // DDR contents: rows 0-63 weights in [-64, 63], rows 64-127 and 128-191
    // random (used as index / delay rows)
    for (int r = 0; r < 192; r++)
      for (int l = 0; l < 32; l++)
        u_dm.ddr[r][16*l +: 16] = (r < 64) ? 16'($signed(7'($urandom))) : 16'($urandom);
    repeat (4) @(posedge clk);
    rst_n = 1;

    // --- 0. PS fills the scalar memories; the host fetches and loads them
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      ps_imem_en = 1; ps_imem_we = 4'hf; ps_imem_addr = 13'(i * 97); ps_imem_wdata = 32'h13 + 32'(i << 7);
      ps_dmem_en = 1; ps_dmem_we = 4'hf; ps_dmem_addr = 13'(8191 - i); ps_dmem_wdata = 32'(i * 32'h01010101);
    end
    @(negedge clk); ps_imem_en = 0; ps_dmem_en = 0;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      imem_en = 1; imem_addr = 13'(i * 97); dmem_en = 1; dmem_we = 0; dmem_addr = 13'(8191 - i);
      @(negedge clk);
      imem_en = 0; dmem_en = 0;
      chk(imem_rdata == 32'h13 + 32'(i << 7), "instruction fetch");
      chk(dmem_rdata == 32'(i * 32'h01010101), "data load");
    end

    // --- 1. PS: MM2S of 128 rows DDR[0..] -> vector memory row 0
    axil_write(0, 32'h0);  axil_write(1, 32'h0); axil_write(2, 32'(128 * 64));
    mm_beat_cyc.delete();
    axil_write(6, 32'h1);
    do axil_read(7, v); while (v[0]);
    chk(v[2] && !v[4], $sformatf("MM2S done without error (status %h)", v));
    chk(mm_beat_cyc.size() == 128, "MM2S beat count");
    chk(mm_beat_cyc[0] - mm_cmd_cyc >= LATENCY, "MM2S first-beat latency");
    chk(mm_beat_cyc[127] - mm_beat_cyc[0] == GAP * 127,
        $sformatf("MM2S rate: 128 beats over %0d cycles", mm_beat_cyc[127] - mm_beat_cyc[0]));
    ddr_to_model(0, 0, 128);

    // --- 2. dense propagation with concurrent MM2S and S2MM from the host
    csr_write(0, 32'(128 * 64)); csr_write(1, 32'(128 * 64)); csr_write(2, 32'(64 * 64));
    csr_write(3, 32'h0);         csr_write(4, 32'(1024 * 64)); csr_write(5, 32'(64 * 64));
    csr_write(6, 32'h3);
    kill_pct = 5;
    issue(enc_lui(R_ACC, 16'h0));
    for (int rep = 0; rep < 3; rep++)
      for (int i = 0; i < 64; i++)
        if ($urandom_range(0, 3) == 0 || rep == 2) begin
          issue(enc_i(MOP_VLOAD, 3'd0, 12'(i % 32 * 64), R_W, 5'd0), 32'(i / 32 * 2048));
          issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_ACC, R_ACC, R_W));
        end
    issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, R_ACC), 32'(256 * 64));
    check_reg(R_ACC);
    drain();
    do csr_read(7, v); while (v[1:0] != 0);
    chk(v[3:2] == 2'b11 && v[5:4] == 2'b00, $sformatf("concurrent DMA status %h", v));
    check_ddr(1024, 0, 64, "S2MM during compute");
    ddr_to_model(128, 128, 64);

    // --- 3. sparse propagation into lane-local memory (all of it cleared
    // first: a killed VAND leaves an unmasked index)
    kill_pct = 0;
    issue(enc_lui(R_ZERO, 16'h0));
    for (int a = 0; a < 2 * DEPTH; a += 2) begin
      issue(enc_r(MOP_VFILL, 3'd0, 7'd0, R_T, 5'd0, 5'd0), 32'(a));
      issue(enc_s(MOP_VSTORE, 3'd1, 12'h0, R_T, R_ZERO));
    end
    kill_pct = 5;
    issue(enc_lui(R_MASK, 16'h00fe));                 // even byte address, 128 words
    for (int i = 0; i < 64; i++) if ($urandom_range(0, 1) == 0) begin
      issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_W, 5'd0), 32'(i * 64));
      issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_IDX, 5'd0), 32'((64 + i) * 64));
      issue(enc_r(MOP_VARITH, 3'd2, 7'h00, R_IDX, R_IDX, R_MASK));
      issue(enc_i(MOP_VLOAD, 3'd1, 12'h0, R_TMP, R_IDX));
      issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_TMP, R_TMP, R_W));
      issue(enc_s(MOP_VSTORE, 3'd1, 12'h0, R_IDX, R_TMP));
    end

    check_reg(R_TMP);
    // --- 4. delayed propagation into a 32-slot ring buffer at byte 256
    for (int t = 0; t < 8; t++) begin
      for (int i = 0; i < 16; i++) if ($urandom_range(0, 2) == 0) begin
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_W, 5'd0), 32'(i * 64));
        issue(enc_i(MOP_VLOAD, 3'd0, 12'h0, R_IDX, 5'd0), 32'((128 + i) * 64));
        // slot = ((delay + t) mod 32) * 2 + 256
        issue(enc_r(MOP_VANDADD, 3'd0, 7'd5, R_IDX, R_IDX, 5'd0), 32'h0, 32'(t));
        issue(enc_r(MOP_VARITH, 3'd0, 7'h00, R_IDX, R_IDX, R_IDX));
        issue(enc_r(MOP_VANDADD, 3'd0, 7'd6, R_IDX, R_IDX, 5'd0), 32'h0, 32'd256);
        issue(enc_i(MOP_VLOAD, 3'd1, 12'h0, R_TMP, R_IDX));
        issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_TMP, R_TMP, R_W));
        issue(enc_s(MOP_VSTORE, 3'd1, 12'h0, R_IDX, R_TMP));
      end
    end

    check_reg(R_TMP);
    // --- 5. LIF neurons: V = V*alpha (stochastic) + I + noise; spike/reset
    issue(enc_lui(R_V, 16'h0));
    issue(enc_lui(R_ALPHA, 16'h3c00));                // 0.9375 in Q1.14
    issue(enc_lui(R_TH, 16'h0800));
    issue(enc_lui(R_RST, 16'h0));
    for (int t = 0; t < 40; t++) begin
      issue(enc_r(MOP_VARITH, 3'd5, 7'h2e, R_V, R_V, R_ALPHA));        // RS, shift 14
      issue(enc_r(MOP_VRNG, 3'd0, 7'd0, R_NOISE, 5'd0, 5'd0));
      issue(enc_i(MOP_VSHI, 3'd1, 12'h01a, R_NOISE, R_NOISE));         // RN, >> 10
      issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_V, R_V, R_NOISE));
      issue(enc_r(MOP_VARITH, 3'd0, 7'h40, R_V, R_V, R_ACC));
      issue(enc_r(MOP_VTST, 3'd3, 7'd0, 5'd7, R_V, R_TH));             // VTGE -> x7
      spk = $countones(last_x);
      n_spikes += spk;
      issue(enc_r(MOP_VSEL, 3'd0, 7'd0, R_V, 5'd0, R_RST), last_x);
    end
    for (int t = 0; t < 20; t++) begin
      issue(enc_r(MOP_VARITH, 3'd5, 7'h2e, R_TMP, R_W, R_ALPHA));
      issue(enc_i(MOP_VSHI, 3'd1, 12'h024, R_W, R_TMP));               // RS, >> 4
    end
    kill_pct = 0;
    issue(enc_s(MOP_VSTORE, 3'd0, 12'h0, 5'd0, R_V), 32'(257 * 64));
    issue(enc_s(MOP_VSTORE, 3'd0, 12'h40, 5'd0, R_ACC), 32'(257 * 64));
    issue(enc_s(MOP_VSTORE, 3'd0, 12'h80, 5'd0, R_W), 32'(257 * 64));
    drain();

    // --- 6. S2MM results (rows 256-259) back to DDR
    axil_write(3, 32'(256 * 64)); axil_write(4, 32'(2048 * 64)); axil_write(5, 32'(4 * 64));
    axil_write(6, 32'h2);
    do axil_read(7, v); while (v[1]);
    chk(v[3] && !v[5], $sformatf("S2MM status %h", v));
    check_ddr(2048, 256, 4, "result rows");

    // --- 7. read back the registers written and the lane-local region used
    foreach (used_regs[i]) check_reg(used_regs[i]);
    for (int a = 0; a < 320; a += 2) begin
      issue(enc_r(MOP_VFILL, 3'd0, 7'd0, R_T, 5'd0, 5'd0), 32'(a));
      issue(enc_i(MOP_VLOAD, 3'd1, 12'h0, R_TMP, R_T));
      for (int l = 0; l < 32; l++) issue(enc_r(MOP_VEXTRACT, 3'd0, 7'd0, 5'd8, R_TMP, 5'(l)));
    end
    drain();

    $display("events: fwd_ex=%0d fwd_wb=%0d load_stall=%0d kill=%0d commit_hold=%0d dma_conflict=%0d",
             n_fwd_ex, n_fwd_wb, n_stall, n_kill, n_hold, n_conflict);
    $display("        mm2s_beats=%0d s2mm_beats=%0d csr=%0d axil=%0d scalar_mem=%0d sat=%0d stoch=%0d spikes=%0d",
             n_mm_beats, n_s2_beats, n_csr, n_axil, n_smem, n_sat, n_stoch, n_spikes);
    chk(n_fwd_ex > 0, "no bypass from execute");
    chk(n_fwd_wb > 0, "no bypass from writeback");
    chk(n_stall > 0, "no load-use stall");
    chk(n_kill > 0, "no kill");
    chk(n_hold > 0, "no commit hold");
    chk(n_conflict > 0, "no DMA conflict");
    chk(n_mm_beats == 192, "MM2S beats");
    chk(n_s2_beats == 68, "S2MM beats");
    chk(n_csr > 0 && n_axil > 0 && n_smem > 0, "register / scalar memory accesses");
    chk(n_sat > 0, "no saturation");
    chk(n_spikes > 0, "no spikes");
    chk(n_stoch > 0, "no stochastic rounding");
    chk(rq.size() == 0 && cq.size() == 0, "queues empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
