// tb_dma_controller: exercises the DMA register file and both command
// sequencers.
//   * registers written over AXI4-Lite (with a partial byte strobe) read
//     back identically over AXI4-Lite and over the CSR port;
//   * a CSR start of MM2S issues one DataMover command with the right
//     length, address, type/EOF bits and tag, held stable under
//     backpressure, and one arbiter start with the right row and beat
//     count; busy/done follow the status word and the arbiter's done;
//   * a start while busy is ignored;
//   * an AXI4-Lite start of S2MM whose status lacks OKAY sets the error
//     bit.
module tb_dma_controller;
  logic clk = 0, rst_n = 0;
  logic [4:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic csr_en, csr_we;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic [71:0] mm_cmd, s2_cmd;
  logic mm_cmd_v, mm_cmd_r, s2_cmd_v, s2_cmd_r;
  logic [7:0] mm_sts, s2_sts;
  logic mm_sts_v, mm_sts_r, s2_sts_v, s2_sts_r;
  logic a_mm_start, a_mm_done, a_s2_start, a_s2_done;
  logic [12:0] a_mm_row, a_s2_row;
  logic [16:0] a_mm_beats, a_s2_beats;
  int checks = 0, failures = 0;
  int n_mm_cmd = 0, n_mm_start = 0;

  dma_controller dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .csr_en, .csr_we, .csr_addr, .csr_wdata, .csr_rdata,
    .m_mm2s_cmd_tdata(mm_cmd), .m_mm2s_cmd_tvalid(mm_cmd_v), .m_mm2s_cmd_tready(mm_cmd_r),
    .s_mm2s_sts_tdata(mm_sts), .s_mm2s_sts_tvalid(mm_sts_v), .s_mm2s_sts_tready(mm_sts_r),
    .m_s2mm_cmd_tdata(s2_cmd), .m_s2mm_cmd_tvalid(s2_cmd_v), .m_s2mm_cmd_tready(s2_cmd_r),
    .s_s2mm_sts_tdata(s2_sts), .s_s2mm_sts_tvalid(s2_sts_v), .s_s2mm_sts_tready(s2_sts_r),
    .arb_mm2s_start(a_mm_start), .arb_mm2s_row(a_mm_row), .arb_mm2s_beats(a_mm_beats), .arb_mm2s_done(a_mm_done),
    .arb_s2mm_start(a_s2_start), .arb_s2mm_row(a_s2_row), .arb_s2mm_beats(a_s2_beats), .arb_s2mm_done(a_s2_done));

  always #5 clk = ~clk;
  always @(negedge clk) begin
    #4;
    n_mm_cmd   += int'(mm_cmd_v && mm_cmd_r);
    n_mm_start += int'(a_mm_start);
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  task automatic axil_write(int idx, logic [31:0] d, logic [3:0] strb = 4'hf);
    bit aw_done, w_done, b_done;
    @(negedge clk);
    awvalid = 1; awaddr = 5'(idx * 4); wvalid = 1; wdata = d; wstrb = strb; bready = 1;
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

  logic [31:0] cr;
  task automatic csr_rd(int idx);
    csr_addr = 12'h800 + 12'(idx);
    #1;
    cr = csr_rdata;
  endtask

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v, vals [6];
    logic [71:0] c;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0; wstrb = 0; csr_en = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    mm_cmd_r = 0; s2_cmd_r = 0; mm_sts_v = 0; s2_sts_v = 0; mm_sts = 0; s2_sts = 0;
    a_mm_done = 0; a_s2_done = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    vals = '{32'h1000_0040, 32'h0000_0400, 32'h0000_0c00, 32'h0000_8000, 32'h2000_0000, 32'h0000_0080};
    for (int i = 0; i < 6; i++) axil_write(i, vals[i]);
    axil_write(5, 32'hdead_0100, 4'b0010);          // byte 1 only
    vals[5] = 32'h0000_0180 & 32'hffff_00ff | 32'h0000_0100;
    for (int i = 0; i < 6; i++) begin
      axil_read(i, v);
      chk(v === vals[i], $sformatf("axil reg %0d = %h", i, v));
      @(negedge clk);
      csr_rd(i); chk(cr === vals[i], $sformatf("csr reg %0d", i));
    end

    // MM2S via CSR, command held under backpressure
    csr_write(6, 32'h1);
    @(negedge clk);
    chk(n_mm_start == 1, "arbiter start pulse");
    chk(a_mm_row == 13'(32'h400 >> 6) && a_mm_beats == 17'(32'hc00 / 64), "arbiter row/beats");
    chk(mm_cmd_v, "mm2s command valid");
    c = mm_cmd;
    repeat (3) @(negedge clk);
    chk(mm_cmd_v && mm_cmd === c, "command stable");
    chk(c[22:0] == 23'h0c00 && c[23] && c[30] && c[63:32] == 32'h1000_0040, "command fields");
    csr_rd(7); chk(cr == 32'h1, "busy while running");
    csr_write(6, 32'h1);                            // ignored: busy
    mm_cmd_r = 1;
    @(negedge clk); mm_cmd_r = 0;
    repeat (3) @(negedge clk);
    chk(!mm_cmd_v && n_mm_cmd == 1 && n_mm_start == 1, "one command only");
    mm_sts_v = 1; mm_sts = {1'b1, 3'b0, c[67:64]};
    @(negedge clk); mm_sts_v = 0;
    repeat (2) @(negedge clk);
    csr_rd(7); chk(cr == 32'h1, "still busy until the arbiter is done");
    a_mm_done = 1; @(negedge clk); a_mm_done = 0; @(negedge clk);
    csr_rd(7); chk(cr == 32'h4, "mm2s done");

    // S2MM via AXI4-Lite, failing status
    axil_write(6, 32'h2);
    @(negedge clk);
    chk(s2_cmd_v && s2_cmd[63:32] == 32'h2000_0000 && s2_cmd[22:0] == 23'h180, "s2mm command");
    chk(s2_cmd[67:64] == c[67:64] + 4'd1, "tag increments");
    chk(a_s2_row == 13'(32'h8000 >> 6) && a_s2_beats == 17'd6, "s2mm arbiter row/beats");
    s2_cmd_r = 1; @(negedge clk); s2_cmd_r = 0;
    a_s2_done = 1; @(negedge clk); a_s2_done = 0;
    repeat (2) @(negedge clk);
    s2_sts_v = 1; s2_sts = 8'h05; @(negedge clk); s2_sts_v = 0; @(negedge clk);
    axil_read(7, v);
    chk(v == 32'h2c, $sformatf("s2mm done with error, mm2s done kept: %h", v));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
