// datamover_model: behavioural model of an AXI DataMover plus DDR, for
// simulation only (not synthesizable). Handshakes are sampled just before
// the rising clock edge, so the clock period must be 10 time units.
//
// MM2S: takes a 72-bit command (BTT[22:0], SADDR[63:32], TAG[67:64]), waits
// LATENCY cycles, then streams BTT/64 beats of 512 bits from the DDR array,
// at most one beat every BEAT_GAP cycles, tlast on the last, and finally
// returns an 8-bit status {OKAY, 3'b0, TAG}. S2MM: takes a command, accepts
// BTT/64 beats (ready asserted at most every BEAT_GAP cycles) into the DDR
// array and returns a status. An address beyond the DDR array returns a
// status without OKAY (a decode error). The DDR array is word-addressed in
// 64-byte units and can be read and written hierarchically by a testbench.
module datamover_model #(
  parameter int DDR_WORDS = 4096,
  parameter int LATENCY   = 60,
  parameter int BEAT_GAP  = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [71:0]  mm2s_cmd_tdata,
  input  logic         mm2s_cmd_tvalid,
  output logic         mm2s_cmd_tready,
  output logic [7:0]   mm2s_sts_tdata,
  output logic         mm2s_sts_tvalid,
  input  logic         mm2s_sts_tready,
  input  logic [71:0]  s2mm_cmd_tdata,
  input  logic         s2mm_cmd_tvalid,
  output logic         s2mm_cmd_tready,
  output logic [7:0]   s2mm_sts_tdata,
  output logic         s2mm_sts_tvalid,
  input  logic         s2mm_sts_tready,
  output logic [511:0] mm2s_tdata,
  output logic         mm2s_tvalid,
  input  logic         mm2s_tready,
  output logic         mm2s_tlast,
  input  logic [511:0] s2mm_tdata,
  input  logic         s2mm_tvalid,
  output logic         s2mm_tready,
  input  logic         s2mm_tlast
);

  logic [511:0] ddr [DDR_WORDS];
  int mm2s_beats = 0, s2mm_beats = 0;   // totals, for the testbench

  initial begin
    mm2s_cmd_tready = 0; mm2s_sts_tvalid = 0; mm2s_sts_tdata = 0;
    s2mm_cmd_tready = 0; s2mm_sts_tvalid = 0; s2mm_sts_tdata = 0;
    mm2s_tvalid = 0; mm2s_tlast = 0; mm2s_tdata = 0; s2mm_tready = 0;
    for (int i = 0; i < DDR_WORDS; i++) ddr[i] = '0;
  end

  // MM2S engine
  initial begin
    logic [71:0] cmd;
    int n, a;
    bit ok, hs;
    @(posedge rst_n);
    forever begin
      @(negedge clk); mm2s_cmd_tready = 1;
      ok = 0;
      while (!ok) begin #4; ok = mm2s_cmd_tvalid; @(posedge clk); if (!ok) @(negedge clk); end
      cmd = mm2s_cmd_tdata;
      @(negedge clk); mm2s_cmd_tready = 0;
      repeat (LATENCY) @(negedge clk);
      n  = int'(cmd[22:0]) / 64;
      a  = int'(cmd[63:32] >> 6);
      ok = (a + n <= DDR_WORDS);
      for (int k = 0; k < n; k++) begin
        mm2s_tvalid = 1;
        mm2s_tdata  = ok ? ddr[a + k] : '0;
        mm2s_tlast  = (k == n - 1);
        hs = 0;
        while (!hs) begin #4; hs = mm2s_tready; @(posedge clk); if (!hs) @(negedge clk); end
        mm2s_beats++;
        @(negedge clk); mm2s_tvalid = 0; mm2s_tlast = 0;
        repeat (BEAT_GAP - 1) @(negedge clk);
      end
      mm2s_sts_tvalid = 1; mm2s_sts_tdata = {ok, 3'b000, cmd[67:64]};
      hs = 0;
      while (!hs) begin #4; hs = mm2s_sts_tready; @(posedge clk); if (!hs) @(negedge clk); end
      @(negedge clk); mm2s_sts_tvalid = 0;
    end
  end

  // S2MM engine
  initial begin
    logic [71:0] cmd;
    int n, a;
    bit ok, hs;
    @(posedge rst_n);
    forever begin
      @(negedge clk); s2mm_cmd_tready = 1;
      ok = 0;
      while (!ok) begin #4; ok = s2mm_cmd_tvalid; @(posedge clk); if (!ok) @(negedge clk); end
      cmd = s2mm_cmd_tdata;
      @(negedge clk); s2mm_cmd_tready = 0;
      n  = int'(cmd[22:0]) / 64;
      a  = int'(cmd[63:32] >> 6);
      ok = (a + n <= DDR_WORDS);
      for (int k = 0; k < n; k++) begin
        s2mm_tready = 1;
        hs = 0;
        while (!hs) begin #4; hs = s2mm_tvalid; if (hs && ok) ddr[a + k] = s2mm_tdata; @(posedge clk); if (!hs) @(negedge clk); end
        s2mm_beats++;
        @(negedge clk); s2mm_tready = 0;
        repeat (BEAT_GAP - 1) @(negedge clk);
      end
      repeat (LATENCY / 4) @(negedge clk);
      s2mm_sts_tvalid = 1; s2mm_sts_tdata = {ok, 3'b000, cmd[67:64]};
      hs = 0;
      while (!hs) begin #4; hs = s2mm_sts_tready; @(posedge clk); if (!hs) @(negedge clk); end
      @(negedge clk); s2mm_sts_tvalid = 0;
    end
  end

endmodule
