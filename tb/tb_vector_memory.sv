// tb_vector_memory: random traffic on both ports of a reduced-depth vector
// memory against a shadow array; checks the one-cycle read latency, the
// per-bank write enables of port b, and that each port sees the other's
// writes.
module tb_vector_memory;
  localparam int ROWS = 64;
  logic clk = 0;
  logic a_en, a_we, b_en;
  logic [7:0] b_we;
  logic [5:0] a_row, b_row;
  logic [511:0] a_wdata, b_wdata, a_rdata, b_rdata, shadow [ROWS], exp_a, exp_b;
  logic pend_a, pend_b;
  int checks = 0, failures = 0;

  vector_memory #(.ROWS(ROWS)) dut (.clk, .a_en, .a_we, .a_row, .a_wdata, .a_rdata,
                                    .b_en, .b_we, .b_row, .b_wdata, .b_rdata);
  always #5 clk = ~clk;

  function automatic logic [511:0] rv();
    logic [511:0] v;
    for (int k = 0; k < 16; k++) v[k*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_row = 0; b_row = 0; pend_a = 0; pend_b = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); a_en = 1; a_we = 1; a_row = 6'(r); a_wdata = rv(); shadow[r] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // data of the reads issued in the previous cycle
      if (pend_a) begin checks++; if (a_rdata !== exp_a) begin failures++; $display("FAIL a row"); end end
      if (pend_b) begin checks++; if (b_rdata !== exp_b) begin failures++; $display("FAIL b row"); end end
      a_en = $urandom_range(0, 1); a_we = $urandom_range(0, 1); a_row = $urandom; a_wdata = rv();
      b_en = $urandom_range(0, 1); b_we = $urandom; b_row = $urandom; b_wdata = rv();
      if (a_en && b_en && a_row == b_row) b_row = b_row + 1;
      pend_a = a_en; pend_b = b_en;
      exp_a = shadow[a_row]; exp_b = shadow[b_row];
      if (a_en && a_we) shadow[a_row] = a_wdata;
      if (b_en) for (int k = 0; k < 8; k++) if (b_we[k]) shadow[b_row][k*64 +: 64] = b_wdata[k*64 +: 64];
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
