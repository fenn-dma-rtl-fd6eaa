// tb_scalar_bram: random byte-masked writes and reads on both ports of a
// small scalar BRAM against a shadow array, checking one-cycle read latency.
module tb_scalar_bram;
  localparam int WORDS = 64;
  logic clk = 0;
  logic a_en, b_en;
  logic [3:0] a_we, b_we;
  logic [5:0] a_addr, b_addr;
  logic [31:0] a_wdata, b_wdata, a_rdata, b_rdata, exp_a, exp_b;
  logic [31:0] shadow [WORDS];
  logic pa, pb;
  int checks = 0, failures = 0;

  scalar_bram #(.WORDS(WORDS)) dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
                                    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; pa = 0; pb = 0;
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk); b_en = 1; b_we = 4'hf; b_addr = 6'(w); b_wdata = $urandom; shadow[w] = b_wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (pa) begin checks++; if (a_rdata !== exp_a) begin failures++; $display("FAIL a"); end end
      if (pb) begin checks++; if (b_rdata !== exp_b) begin failures++; $display("FAIL b"); end end
      a_en = $urandom_range(0, 1); a_we = $urandom; a_addr = $urandom; a_wdata = $urandom;
      b_en = $urandom_range(0, 1); b_we = $urandom; b_addr = $urandom; b_wdata = $urandom;
      if (a_en && b_en && a_addr == b_addr) b_addr = b_addr + 1;
      exp_a = shadow[a_addr]; exp_b = shadow[b_addr]; pa = a_en; pb = b_en;
      for (int k = 0; k < 4; k++) begin
        if (a_en && a_we[k]) shadow[a_addr][k*8 +: 8] = a_wdata[k*8 +: 8];
        if (b_en && b_we[k]) shadow[b_addr][k*8 +: 8] = b_wdata[k*8 +: 8];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
