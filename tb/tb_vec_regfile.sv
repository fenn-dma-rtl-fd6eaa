// tb_vec_regfile: random writes and two-port reads against a shadow copy;
// checks that a write is visible from the next cycle on both ports.
module tb_vec_regfile;
  import fenn_pkg::*;

  logic clk = 0;
  logic [4:0] ra, rb, wa;
  vec_t rda, rdb, wdata;
  logic we;
  vec_t shadow [32];
  int checks = 0, failures = 0;

  vec_regfile dut (.clk, .ra, .rb, .rdata_a(rda), .rdata_b(rdb), .we, .wa, .wdata);

  always #5 clk = ~clk;

  function automatic vec_t rand_vec();
    vec_t v;
    for (int k = 0; k < 16; k++) v[k*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ra = 0; rb = 0; wa = 0; wdata = '0;
    // fill every register
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); we = 1; wa = 5'(r); wdata = rand_vec(); shadow[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      ra = $urandom; rb = $urandom;
      #1;
      checks++;
      if (rda !== shadow[ra] || rdb !== shadow[rb]) begin
        failures++;
        if (failures < 10) $display("FAIL read ra=%0d rb=%0d", ra, rb);
      end
      we = $urandom_range(0, 1); wa = $urandom; wdata = rand_vec();
      @(posedge clk);
      if (we) shadow[wa] = wdata;
      #1 we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
