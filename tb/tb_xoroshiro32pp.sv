// tb_xoroshiro32pp: steps the generator from several seeds for many steps
// and compares output and state with an independent model; also checks
// that a non-zero state never collapses to zero.
module tb_xoroshiro32pp;
  import fenn_ref_pkg::*;

  logic [15:0] s0, s1, out, s0n, s1n, m0, m1, mo;
  int checks = 0, failures = 0;

  xoroshiro32pp dut (.s0, .s1, .out, .s0_next(s0n), .s1_next(s1n));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int seed = 0; seed < 8; seed++) begin
      s0 = 16'(seed * 7919 + 1); s1 = 16'(seed * 104729);
      m0 = s0; m1 = s1;
      for (int n = 0; n < 500; n++) begin
        #1;
        mo = ref_xoro(m0, m1);
        checks++;
        if (out !== mo || s0n !== m0 || s1n !== m1) begin
          failures++;
          if (failures < 10) $display("FAIL seed %0d step %0d out=%h exp=%h", seed, n, out, mo);
        end
        checks++;
        if ({s0n, s1n} == 32'd0) failures++;
        s0 = s0n; s1 = s1n;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
