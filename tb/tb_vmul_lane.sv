// tb_vmul_lane: checks the fixed-point multiply/round/shift lane against an
// independent 64-bit integer model, with directed rounding cases and
// random operands in all three rounding modes.
module tb_vmul_lane;
  import fenn_pkg::*;
  import fenn_ref_pkg::*;

  logic signed [15:0] a, b;
  logic [15:0] rnd, y;
  logic [3:0]  shift;
  rmode_e      rmode;
  int checks = 0, failures = 0;

  vmul_lane dut (.a, .b, .rnd, .shift, .rmode, .y);

  task automatic check(logic [15:0] exp, string what);
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL %s: a=%0d b=%0d rnd=%h shift=%0d mode=%0d y=%h exp=%h",
               what, a, b, rnd, shift, rmode, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed: 3 * 1 >> 1 : zero gives 1, nearest gives 2
    a = 3; b = 1; rnd = 0; shift = 1; rmode = RND_ZERO;    check(16'd1, "rz");
    rmode = RND_NEAREST;                                    check(16'd2, "rn");
    // 0.5 * 0.5 in s7.8: 128*128 >> 8 = 64
    a = 128; b = 128; shift = 8; rmode = RND_ZERO;          check(16'd64, "q8");
    // stochastic: fraction 5/16, random low bits 11 -> rounds up, 10 -> down
    a = 5; b = 1; shift = 4; rmode = RND_STOCH; rnd = 16'hff0b; check(16'd1, "rs up");
    rnd = 16'hff0a;                                         check(16'd0, "rs down");
    // negative arithmetic shift
    a = -16'sd7; b = 16'sd3; shift = 2; rmode = RND_ZERO;   check(16'hfffa, "neg");
    for (int n = 0; n < 4000; n++) begin
      a = $urandom; b = $urandom; rnd = $urandom; shift = $urandom;
      rmode = rmode_e'($urandom_range(0, 2));
      check(ref_mulshift(a, b, rnd, shift, rmode), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
