// xoroshiro32pp: one step of the xoroshiro32++ generator for one lane.
//
// The 32-bit state is held as two 16-bit halves s0 and s1 (in the vector
// core these are lane i of seed register 0 and seed register 1). Each step
// produces the 16-bit output
//     out = rotl(s0 + s1, D) + s0
// and the next state
//     t = s1 ^ s0;  s0' = rotl(s0, A) ^ t ^ (t << B);  s1' = rotl(t, C).
// Only additions, shifts, rotations and XORs are used. The generator is the
// one named by the design; the constants [A,B,C,D] = [13,5,10,9] are the
// published xoroshiro32++ constants and are parameters here.
//
// Interface: purely combinational.
module xoroshiro32pp #(
  parameter int unsigned A = 13,
  parameter int unsigned B = 5,
  parameter int unsigned C = 10,
  parameter int unsigned D = 9
) (
  input  logic [15:0] s0,
  input  logic [15:0] s1,
  output logic [15:0] out,
  output logic [15:0] s0_next,
  output logic [15:0] s1_next
);

  function automatic logic [15:0] rotl(logic [15:0] x, int unsigned k);
    return (x << k) | (x >> (16 - k));
  endfunction

  logic [15:0] t;

  always_comb begin
    out     = rotl(16'(s0 + s1), D) + s0;
    t       = s1 ^ s0;
    s0_next = rotl(s0, A) ^ t ^ 16'(t << B);
    s1_next = rotl(t, C);
  end

endmodule
