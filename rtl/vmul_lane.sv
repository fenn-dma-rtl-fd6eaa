// vmul_lane: one vector lane of the fixed-point multiplier with rounding.
//
// Computes (a * b + c) >>> shift in a single combinational step, which maps
// onto one DSP slice (multiply-accumulate) followed by a barrel shifter.
// The addend c selects the rounding mode:
//   RND_ZERO    c = 0
//   RND_NEAREST c = 1 << (shift-1)             (half an output LSB; 0 if shift = 0)
//   RND_STOCH   c = rnd & ((1 << shift) - 1)   (uniform random fraction)
// The datapath (16-bit A and B, 32-bit C-mux output, 4-bit shift, 2-bit
// rounding select, 16-bit result) is the published one. That the shift is
// arithmetic and that the result is the low 16 bits of the shifted sum,
// without saturation, are this design's choices.
// VSRI reuses this unit with b = 1, so that its rounding modes are the same
// as those of VMUL.
//
// Interface: purely combinational, no clock.
module vmul_lane
  import fenn_pkg::*;
(
  input  logic signed [15:0] a,
  input  logic signed [15:0] b,
  input  logic        [15:0] rnd,    // random number of this lane
  input  logic        [3:0]  shift,
  input  rmode_e             rmode,
  output logic        [15:0] y
);

  logic signed [31:0] c;
  logic signed [31:0] mac;
  logic signed [31:0] shifted;
  logic        [15:0] mask;

  always_comb begin
    mask = 16'((17'd1 << shift) - 17'd1);
    unique case (rmode)
      RND_NEAREST: c = (shift == 4'd0) ? 32'sd0 : 32'sd1 <<< (shift - 4'd1);
      RND_STOCH:   c = signed'({16'd0, rnd & mask});
      default:     c = 32'sd0;
    endcase
    mac     = (32'(a) * 32'(b)) + c;
    shifted = mac >>> shift;
    y       = shifted[15:0];
  end

endmodule
