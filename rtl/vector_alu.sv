// vector_alu: the execute-stage arithmetic unit of the vector core.
//
// Operates on 32 lanes of signed 16-bit values in parallel. Vector operand
// a comes from read port A (rs1, or the old rd for VSEL), b from read port B
// (rs2); xs1/xs2 are scalar register values delivered with the instruction.
// Results:
//   vres  vector result (VADD VSUB VAND VSL VSR VMUL VSEL VSLI VSRI VLUI
//         VRNG VANDADD VFILL)
//   xres  scalar result: one bit per lane for VTEQ/VTNE/VTLT/VTGE, the
//         sign-extended lane value for VEXTRACT.
// VADD/VSUB saturate to the 16-bit range when sat is set. VMUL and VSRI go
// through vmul_lane (DSP multiply-add plus barrel shifter with three rounding
// modes). VRNG returns the lane's random number shifted right by one, so it
// is a non-negative 15-bit value. VANDADD keeps the low `shift` bits of a and
// adds the low 16 bits of xs2.
// Design choices not fixed by the published description: right shifts are
// arithmetic, comparisons are signed, two-operand shifts use b[3:0], VANDADD
// and VMUL wrap rather than saturate, VEXTRACT sign-extends.
//
// Interface: purely combinational.
module vector_alu
  import fenn_pkg::*;
#(
  parameter int unsigned N_LANES = LANES
) (
  input  vop_e                     op,
  input  logic [N_LANES*16-1:0]    a,
  input  logic [N_LANES*16-1:0]    b,
  input  word_t                    xs1,
  input  word_t                    xs2,
  input  logic [3:0]               shift,
  input  rmode_e                   rmode,
  input  logic                     sat,
  input  logic [15:0]              imm16,
  input  logic [4:0]               index,
  input  logic [N_LANES*16-1:0]    rnd,
  output logic [N_LANES*16-1:0]    vres,
  output word_t                    xres
);

  function automatic logic [15:0] sat16(logic signed [16:0] x);
    if (x > 17'sd32767)       return 16'h7fff;
    else if (x < -17'sd32768) return 16'h8000;
    else                      return x[15:0];
  endfunction

  logic [N_LANES*16-1:0] mul_y;
  logic [N_LANES-1:0]    cmp;

  for (genvar i = 0; i < N_LANES; i++) begin : g_lane
    logic signed [15:0] ai, bi, mb;
    assign ai = signed'(a[i*16 +: 16]);
    assign bi = signed'(b[i*16 +: 16]);
    // VSRI is a multiply by one through the same rounding datapath
    assign mb = (op == OP_VSRI) ? 16'sd1 : bi;

    vmul_lane u_mul (
      .a     (ai),
      .b     (mb),
      .rnd   (rnd[i*16 +: 16]),
      .shift (shift),
      .rmode (rmode),
      .y     (mul_y[i*16 +: 16])
    );

    logic signed [16:0] sum, dif;
    logic [15:0]        lane_res;
    logic [15:0]        andmask;
    assign sum     = 17'(ai) + 17'(bi);
    assign dif     = 17'(ai) - 17'(bi);
    assign andmask = 16'((17'd1 << shift) - 17'd1);

    always_comb begin
      unique case (op)
        OP_VTEQ: cmp[i] = (ai == bi);
        OP_VTNE: cmp[i] = (ai != bi);
        OP_VTLT: cmp[i] = (ai <  bi);
        OP_VTGE: cmp[i] = (ai >= bi);
        default: cmp[i] = 1'b0;
      endcase

      unique case (op)
        OP_VADD:    lane_res = sat ? sat16(sum) : sum[15:0];
        OP_VSUB:    lane_res = sat ? sat16(dif) : dif[15:0];
        OP_VAND:    lane_res = ai & bi;
        OP_VSL:     lane_res = ai << bi[3:0];
        OP_VSR:     lane_res = 16'(ai >>> bi[3:0]);
        OP_VMUL:    lane_res = mul_y[i*16 +: 16];
        OP_VSEL:    lane_res = xs1[i] ? bi : ai;
        OP_VSLI:    lane_res = ai << shift;
        OP_VSRI:    lane_res = mul_y[i*16 +: 16];
        OP_VLUI:    lane_res = imm16;
        OP_VRNG:    lane_res = rnd[i*16 +: 16] >> 1;
        OP_VANDADD: lane_res = (ai & andmask) + xs2[15:0];
        OP_VFILL:   lane_res = xs1[15:0];
        default:    lane_res = ai;
      endcase
    end
    assign vres[i*16 +: 16] = lane_res;
  end

  logic [15:0] ext;
  always_comb begin
    ext = a[index*16 +: 16];
    unique case (op)
      OP_VTEQ, OP_VTNE, OP_VTLT, OP_VTGE: xres = word_t'(cmp);
      OP_VEXTRACT:                        xres = {{16{ext[15]}}, ext};
      default:                            xres = '0;
    endcase
  end

endmodule
