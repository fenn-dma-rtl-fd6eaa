// vec_decoder: decodes one 32-bit vector instruction into a dec_t record.
//
// Recognises the instructions of the vector instruction set in the 2'b10
// quadrant (see fenn_pkg for the field layout) and reports which vector and
// scalar operands are read, what is written, the shift, rounding mode and
// saturation fields and the memory offset. Operand routing:
//   read port A = rs1, except VSEL, whose port A reads the old rd
//   read port B = rs2
// VSEL, VANDADD, VLOAD.V/R0/R1, VSTORE.V and VFILL take scalar rs1 and/or
// rs2 values from the host core; VLOAD.L and VSTORE.L take per-lane
// addresses from vector rs1. An unrecognised word yields valid = 0.
//
// Interface: purely combinational.
module vec_decoder
  import fenn_pkg::*;
(
  input  word_t instr,
  output dec_t  dec
);

  logic [4:0]  rd, rs1, rs2;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [11:0] imm_i, imm_s;
  logic [4:0]  mop;

  always_comb begin
    rd    = instr[11:7];
    rs1   = instr[19:15];
    rs2   = instr[24:20];
    f3    = instr[14:12];
    f7    = instr[31:25];
    imm_i = instr[31:20];
    imm_s = {instr[31:25], instr[11:7]};
    mop   = instr[6:2];

    dec          = '0;
    dec.op       = OP_NOP;
    dec.rmode    = RND_ZERO;
    dec.rd       = rd;
    dec.ra       = rs1;
    dec.rb       = rs2;
    dec.shift    = f7[3:0];
    dec.rmode    = rmode_e'(f7[5:4]);
    dec.sat      = f7[6];
    dec.imm16    = instr[31:16];
    dec.offset   = {{20{imm_i[11]}}, imm_i};

    if (instr[1:0] == QUADRANT) begin
      unique case (mop)
        MOP_VARITH: begin
          dec.valid  = (f3 <= 3'd5);
          dec.use_ra = 1'b1;
          dec.use_rb = 1'b1;
          dec.vwrite = 1'b1;
          unique case (f3)
            3'd0:    dec.op = OP_VADD;
            3'd1:    dec.op = OP_VSUB;
            3'd2:    dec.op = OP_VAND;
            3'd3:    dec.op = OP_VSL;
            3'd4:    dec.op = OP_VSR;
            default: dec.op = OP_VMUL;
          endcase
          dec.uses_rng = (dec.op == OP_VMUL) && (dec.rmode == RND_STOCH);
        end
        MOP_VTST: begin
          dec.valid  = (f3 <= 3'd3);
          dec.use_ra = 1'b1;
          dec.use_rb = 1'b1;
          dec.xwrite = 1'b1;
          unique case (f3)
            3'd0:    dec.op = OP_VTEQ;
            3'd1:    dec.op = OP_VTNE;
            3'd2:    dec.op = OP_VTLT;
            default: dec.op = OP_VTGE;
          endcase
        end
        MOP_VSEL: begin
          dec.valid   = 1'b1;
          dec.op      = OP_VSEL;
          dec.ra      = rd;
          dec.use_ra  = 1'b1;
          dec.use_rb  = 1'b1;
          dec.use_xs1 = 1'b1;
          dec.vwrite  = 1'b1;
        end
        MOP_VSHI: begin
          dec.valid    = (f3 <= 3'd1);
          dec.op       = (f3 == 3'd0) ? OP_VSLI : OP_VSRI;
          dec.use_ra   = 1'b1;
          dec.vwrite   = 1'b1;
          dec.shift    = imm_i[3:0];
          dec.rmode    = (f3 == 3'd0) ? RND_ZERO : rmode_e'(imm_i[5:4]);
          dec.uses_rng = (f3 != 3'd0) && (imm_i[5:4] == RND_STOCH);
        end
        MOP_VLUI: begin
          dec.valid  = 1'b1;
          dec.op     = OP_VLUI;
          dec.vwrite = 1'b1;
        end
        MOP_VRNG: begin
          dec.valid    = 1'b1;
          dec.op       = OP_VRNG;
          dec.vwrite   = 1'b1;
          dec.uses_rng = 1'b1;
        end
        MOP_VANDADD: begin
          dec.valid   = 1'b1;
          dec.op      = OP_VANDADD;
          dec.use_ra  = 1'b1;
          dec.use_xs2 = 1'b1;
          dec.vwrite  = 1'b1;
        end
        MOP_VLOAD: begin
          dec.valid = (f3 <= 3'd3);
          unique case (f3)
            3'd0: begin dec.op = OP_VLOADV;  dec.use_xs1 = 1'b1; dec.vwrite = 1'b1; dec.is_load = 1'b1; end
            3'd1: begin dec.op = OP_VLOADL;  dec.use_ra  = 1'b1; dec.vwrite = 1'b1; dec.is_load = 1'b1; end
            3'd2: begin dec.op = OP_VLOADR0; dec.use_xs1 = 1'b1; dec.seed_load = 1'b1; end
            default: begin dec.op = OP_VLOADR1; dec.use_xs1 = 1'b1; dec.seed_load = 1'b1; end
          endcase
        end
        MOP_VSTORE: begin
          dec.valid  = (f3 <= 3'd1);
          dec.offset = {{20{imm_s[11]}}, imm_s};
          dec.use_rb = 1'b1;
          if (f3 == 3'd0) begin
            dec.op      = OP_VSTOREV;
            dec.use_xs1 = 1'b1;
          end else begin
            dec.op     = OP_VSTOREL;
            dec.use_ra = 1'b1;
          end
        end
        MOP_VEXTRACT: begin
          dec.valid  = 1'b1;
          dec.op     = OP_VEXTRACT;
          dec.use_ra = 1'b1;
          dec.xwrite = 1'b1;
        end
        MOP_VFILL: begin
          dec.valid   = 1'b1;
          dec.op      = OP_VFILL;
          dec.use_xs1 = 1'b1;
          dec.vwrite  = 1'b1;
        end
        default: dec.valid = 1'b0;
      endcase
    end
    if (!dec.valid) dec.op = OP_NOP;
  end

endmodule
