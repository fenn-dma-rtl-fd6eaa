// tb_vec_decoder: builds every instruction of the vector instruction set
// with random register fields and immediates and checks the decoded
// operation, operand routing, write flags, shift/rounding/saturation
// fields and offsets; also checks that words outside the quadrant or with
// unused opcodes are rejected.
module tb_vec_decoder;
  import fenn_pkg::*;

  word_t instr;
  dec_t  dec;
  int checks = 0, failures = 0;

  vec_decoder dut (.instr, .dec);

  task automatic expect_eq(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: instr=%h got %h exp %h", what, instr, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [4:0] rd, r1, r2;
    logic [6:0] f7;
    logic [11:0] imm;
    for (int n = 0; n < 400; n++) begin
      rd = $urandom; r1 = $urandom; r2 = $urandom; f7 = $urandom; imm = $urandom;
      if (f7[5:4] == 2'd3) f7[5:4] = 2'd1;
      if (imm[5:4] == 2'd3) imm[5:4] = 2'd2;

      // arithmetic group
      for (int f3 = 0; f3 < 6; f3++) begin
        instr = enc_r(MOP_VARITH, 3'(f3), f7, rd, r1, r2); #1;
        expect_eq(dec.valid, 1, "arith valid");
        expect_eq(dec.op, (f3 == 0) ? OP_VADD : (f3 == 1) ? OP_VSUB : (f3 == 2) ? OP_VAND :
                          (f3 == 3) ? OP_VSL : (f3 == 4) ? OP_VSR : OP_VMUL, "arith op");
        expect_eq({dec.ra, dec.rb, dec.rd}, {r1, r2, rd}, "arith regs");
        expect_eq({dec.use_ra, dec.use_rb, dec.vwrite, dec.xwrite}, 4'b1110, "arith flags");
        expect_eq({dec.shift, dec.rmode, dec.sat}, {f7[3:0], f7[5:4], f7[6]}, "arith fields");
        expect_eq(dec.uses_rng, (f3 == 5) && (f7[5:4] == 2'd2), "arith rng");
      end
      // tests write a scalar
      instr = enc_r(MOP_VTST, 3'd2, 7'd0, rd, r1, r2); #1;
      expect_eq(dec.op, OP_VTLT, "vtlt");
      expect_eq({dec.vwrite, dec.xwrite, dec.use_ra, dec.use_rb}, 4'b0111, "vt flags");
      // VSEL reads the old destination on port A and a scalar mask
      instr = enc_r(MOP_VSEL, 3'd0, 7'd0, rd, r1, r2); #1;
      expect_eq(dec.op, OP_VSEL, "vsel");
      expect_eq({dec.ra, dec.rb}, {rd, r2}, "vsel ports");
      expect_eq({dec.use_xs1, dec.vwrite}, 2'b11, "vsel flags");
      // immediate shifts
      instr = enc_i(MOP_VSHI, 3'd1, imm, rd, r1); #1;
      expect_eq(dec.op, OP_VSRI, "vsri");
      expect_eq({dec.shift, dec.rmode}, {imm[3:0], imm[5:4]}, "vsri fields");
      expect_eq(dec.uses_rng, imm[5:4] == 2'd2, "vsri rng");
      instr = enc_i(MOP_VSHI, 3'd0, imm, rd, r1); #1;
      expect_eq(dec.op, OP_VSLI, "vsli");
      expect_eq(dec.shift, imm[3:0], "vsli shift");
      // VLUI
      instr = enc_lui(rd, {imm, 4'ha}); #1;
      expect_eq({dec.op, dec.imm16, dec.rd}, {OP_VLUI, imm, 4'ha, rd}, "vlui");
      // VRNG
      instr = enc_r(MOP_VRNG, 3'd0, 7'd0, rd, 5'd0, 5'd0); #1;
      expect_eq({dec.op, dec.uses_rng, dec.vwrite}, {OP_VRNG, 2'b11}, "vrng");
      // VANDADD
      instr = enc_r(MOP_VANDADD, 3'd0, f7, rd, r1, r2); #1;
      expect_eq({dec.op, dec.shift, dec.use_ra, dec.use_xs2}, {OP_VANDADD, f7[3:0], 2'b11}, "vandadd");
      // loads
      for (int f3 = 0; f3 < 4; f3++) begin
        instr = enc_i(MOP_VLOAD, 3'(f3), imm, rd, r1); #1;
        expect_eq(dec.op, (f3 == 0) ? OP_VLOADV : (f3 == 1) ? OP_VLOADL : (f3 == 2) ? OP_VLOADR0 : OP_VLOADR1, "load op");
        expect_eq(dec.offset, {{20{imm[11]}}, imm}, "load offset");
        expect_eq({dec.is_load, dec.seed_load, dec.vwrite}, (f3 < 2) ? 3'b101 : 3'b010, "load flags");
        expect_eq({dec.use_ra, dec.use_xs1}, (f3 == 1) ? 2'b10 : 2'b01, "load addr src");
      end
      // stores
      instr = enc_s(MOP_VSTORE, 3'd0, imm, r1, r2); #1;
      expect_eq({dec.op, dec.rb, dec.use_xs1, dec.use_rb, dec.vwrite}, {OP_VSTOREV, r2, 3'b110}, "vstorev");
      expect_eq(dec.offset, {{20{imm[11]}}, imm}, "store offset");
      instr = enc_s(MOP_VSTORE, 3'd1, imm, r1, r2); #1;
      expect_eq({dec.op, dec.ra, dec.rb, dec.use_ra, dec.use_rb}, {OP_VSTOREL, r1, r2, 2'b11}, "vstorel");
      // data movement
      instr = enc_r(MOP_VEXTRACT, 3'd0, 7'd0, rd, r1, r2); #1;
      expect_eq({dec.op, dec.xwrite, dec.vwrite, dec.offset[4:0]}, {OP_VEXTRACT, 2'b10, r2}, "vextract");
      instr = enc_r(MOP_VFILL, 3'd0, 7'd0, rd, r1, 5'd0); #1;
      expect_eq({dec.op, dec.use_xs1, dec.vwrite}, {OP_VFILL, 2'b11}, "vfill");
      // rejects
      instr = enc_r(MOP_VARITH, 3'd0, f7, rd, r1, r2) ^ 32'h1; #1;
      expect_eq(dec.valid, 0, "other quadrant");
      instr = {f7, r2, r1, 3'd0, rd, 5'h1f, 2'b10}; #1;
      expect_eq(dec.valid, 0, "unused opcode");
      instr = enc_r(MOP_VARITH, 3'd7, f7, rd, r1, r2); #1;
      expect_eq(dec.valid, 0, "unused funct3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
