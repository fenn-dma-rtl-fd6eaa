// fenn_pkg: constants, instruction encoding and shared types of the FeNN
// vector co-processor (VEC) and its memory system.
//
// The vector unit has 32 lanes of signed 16-bit fixed-point values, so one
// vector is 512 bits, and a 32 x 512-bit register file. Vector instructions
// occupy the 32-bit RISC-V quadrant whose two low bits are 2'b10 (the
// compressed-instruction quadrant, freed because the host core is built
// without compressed instructions).
//
// Inside the quadrant the fields follow the usual RISC-V R/I/S layout:
//   [31:25] funct7  [24:20] rs2  [19:15] rs1  [14:12] funct3  [11:7] rd
//   [6:2]   major opcode        [1:0] = 2'b10
// Published field positions: the shift of VMUL and VANDADD is funct7[3:0],
// saturation of VADD/VSUB is funct7[6], the shift of VSLI/VSRI is imm[3:0]
// and the VSRI rounding mode imm[5:4]. Everything else here (the major
// opcode values, funct3 values, the VMUL rounding field funct7[5:4], the
// VLUI immediate in [31:16], the VEXTRACT lane index in [24:20] and the
// numeric rounding-mode codes) is this design's own choice.
package fenn_pkg;

  localparam int unsigned LANES     = 32;
  localparam int unsigned ELEM_W    = 16;
  localparam int unsigned VEC_W     = LANES * ELEM_W;   // 512
  localparam int unsigned NUM_VREGS = 32;
  localparam int unsigned XLEN      = 32;
  localparam int unsigned ID_W      = 4;                // issue/commit id width

  typedef logic [VEC_W-1:0]  vec_t;
  typedef logic [ELEM_W-1:0] elem_t;
  typedef logic [XLEN-1:0]   word_t;
  typedef logic [ID_W-1:0]   id_t;

  localparam logic [1:0] QUADRANT = 2'b10;

  // Major opcodes, instr[6:2]
  typedef enum logic [4:0] {
    MOP_VARITH   = 5'h00,  // VADD VSUB VAND VSL VSR VMUL (funct3)
    MOP_VTST     = 5'h01,  // VTEQ VTNE VTLT VTGE (funct3)
    MOP_VSEL     = 5'h02,
    MOP_VSHI     = 5'h03,  // VSLI VSRI (funct3)
    MOP_VLUI     = 5'h04,
    MOP_VRNG     = 5'h05,
    MOP_VANDADD  = 5'h06,
    MOP_VLOAD    = 5'h07,  // VLOAD.V VLOAD.L VLOAD.R0 VLOAD.R1 (funct3)
    MOP_VSTORE   = 5'h08,  // VSTORE.V VSTORE.L (funct3)
    MOP_VEXTRACT = 5'h09,
    MOP_VFILL    = 5'h0A
  } mop_e;

  // Rounding modes of VMUL and VSRI (the three inputs of the DSP C-mux)
  typedef enum logic [1:0] {
    RND_ZERO    = 2'd0,    // add 0
    RND_NEAREST = 2'd1,    // add half an output LSB
    RND_STOCH   = 2'd2     // add masked random number
  } rmode_e;

  // Operations after decoding
  typedef enum logic [4:0] {
    OP_NOP, OP_VADD, OP_VSUB, OP_VAND, OP_VSL, OP_VSR, OP_VMUL,
    OP_VTEQ, OP_VTNE, OP_VTLT, OP_VTGE, OP_VSEL, OP_VSLI, OP_VSRI,
    OP_VLUI, OP_VRNG, OP_VANDADD,
    OP_VLOADV, OP_VLOADL, OP_VLOADR0, OP_VLOADR1,
    OP_VEXTRACT, OP_VFILL, OP_VSTOREV, OP_VSTOREL
  } vop_e;

  // Decoded instruction. Vector read port A reads ra, port B reads rb.
  typedef struct packed {
    logic        valid;       // recognised vector instruction
    vop_e        op;
    logic [4:0]  rd;
    logic [4:0]  ra;          // vector register on read port A
    logic [4:0]  rb;          // vector register on read port B
    logic        use_ra;
    logic        use_rb;
    logic        use_xs1;     // needs scalar rs1 value
    logic        use_xs2;     // needs scalar rs2 value
    logic        vwrite;      // writes vector register rd
    logic        xwrite;      // writes scalar register rd (result interface)
    logic        uses_rng;    // consumes a random number from the seed registers
    logic        is_load;     // vector-register load (VLOAD.V / VLOAD.L)
    logic        seed_load;   // VLOAD.R0 / VLOAD.R1
    logic [3:0]  shift;
    rmode_e      rmode;
    logic        sat;
    logic [15:0] imm16;       // VLUI immediate
    logic [31:0] offset;      // sign-extended memory offset / VEXTRACT index
  } dec_t;

  // Instruction builders, used by testbenches and software models.
  function automatic word_t enc_r(mop_e mop, logic [2:0] f3, logic [6:0] f7,
                                  logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {f7, rs2, rs1, f3, rd, mop, QUADRANT};
  endfunction

  function automatic word_t enc_i(mop_e mop, logic [2:0] f3, logic [11:0] imm,
                                  logic [4:0] rd, logic [4:0] rs1);
    return {imm, rs1, f3, rd, mop, QUADRANT};
  endfunction

  function automatic word_t enc_s(mop_e mop, logic [2:0] f3, logic [11:0] imm,
                                  logic [4:0] rs1, logic [4:0] rs2);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], mop, QUADRANT};
  endfunction

  function automatic word_t enc_lui(logic [4:0] rd, logic [15:0] imm);
    return {imm, 4'b0000, rd, MOP_VLUI, QUADRANT};
  endfunction

endpackage
