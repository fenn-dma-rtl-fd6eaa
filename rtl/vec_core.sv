// vec_core: the FeNN vector co-processor (VEC).
//
// A three-stage in-order pipeline, decode -> execute -> writeback, that runs
// the vector instructions offloaded by the scalar RISC-V host core. Each
// vector holds 32 signed 16-bit lanes (512 bits).
//
// Host interface (a reduced form of an eXtension interface):
//   issue   issue_valid/issue_ready carry the instruction word, the values of
//           the host's scalar rs1/rs2 and an id. issue_accept says whether
//           the word is a vector instruction, issue_writeback whether it
//           returns a scalar result.
//   commit  commit_valid/commit_id/commit_kill: the host confirms (or kills)
//           an issued instruction. An instruction waits in execute until its
//           commit has arrived; a killed one leaves the pipeline as a bubble,
//           so nothing it would do to registers or memory happens.
//   result  result_valid/id/rd/data returns scalar results (VTxx bit masks,
//           VEXTRACT) from writeback. The host always accepts it.
//
// Decode reads the register file and the two RNG seed registers. Bypass
// multiplexers replace a register-file operand by the ALU output of the
// instruction in execute or by the value in writeback when those write the
// same register, so dependent arithmetic runs back to back. Memory loads
// return data in writeback only (1-cycle memory latency), so an instruction
// that needs a load result in the very next slot is held one cycle in
// decode (issue_ready low); code that double-buffers loads never sees this.
//
// Execute runs the vector ALU and drives the two memories: port a of the
// vector memory (one 512-bit row per access, byte address >> 6) and the
// lane-local memories (one 16-bit word per lane, each lane with its own byte
// address >> 1). VLOAD.R0/R1 load a vector-memory row into seed register 0
// or 1. Each lane's random number comes from a xoroshiro32++ step over lane i
// of the two seed registers; the seeds advance whenever an instruction that
// consumes randomness (VRNG, stochastic rounding) is accepted.
//
// Published: three stages, 32 lanes, 32 x 512-bit register file with two
// read and one write port, forwarding from the ALU to decode, seed registers
// read in decode, the instruction set. This design's own choices: the
// interface signal set, the load-use hold, waiting in execute for commit,
// when the RNG advances and the seed reset value.
module vec_core
  import fenn_pkg::*;
#(
  parameter int unsigned VMEM_ROWS = 8192,
  parameter int unsigned LLM_DEPTH = 1024,
  localparam int unsigned ROW_W    = $clog2(VMEM_ROWS),
  localparam int unsigned LLM_AW   = $clog2(LLM_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // issue
  input  logic                     issue_valid,
  output logic                     issue_ready,
  input  word_t                    issue_instr,
  input  word_t                    issue_rs1,
  input  word_t                    issue_rs2,
  input  id_t                      issue_id,
  output logic                     issue_accept,
  output logic                     issue_writeback,
  // commit
  input  logic                     commit_valid,
  input  id_t                      commit_id,
  input  logic                     commit_kill,
  // result
  output logic                     result_valid,
  output id_t                      result_id,
  output logic [4:0]               result_rd,
  output word_t                    result_data,
  // vector memory, port a
  output logic                     vmem_en,
  output logic                     vmem_we,
  output logic [ROW_W-1:0]         vmem_row,
  output vec_t                     vmem_wdata,
  input  vec_t                     vmem_rdata,
  // lane-local memories
  output logic                     llm_en,
  output logic                     llm_we,
  output logic [LANES*LLM_AW-1:0]  llm_addr,
  output vec_t                     llm_wdata,
  input  vec_t                     llm_rdata,
  // pipeline events, one pulse each (for performance counters)
  output logic                     ev_fwd_ex,
  output logic                     ev_fwd_wb,
  output logic                     ev_load_stall,
  output logic                     ev_kill
);

  typedef enum logic [1:0] {SRC_ALU, SRC_VMEM, SRC_LLM} wb_src_e;

  // ---------------------------------------------------------------- decode
  dec_t dec;
  vec_decoder u_dec (.instr(issue_instr), .dec(dec));

  // ID/EX register
  logic  ex_valid, ex_committed, ex_killed;
  dec_t  ex_dec;
  vec_t  ex_a, ex_b, ex_rnd;
  word_t ex_xs1, ex_xs2;
  id_t   ex_id;

  // EX/WB register
  logic    wb_valid, wb_vwrite, wb_xwrite, wb_seed0, wb_seed1;
  logic [4:0] wb_rd;
  id_t     wb_id;
  vec_t    wb_alu;
  word_t   wb_x;
  wb_src_e wb_src;
  vec_t    wb_data;

  vec_t  alu_vres;
  word_t alu_xres;

  // register file
  vec_t rf_a, rf_b;
  vec_regfile u_rf (
    .clk     (clk),
    .ra      (dec.ra),
    .rb      (dec.rb),
    .rdata_a (rf_a),
    .rdata_b (rf_b),
    .we      (wb_valid && wb_vwrite),
    .wa      (wb_rd),
    .wdata   (wb_data)
  );

  logic commit_ex, kill_ex, ex_hold, load_use, seed_haz, d_fire;

  // bypass multiplexers
  logic ex_fwd_ok;
  logic fwd_ex_a, fwd_ex_b, fwd_wb_a, fwd_wb_b;
  vec_t op_a, op_b;

  always_comb begin
    ex_fwd_ok = ex_valid && ex_dec.vwrite && !ex_dec.is_load && !kill_ex;
    fwd_ex_a  = ex_fwd_ok && dec.use_ra && (ex_dec.rd == dec.ra);
    fwd_ex_b  = ex_fwd_ok && dec.use_rb && (ex_dec.rd == dec.rb);
    fwd_wb_a  = wb_valid && wb_vwrite && dec.use_ra && (wb_rd == dec.ra);
    fwd_wb_b  = wb_valid && wb_vwrite && dec.use_rb && (wb_rd == dec.rb);
    op_a = fwd_ex_a ? alu_vres : (fwd_wb_a ? wb_data : rf_a);
    op_b = fwd_ex_b ? alu_vres : (fwd_wb_b ? wb_data : rf_b);
  end

  // seed registers and per-lane RNG
  vec_t seed0, seed1, seed0_next, seed1_next, rnd;
  for (genvar i = 0; i < LANES; i++) begin : g_rng
    xoroshiro32pp u_rng (
      .s0      (seed0[i*16 +: 16]),
      .s1      (seed1[i*16 +: 16]),
      .out     (rnd[i*16 +: 16]),
      .s0_next (seed0_next[i*16 +: 16]),
      .s1_next (seed1_next[i*16 +: 16])
    );
  end

  // hazards and handshake

  always_comb begin
    commit_ex = commit_valid && (commit_id == ex_id);
    kill_ex   = ex_killed || (commit_ex && commit_kill);
    ex_hold   = ex_valid && !ex_committed && !commit_ex;
    load_use  = dec.valid && ex_valid && ex_dec.is_load && !kill_ex &&
                ((dec.use_ra && ex_dec.rd == dec.ra) || (dec.use_rb && ex_dec.rd == dec.rb));
    seed_haz  = dec.valid && dec.uses_rng &&
                ((ex_valid && ex_dec.seed_load) || (wb_valid && (wb_seed0 || wb_seed1)));
    issue_ready     = !(ex_hold || load_use || seed_haz);
    issue_accept    = dec.valid;
    issue_writeback = dec.valid && dec.xwrite;
    d_fire          = issue_valid && issue_ready && dec.valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++) begin
        seed0[i*16 +: 16] <= 16'(i + 1);
        seed1[i*16 +: 16] <= 16'h9e37;
      end
    end else if (wb_valid && wb_seed0) begin
      seed0 <= wb_data;
    end else if (wb_valid && wb_seed1) begin
      seed1 <= wb_data;
    end else if (d_fire && dec.uses_rng) begin
      seed0 <= seed0_next;
      seed1 <= seed1_next;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_valid     <= 1'b0;
      ex_committed <= 1'b0;
      ex_killed    <= 1'b0;
    end else if (!ex_hold) begin
      ex_valid     <= d_fire;
      ex_committed <= commit_valid && (commit_id == issue_id);
      ex_killed    <= commit_valid && (commit_id == issue_id) && commit_kill;
    end else if (commit_ex) begin
      ex_committed <= 1'b1;
      ex_killed    <= commit_kill;
    end
  end

  always_ff @(posedge clk) begin
    if (!ex_hold && d_fire) begin
      ex_dec <= dec;
      ex_a   <= op_a;
      ex_b   <= op_b;
      ex_rnd <= rnd;
      ex_xs1 <= issue_rs1;
      ex_xs2 <= issue_rs2;
      ex_id  <= issue_id;
    end
  end

  // --------------------------------------------------------------- execute
  logic ex_fire;
  assign ex_fire = ex_valid && !ex_hold && !kill_ex;

  vector_alu u_alu (
    .op    (ex_dec.op),
    .a     (ex_a),
    .b     (ex_b),
    .xs1   (ex_xs1),
    .xs2   (ex_xs2),
    .shift (ex_dec.shift),
    .rmode (ex_dec.rmode),
    .sat   (ex_dec.sat),
    .imm16 (ex_dec.imm16),
    .index (ex_dec.offset[4:0]),
    .rnd   (ex_rnd),
    .vres  (alu_vres),
    .xres  (alu_xres)
  );

  word_t vaddr;
  always_comb begin
    vaddr      = ex_xs1 + ex_dec.offset;
    vmem_row   = vaddr[ROW_W+5:6];
    vmem_wdata = ex_b;
    vmem_en    = ex_fire && (ex_dec.op inside {OP_VLOADV, OP_VLOADR0, OP_VLOADR1, OP_VSTOREV});
    vmem_we    = ex_fire && (ex_dec.op == OP_VSTOREV);
    llm_en     = ex_fire && (ex_dec.op inside {OP_VLOADL, OP_VSTOREL});
    llm_we     = ex_fire && (ex_dec.op == OP_VSTOREL);
    llm_wdata  = ex_b;
    for (int i = 0; i < LANES; i++) begin
      logic [15:0] la;
      la = ex_a[i*16 +: 16] + ex_dec.offset[15:0];
      llm_addr[i*LLM_AW +: LLM_AW] = la[LLM_AW:1];
    end
  end

  // ------------------------------------------------------------- writeback
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_valid <= 1'b0;
    end else begin
      wb_valid <= ex_fire;
    end
  end

  always_ff @(posedge clk) begin
    if (ex_fire) begin
      wb_vwrite <= ex_dec.vwrite;
      wb_xwrite <= ex_dec.xwrite;
      wb_seed0  <= (ex_dec.op == OP_VLOADR0);
      wb_seed1  <= (ex_dec.op == OP_VLOADR1);
      wb_rd     <= ex_dec.rd;
      wb_id     <= ex_id;
      wb_alu    <= alu_vres;
      wb_x      <= alu_xres;
      wb_src    <= (ex_dec.op == OP_VLOADL) ? SRC_LLM :
                   (ex_dec.op inside {OP_VLOADV, OP_VLOADR0, OP_VLOADR1}) ? SRC_VMEM : SRC_ALU;
    end
  end

  always_comb begin
    unique case (wb_src)
      SRC_VMEM: wb_data = vmem_rdata;
      SRC_LLM:  wb_data = llm_rdata;
      default:  wb_data = wb_alu;
    endcase
    result_valid = wb_valid && wb_xwrite;
    result_id    = wb_id;
    result_rd    = wb_rd;
    result_data  = wb_x;
  end

  assign ev_fwd_ex     = d_fire && (fwd_ex_a || fwd_ex_b);
  assign ev_fwd_wb     = d_fire && !(fwd_ex_a || fwd_ex_b) && (fwd_wb_a || fwd_wb_b);
  assign ev_load_stall = issue_valid && load_use && !ex_hold;
  assign ev_kill       = ex_valid && !ex_hold && kill_ex;

  // A memory access only ever comes from a committed, live instruction.
  a_mem_committed: assert property (@(posedge clk) disable iff (!rst_n)
    (vmem_en || llm_en) |-> (ex_valid && (ex_committed || commit_ex) && !kill_ex));
  // Never accept while holding.
  a_no_accept_on_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ex_hold |-> !d_fire);

endmodule
