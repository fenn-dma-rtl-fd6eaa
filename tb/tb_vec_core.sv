// tb_vec_core: runs the vector core as its host would and checks it
// instruction by instruction against the reference model.
//
// The testbench issues instruction words with scalar operands, commits each
// one 1-3 cycles after it was accepted (about 1 in 20 killed), and checks
// every scalar result (VTxx, VEXTRACT) in order. Phases:
//   1. clear all registers and both memories through the core itself;
//   2. directed timing: a double-buffered dense spike-propagation loop must
//      issue one instruction per cycle with no stall, and a load followed
//      by a dependent add must stall exactly one cycle;
//   3. a long random instruction stream over all instructions;
//   4. read back every register, vector-memory row and lane-local word
//      through VEXTRACT and compare with the model.
// Memories are reduced to 64 rows / 64 words per lane to keep the read-back
// short.
module tb_vec_core;
  import fenn_pkg::*;
  import fenn_ref_pkg::*;

  localparam int ROWS = 64, DEPTH = 64;

  logic clk = 0, rst_n = 0;
  logic issue_valid, issue_ready, issue_accept, issue_writeback;
  word_t issue_instr, issue_rs1, issue_rs2;
  id_t issue_id;
  logic commit_valid, commit_kill;
  id_t commit_id;
  logic result_valid;
  id_t result_id;
  logic [4:0] result_rd;
  word_t result_data;
  logic vmem_en, vmem_we, llm_en, llm_we;
  logic [5:0] vmem_row;
  vec_t vmem_wdata, vmem_rdata, llm_wdata, llm_rdata;
  logic [32*6-1:0] llm_addr;
  logic ev_fwd_ex, ev_fwd_wb, ev_load_stall, ev_kill;

  vec_core #(.VMEM_ROWS(ROWS), .LLM_DEPTH(DEPTH)) dut (.*);
  vector_memory #(.ROWS(ROWS)) u_vm (.clk, .a_en(vmem_en), .a_we(vmem_we), .a_row(vmem_row),
    .a_wdata(vmem_wdata), .a_rdata(vmem_rdata), .b_en(1'b0), .b_we('0), .b_row('0), .b_wdata('0), .b_rdata());
  lane_local_memory #(.LANES(32), .DEPTH(DEPTH)) u_llm (.clk, .en(llm_en), .we(llm_we), .addr(llm_addr),
    .wdata(llm_wdata), .rdata(llm_rdata));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_fwd_ex = 0, n_fwd_wb = 0, n_stall = 0, n_kill = 0, n_hold = 0;
  always @(posedge clk) cyc++;
  // events are sampled just before the rising edge, when they are settled
  always @(negedge clk) begin
    #4;
    n_fwd_ex += int'(ev_fwd_ex); n_fwd_wb += int'(ev_fwd_wb);
    n_stall += int'(ev_load_stall); n_kill += int'(ev_kill);
    n_hold  += int'(issue_valid && !issue_ready);
  end

  vec_model m;

  // commit queue
  typedef struct { id_t id; bit kill; int due; } cq_t;
  cq_t cq [$];
  // expected scalar results
  typedef struct { id_t id; logic [4:0] rd; word_t data; } rq_t;
  rq_t rq [$];

  int min_delay = 1, max_delay = 3, kill_pct = 5, gap_pct = 10;
  id_t next_id = 0;
  int last_accept = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, s);
  endtask

  // commit driver
  always @(negedge clk) begin
    commit_valid = 0;
    if (cq.size() > 0 && cq[0].due <= cyc) begin
      commit_valid = 1; commit_id = cq[0].id; commit_kill = cq[0].kill;
    end
  end
  always @(posedge clk) if (commit_valid) void'(cq.pop_front());

  // result checker
  always @(negedge clk) if (rst_n && result_valid) begin
    checks++;
    if (rq.size() == 0) fail("unexpected result");
    else begin
      rq_t e;
      e = rq.pop_front();
      if (result_id !== e.id || result_rd !== e.rd || result_data !== e.data)
        fail($sformatf("result id %0d rd %0d data %h, expected id %0d rd %0d data %h",
                       result_id, result_rd, result_data, e.id, e.rd, e.data));
    end
  end

  // issue one instruction; returns when accepted
  task automatic issue(word_t ins, word_t x1 = 0, word_t x2 = 0, bit may_kill = 0);
    bit kill;
    word_t xv;
    bit hx, ok;
    @(negedge clk);
    while ($urandom_range(0, 99) < gap_pct) begin issue_valid = 0; @(negedge clk); end
    issue_valid = 1; issue_instr = ins; issue_rs1 = x1; issue_rs2 = x2; issue_id = next_id;
    ok = 0;
    while (!ok) begin #4; ok = issue_ready; @(posedge clk); if (!ok) @(negedge clk); end
    checks++;
    if (!issue_accept) fail($sformatf("instruction %h not accepted", ins));
    kill = may_kill && ($urandom_range(0, 99) < kill_pct);
    hx = m.exec(ins, x1, x2, kill, xv);
    if (hx && !kill) rq.push_back('{next_id, ins[11:7], xv});
    cq.push_back('{next_id, kill, cyc + $urandom_range(min_delay, max_delay) - 1});
    last_accept = cyc;
    next_id++;
    #1 issue_valid = 0;
  endtask

  task automatic drain();
    repeat (10) @(posedge clk);
    while (cq.size() > 0 || rq.size() > 0) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  function automatic word_t rand_instr(output word_t x1, output word_t x2);
    logic [4:0] rd, r1, r2;
    logic [6:0] f7;
    logic [11:0] imm;
    rd = $urandom_range(0, 7); r1 = $urandom_range(0, 7); r2 = $urandom_range(0, 7);
    f7 = $urandom; imm = $urandom;
    if (f7[5:4] == 3) f7[5:4] = 2;
    if (imm[5:4] == 3) imm[5:4] = 1;
    x1 = $urandom; x2 = $urandom;
    case ($urandom_range(0, 15))
      0, 1: return enc_r(MOP_VARITH, 3'($urandom_range(0, 5)), f7, rd, r1, r2);
      2:  return enc_r(MOP_VTST, 3'($urandom_range(0, 3)), 7'd0, rd, r1, r2);
      3:  return enc_r(MOP_VSEL, 3'd0, 7'd0, rd, 5'd0, r2);
      4:  return enc_i(MOP_VSHI, 3'($urandom_range(0, 1)), imm, rd, r1);
      5:  return enc_lui(rd, 16'($urandom));
      6:  return enc_r(MOP_VRNG, 3'd0, 7'd0, rd, 5'd0, 5'd0);
      7:  return enc_r(MOP_VANDADD, 3'd0, f7, rd, r1, 5'd0);
      8, 9: return enc_i(MOP_VLOAD, 3'($urandom_range(0, 1)), imm, rd, r1);
      10: return enc_i(MOP_VLOAD, 3'($urandom_range(2, 3)), imm, 5'd0, r1);
      11, 12: return enc_s(MOP_VSTORE, 3'($urandom_range(0, 1)), imm, r1, r2);
      13: return enc_r(MOP_VEXTRACT, 3'd0, 7'd0, rd, r1, 5'($urandom));
      default: return enc_r(MOP_VFILL, 3'd0, 7'd0, rd, 5'd0, 5'd0);
    endcase
  endfunction

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, s0;
    word_t x1, x2, ins;
    m = new(ROWS, DEPTH);
    issue_valid = 0; commit_valid = 0; commit_id = 0; commit_kill = 0;
    issue_instr = 0; issue_rs1 = 0; issue_rs2 = 0; issue_id = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. clear
    gap_pct = 0;
    for (int r = 0; r < 32; r++) issue(enc_lui(5'(r), 16'h0));
    for (int r = 0; r < ROWS; r++) issue(enc_s(MOP_VSTORE, 3'd0, 12'd0, 5'd1, 5'd0), word_t'(r * 64));
    for (int d = 0; d < DEPTH; d++) begin
      issue(enc_lui(5'd1, 16'(d * 2)));
      issue(enc_s(MOP_VSTORE, 3'd1, 12'd0, 5'd1, 5'd0));
    end
    issue(enc_lui(5'd1, 16'h0));
    drain();

    // 2a. dense propagation loop (weights rows 0.., inputs rows 32..)
    min_delay = 1; max_delay = 1;
    for (int r = 0; r < 8; r++) begin
      issue(enc_r(MOP_VRNG, 3'd0, 7'd0, 5'd4, 5'd0, 5'd0));
      issue(enc_s(MOP_VSTORE, 3'd0, 12'd0, 5'd1, 5'd4), word_t'(r * 64));
    end
    drain();
    issue(enc_i(MOP_VLOAD, 3'd0, 12'd0, 5'd3, 5'd0), 32 * 64);
    s0 = n_stall; t0 = -1;
    for (int it = 0; it < 8; it++) begin
      logic [4:0] inext, iprev;
      inext = (it % 2 == 0) ? 5'd2 : 5'd3;
      iprev = (it % 2 == 0) ? 5'd3 : 5'd2;
      issue(enc_i(MOP_VLOAD, 3'd0, 12'd0, 5'd1, 5'd0), word_t'(it * 64));
      if (t0 < 0) t0 = last_accept;
      issue(enc_i(MOP_VLOAD, 3'd0, 12'd0, inext, 5'd0), word_t'((33 + it) * 64));
      issue(enc_r(MOP_VARITH, 3'd0, 7'h40, iprev, iprev, 5'd1));
      issue(enc_s(MOP_VSTORE, 3'd0, 12'd0, 5'd0, iprev), word_t'((32 + it) * 64));
    end
    checks++;
    if (last_accept - t0 != 31 || n_stall != s0)
      fail($sformatf("dense loop took %0d cycles for 32 instructions, %0d stalls",
                     last_accept - t0 + 1, n_stall - s0));
    // 2b. load-use: one stall cycle
    s0 = n_stall;
    issue(enc_i(MOP_VLOAD, 3'd0, 12'd0, 5'd5, 5'd0), 64);
    t0 = last_accept;
    issue(enc_r(MOP_VARITH, 3'd0, 7'h00, 5'd6, 5'd5, 5'd5));
    checks++;
    if (last_accept - t0 != 2 || n_stall - s0 != 1)
      fail($sformatf("load-use distance %0d, stalls %0d", last_accept - t0, n_stall - s0));
    drain();

    // 3. random stream
    min_delay = 1; max_delay = 3; gap_pct = 10;
    void'($value$plusargs("kill=%d", kill_pct));
    void'($value$plusargs("maxd=%d", max_delay));
    for (int n = 0; n < 6000; n++) begin
      ins = rand_instr(x1, x2);
      issue(ins, x1, x2, 1);
    end
    drain();

    // 4. read back
    min_delay = 1; max_delay = 1; gap_pct = 0;
    for (int r = 0; r < 32; r++)
      for (int l = 0; l < 32; l++) issue(enc_r(MOP_VEXTRACT, 3'd0, 7'd0, 5'd1, 5'(r), 5'(l)));
    for (int r = 0; r < ROWS; r++) begin
      issue(enc_i(MOP_VLOAD, 3'd0, 12'd0, 5'd9, 5'd0), word_t'(r * 64));
      for (int l = 0; l < 32; l++) issue(enc_r(MOP_VEXTRACT, 3'd0, 7'd0, 5'd1, 5'd9, 5'(l)));
    end
    for (int d = 0; d < DEPTH; d++) begin
      issue(enc_lui(5'd10, 16'(d * 2)));
      issue(enc_i(MOP_VLOAD, 3'd1, 12'd0, 5'd11, 5'd10));
      for (int l = 0; l < 32; l++) issue(enc_r(MOP_VEXTRACT, 3'd0, 7'd0, 5'd1, 5'd11, 5'(l)));
    end
    // seeds: VRNG output reveals them
    issue(enc_r(MOP_VRNG, 3'd0, 7'd0, 5'd12, 5'd0, 5'd0));
    for (int l = 0; l < 32; l++) issue(enc_r(MOP_VEXTRACT, 3'd0, 7'd0, 5'd1, 5'd12, 5'(l)));
    drain();

    $display("events: fwd_ex=%0d fwd_wb=%0d load_stall=%0d kill=%0d commit_hold=%0d",
             n_fwd_ex, n_fwd_wb, n_stall, n_kill, n_hold);
    checks++;
    if (n_fwd_ex == 0 || n_fwd_wb == 0 || n_stall == 0 || n_kill == 0 || n_hold == 0)
      fail("a pipeline mechanism never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
