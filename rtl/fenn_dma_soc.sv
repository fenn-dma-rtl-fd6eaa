// fenn_dma_soc: programmable-logic top of a single-core FeNN-DMA system.
//
// Ties together the vector co-processor (vec_core), its 512-bit vector data
// memory (vector_memory, 8 URAM banks), the 32 lane-local memories, the
// instruction and scalar data memories of the host core, and the DMA engine
// (dma_controller + dma_arbiter). Everything the design takes from
// elsewhere is outside this module and meets it at ports:
//   * the scalar RISC-V host core: the vector issue/commit/result interface,
//     its instruction-fetch and load/store ports into the two scalar BRAMs,
//     and its CSR port into the DMA registers;
//   * the processing system: port b of the two scalar BRAMs (normally behind
//     memory-mapped bridges) and the DMA register AXI4-Lite slave;
//   * the AXI DataMover: its MM2S/S2MM command and status streams and the
//     512-bit MM2S/S2MM data streams (its memory-mapped side goes to DDR).
// Connections inside:
//   vec_core   <-> vector_memory port a, lane_local_memory
//   dma_arbiter <-> vector_memory port b, DataMover streams
//   dma_controller -> dma_arbiter (start/row/beats), <- done
// All of it runs on one clock (175 MHz in the published implementation);
// the clock crossing to the memory interface happens in the external
// interconnect.
module fenn_dma_soc
  import fenn_pkg::*;
#(
  parameter int unsigned VMEM_ROWS  = 8192,
  parameter int unsigned LLM_DEPTH  = 1024,
  parameter int unsigned IMEM_WORDS = 8192,
  parameter int unsigned DMEM_WORDS = 8192,
  localparam int unsigned ROW_W     = $clog2(VMEM_ROWS),
  localparam int unsigned IAW       = $clog2(IMEM_WORDS),
  localparam int unsigned DAW       = $clog2(DMEM_WORDS),
  localparam int unsigned LEN_W     = 17
) (
  input  logic             clk,
  input  logic             rst_n,
  // vector issue / commit / result (host core)
  input  logic             issue_valid,
  output logic             issue_ready,
  input  word_t            issue_instr,
  input  word_t            issue_rs1,
  input  word_t            issue_rs2,
  input  id_t              issue_id,
  output logic             issue_accept,
  output logic             issue_writeback,
  input  logic             commit_valid,
  input  id_t              commit_id,
  input  logic             commit_kill,
  output logic             result_valid,
  output id_t              result_id,
  output logic [4:0]       result_rd,
  output word_t            result_data,
  // host core instruction fetch
  input  logic             imem_en,
  input  logic [IAW-1:0]   imem_addr,
  output word_t            imem_rdata,
  // host core load/store
  input  logic             dmem_en,
  input  logic [3:0]       dmem_we,
  input  logic [DAW-1:0]   dmem_addr,
  input  word_t            dmem_wdata,
  output word_t            dmem_rdata,
  // host core CSR access to the DMA registers
  input  logic             csr_en,
  input  logic             csr_we,
  input  logic [11:0]      csr_addr,
  input  word_t            csr_wdata,
  output word_t            csr_rdata,
  // processing-system access to the scalar memories
  input  logic             ps_imem_en,
  input  logic [3:0]       ps_imem_we,
  input  logic [IAW-1:0]   ps_imem_addr,
  input  word_t            ps_imem_wdata,
  output word_t            ps_imem_rdata,
  input  logic             ps_dmem_en,
  input  logic [3:0]       ps_dmem_we,
  input  logic [DAW-1:0]   ps_dmem_addr,
  input  word_t            ps_dmem_wdata,
  output word_t            ps_dmem_rdata,
  // processing-system AXI4-Lite access to the DMA registers
  input  logic [4:0]       s_axil_awaddr,
  input  logic             s_axil_awvalid,
  output logic             s_axil_awready,
  input  logic [31:0]      s_axil_wdata,
  input  logic [3:0]       s_axil_wstrb,
  input  logic             s_axil_wvalid,
  output logic             s_axil_wready,
  output logic [1:0]       s_axil_bresp,
  output logic             s_axil_bvalid,
  input  logic             s_axil_bready,
  input  logic [4:0]       s_axil_araddr,
  input  logic             s_axil_arvalid,
  output logic             s_axil_arready,
  output logic [31:0]      s_axil_rdata,
  output logic [1:0]       s_axil_rresp,
  output logic             s_axil_rvalid,
  input  logic             s_axil_rready,
  // DataMover command / status
  output logic [71:0]      m_mm2s_cmd_tdata,
  output logic             m_mm2s_cmd_tvalid,
  input  logic             m_mm2s_cmd_tready,
  input  logic [7:0]       s_mm2s_sts_tdata,
  input  logic             s_mm2s_sts_tvalid,
  output logic             s_mm2s_sts_tready,
  output logic [71:0]      m_s2mm_cmd_tdata,
  output logic             m_s2mm_cmd_tvalid,
  input  logic             m_s2mm_cmd_tready,
  input  logic [7:0]       s_s2mm_sts_tdata,
  input  logic             s_s2mm_sts_tvalid,
  output logic             s_s2mm_sts_tready,
  // DataMover data streams
  input  vec_t             s_mm2s_tdata,
  input  logic             s_mm2s_tvalid,
  output logic             s_mm2s_tready,
  output vec_t             m_s2mm_tdata,
  output logic             m_s2mm_tvalid,
  input  logic             m_s2mm_tready,
  output logic             m_s2mm_tlast,
  // event pulses for performance counters
  output logic             ev_fwd_ex,
  output logic             ev_fwd_wb,
  output logic             ev_load_stall,
  output logic             ev_kill,
  output logic             ev_dma_conflict
);

  // vector core <-> memories
  logic                     vm_a_en, vm_a_we;
  logic [ROW_W-1:0]         vm_a_row;
  vec_t                     vm_a_wdata, vm_a_rdata;
  logic                     llm_en, llm_we;
  logic [LANES*$clog2(LLM_DEPTH)-1:0] llm_addr;
  vec_t                     llm_wdata, llm_rdata;

  // arbiter <-> vector memory port b
  logic                     vm_b_en;
  logic [7:0]               vm_b_we;
  logic [ROW_W-1:0]         vm_b_row;
  vec_t                     vm_b_wdata, vm_b_rdata;

  // controller <-> arbiter
  logic                     a_mm_start, a_mm_done, a_s2_start, a_s2_done;
  logic [ROW_W-1:0]         a_mm_row, a_s2_row;
  logic [LEN_W-1:0]         a_mm_beats, a_s2_beats;
  logic                     a_mm_busy, a_s2_busy;

  vec_core #(
    .VMEM_ROWS (VMEM_ROWS),
    .LLM_DEPTH (LLM_DEPTH)
  ) u_vec (
    .clk, .rst_n,
    .issue_valid, .issue_ready, .issue_instr, .issue_rs1, .issue_rs2, .issue_id,
    .issue_accept, .issue_writeback,
    .commit_valid, .commit_id, .commit_kill,
    .result_valid, .result_id, .result_rd, .result_data,
    .vmem_en    (vm_a_en),
    .vmem_we    (vm_a_we),
    .vmem_row   (vm_a_row),
    .vmem_wdata (vm_a_wdata),
    .vmem_rdata (vm_a_rdata),
    .llm_en, .llm_we, .llm_addr, .llm_wdata, .llm_rdata,
    .ev_fwd_ex, .ev_fwd_wb, .ev_load_stall, .ev_kill
  );

  vector_memory #(
    .ROWS  (VMEM_ROWS),
    .BANKS (8),
    .WIDTH (VEC_W)
  ) u_vmem (
    .clk,
    .a_en (vm_a_en), .a_we (vm_a_we), .a_row (vm_a_row), .a_wdata (vm_a_wdata), .a_rdata (vm_a_rdata),
    .b_en (vm_b_en), .b_we (vm_b_we), .b_row (vm_b_row), .b_wdata (vm_b_wdata), .b_rdata (vm_b_rdata)
  );

  lane_local_memory #(
    .LANES (LANES),
    .DEPTH (LLM_DEPTH)
  ) u_llm (
    .clk,
    .en    (llm_en),
    .we    (llm_we),
    .addr  (llm_addr),
    .wdata (llm_wdata),
    .rdata (llm_rdata)
  );

  scalar_bram #(.WORDS(IMEM_WORDS)) u_imem (
    .clk,
    .a_en (imem_en), .a_we (4'b0000), .a_addr (imem_addr), .a_wdata ('0), .a_rdata (imem_rdata),
    .b_en (ps_imem_en), .b_we (ps_imem_we), .b_addr (ps_imem_addr), .b_wdata (ps_imem_wdata),
    .b_rdata (ps_imem_rdata)
  );

  scalar_bram #(.WORDS(DMEM_WORDS)) u_dmem (
    .clk,
    .a_en (dmem_en), .a_we (dmem_we), .a_addr (dmem_addr), .a_wdata (dmem_wdata), .a_rdata (dmem_rdata),
    .b_en (ps_dmem_en), .b_we (ps_dmem_we), .b_addr (ps_dmem_addr), .b_wdata (ps_dmem_wdata),
    .b_rdata (ps_dmem_rdata)
  );

  dma_controller #(
    .ROW_W (ROW_W),
    .LEN_W (LEN_W)
  ) u_dma_ctrl (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .csr_en, .csr_we, .csr_addr, .csr_wdata, .csr_rdata,
    .m_mm2s_cmd_tdata, .m_mm2s_cmd_tvalid, .m_mm2s_cmd_tready,
    .s_mm2s_sts_tdata, .s_mm2s_sts_tvalid, .s_mm2s_sts_tready,
    .m_s2mm_cmd_tdata, .m_s2mm_cmd_tvalid, .m_s2mm_cmd_tready,
    .s_s2mm_sts_tdata, .s_s2mm_sts_tvalid, .s_s2mm_sts_tready,
    .arb_mm2s_start (a_mm_start), .arb_mm2s_row (a_mm_row), .arb_mm2s_beats (a_mm_beats),
    .arb_mm2s_done  (a_mm_done),
    .arb_s2mm_start (a_s2_start), .arb_s2mm_row (a_s2_row), .arb_s2mm_beats (a_s2_beats),
    .arb_s2mm_done  (a_s2_done)
  );

  dma_arbiter #(
    .ROW_W    (ROW_W),
    .BANKS    (8),
    .STREAM_W (VEC_W),
    .LEN_W    (LEN_W)
  ) u_dma_arb (
    .clk, .rst_n,
    .mm2s_start (a_mm_start), .mm2s_row (a_mm_row), .mm2s_beats (a_mm_beats),
    .mm2s_busy  (a_mm_busy),  .mm2s_done (a_mm_done),
    .s2mm_start (a_s2_start), .s2mm_row (a_s2_row), .s2mm_beats (a_s2_beats),
    .s2mm_busy  (a_s2_busy),  .s2mm_done (a_s2_done),
    .s_mm2s_tdata, .s_mm2s_tvalid, .s_mm2s_tready,
    .m_s2mm_tdata, .m_s2mm_tvalid, .m_s2mm_tready, .m_s2mm_tlast,
    .mem_en (vm_b_en), .mem_we (vm_b_we), .mem_row (vm_b_row),
    .mem_wdata (vm_b_wdata), .mem_rdata (vm_b_rdata),
    .ev_conflict (ev_dma_conflict)
  );

  // The controller only starts a direction that it sees idle, and the
  // arbiter's view of busy must agree.
  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (a_mm_start |-> !a_mm_busy) and (a_s2_start |-> !a_s2_busy));

endmodule
