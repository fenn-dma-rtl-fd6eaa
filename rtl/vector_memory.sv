// vector_memory: the on-chip vector data memory.
//
// A 512-bit wide true dual-port memory built from BANKS parallel banks
// (each 512/BANKS bits wide, ROWS deep). On the target FPGA each bank is an
// UltraRAM column: 8 banks of 64 bits, each two 4096 x 72-bit URAMs deep,
// giving 8192 rows x 64 bytes = 512 KB. Port a serves the vector core, port b
// the DMA arbiter. Each port reads or writes one row per cycle; a read
// returns data on the next cycle (registered output). Port b has one write
// enable per bank so the arbiter can place stream data bank by bank.
// Writes to the same row from both ports in one cycle are not arbitrated:
// the owner of the data (software) must avoid them.
//
// Published: 8 parallel URAM banks, 512-bit width, two ports, 1-cycle read
// latency, 16 URAMs per core. This design's own choices: 64-bit banks two
// URAMs deep, and read-during-write on one port returning the old data.
module vector_memory #(
  parameter int unsigned ROWS   = 8192,
  parameter int unsigned BANKS  = 8,
  parameter int unsigned WIDTH  = 512,
  localparam int unsigned ROW_W = $clog2(ROWS),
  localparam int unsigned BW    = WIDTH / BANKS
) (
  input  logic               clk,
  // port a (vector core)
  input  logic               a_en,
  input  logic               a_we,
  input  logic [ROW_W-1:0]   a_row,
  input  logic [WIDTH-1:0]   a_wdata,
  output logic [WIDTH-1:0]   a_rdata,
  // port b (DMA arbiter)
  input  logic               b_en,
  input  logic [BANKS-1:0]   b_we,
  input  logic [ROW_W-1:0]   b_row,
  input  logic [WIDTH-1:0]   b_wdata,
  output logic [WIDTH-1:0]   b_rdata
);

  for (genvar k = 0; k < BANKS; k++) begin : g_bank
    logic [BW-1:0] mem [ROWS];

    always_ff @(posedge clk) begin
      if (a_en) begin
        if (a_we) mem[a_row] <= a_wdata[k*BW +: BW];
        a_rdata[k*BW +: BW] <= mem[a_row];
      end
    end

    always_ff @(posedge clk) begin
      if (b_en) begin
        if (b_we[k]) mem[b_row] <= b_wdata[k*BW +: BW];
        b_rdata[k*BW +: BW] <= mem[b_row];
      end
    end
  end

endmodule
