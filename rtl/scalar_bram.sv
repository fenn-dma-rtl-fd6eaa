// scalar_bram: 32-bit true dual-port block RAM with byte write enables.
//
// Used twice in the SoC: as the instruction memory and as the scalar data
// memory of the host core, which has a Harvard architecture. Port a belongs
// to the host core (instruction fetch or load/store unit), port b to the
// processing system, which loads programs and data and reads back results
// through a memory-mapped bridge. Addresses are word addresses; reads have
// one cycle of latency. Read-during-write on one port returns the old word.
//
// Published: separate 32-bit BRAM instruction and scalar data memories that
// the processing system can reach. This design's own choice: the size
// (8192 words = 32 KB each by default).
module scalar_bram #(
  parameter int unsigned WORDS  = 8192,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic           clk,
  input  logic           a_en,
  input  logic [3:0]     a_we,
  input  logic [AW-1:0]  a_addr,
  input  logic [31:0]    a_wdata,
  output logic [31:0]    a_rdata,
  input  logic           b_en,
  input  logic [3:0]     b_we,
  input  logic [AW-1:0]  b_addr,
  input  logic [31:0]    b_wdata,
  output logic [31:0]    b_rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_en) begin
      for (int k = 0; k < 4; k++)
        if (a_we[k]) mem[a_addr][k*8 +: 8] <= a_wdata[k*8 +: 8];
      a_rdata <= mem[a_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      for (int k = 0; k < 4; k++)
        if (b_we[k]) mem[b_addr][k*8 +: 8] <= b_wdata[k*8 +: 8];
      b_rdata <= mem[b_addr];
    end
  end

endmodule
