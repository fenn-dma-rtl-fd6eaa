// vec_regfile: the 32 x 512-bit vector register file.
//
// Two asynchronous read ports and one synchronous write port, the shape of
// LUT-based distributed RAM on the target FPGA. A write becomes visible on
// the read ports in the cycle after it; the vector core forwards newer values
// itself. Registers are not reset.
//
// Interface: clk; read ports ra/rb -> rdata_a/rdata_b (combinational);
// write port we/wa/wdata, written at the rising edge.
module vec_regfile
  import fenn_pkg::*;
#(
  parameter int unsigned NUM_REGS = NUM_VREGS,
  parameter int unsigned WIDTH    = VEC_W
) (
  input  logic                        clk,
  input  logic [$clog2(NUM_REGS)-1:0] ra,
  input  logic [$clog2(NUM_REGS)-1:0] rb,
  output logic [WIDTH-1:0]            rdata_a,
  output logic [WIDTH-1:0]            rdata_b,
  input  logic                        we,
  input  logic [$clog2(NUM_REGS)-1:0] wa,
  input  logic [WIDTH-1:0]            wdata
);

  logic [WIDTH-1:0] regs [NUM_REGS];

  always_ff @(posedge clk) begin
    if (we) regs[wa] <= wdata;
  end

  assign rdata_a = regs[ra];
  assign rdata_b = regs[rb];

endmodule
