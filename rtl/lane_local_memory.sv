// lane_local_memory: one small private memory per vector lane.
//
// LANES independent memories of DEPTH x 16 bits (one 18 Kb block RAM each on
// the target FPGA, 1024 x 16). All lanes are enabled together by the vector
// core but each lane has its own word address, which is what makes indexed
// (gather/scatter) loads and stores possible: lane i reads or writes word
// addr[i] of its own memory. Reads return data on the next cycle.
// Typical contents are the input accumulators of sparse or delayed
// connectivity: target neuron n lives in lane n mod 32, and a neuron's delay
// ring buffer occupies consecutive words of its lane.
//
// Published: one 16-bit wide 18 Kb BRAM per lane, per-lane addresses. This
// design's own choice: a single port per lane (only the vector core uses
// these memories).
module lane_local_memory #(
  parameter int unsigned LANES  = 32,
  parameter int unsigned DEPTH  = 1024,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic                  we,
  input  logic [LANES*AW-1:0]   addr,
  input  logic [LANES*16-1:0]   wdata,
  output logic [LANES*16-1:0]   rdata
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [15:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (en) begin
        if (we) mem[addr[i*AW +: AW]] <= wdata[i*16 +: 16];
        rdata[i*16 +: 16] <= mem[addr[i*AW +: AW]];
      end
    end
  end

endmodule
