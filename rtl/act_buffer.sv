// act_buffer: patch activation buffer, NP patches of TILES tiles of LANES
// 32-bit lanes (address = patch * TILES + tile).
//
// Used for the two layer buffers Buf0/Buf1 between the MSA and MoE blocks
// (in the source design these live in off-chip DDR and the host moves the
// data; here they are on-chip memories so that the two blocks can be
// simulated together), and inside the blocks for the attention output, the
// gate logits, the expert hidden layer and the MoE output.
// One write port (clock edge), one combinational read port.
module act_buffer
  import ubimoe_pkg::*;
#(
  parameter int unsigned NP    = 197,
  parameter int unsigned TILES = 24,
  parameter int unsigned LANES = 16,
  localparam int unsigned DEPTH = NP * TILES,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  act_t          wdata [LANES],
  input  logic [AW-1:0] raddr,
  output act_t          rdata [LANES]
);
  act_t mem [DEPTH][LANES];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
