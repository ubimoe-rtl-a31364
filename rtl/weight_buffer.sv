// weight_buffer: on-chip weight tile store of a linear kernel.
//
// Holds DEPTH weight tiles of T_IN x T_OUT 16-bit weights. With PING_PONG
// set there are two banks: the kernel reads bank `sel` while the loader
// writes the other one, and swap exchanges them. This is the expert-level
// pipeline of the source design: the weights of the next expert arrive
// from HBM while the current expert computes. With PING_PONG clear there is
// one bank, written and read directly (fixed weights of dense layers).
// Reads are combinational, writes take effect at the clock edge.
module weight_buffer
  import ubimoe_pkg::*;
#(
  parameter int unsigned T_IN      = 16,
  parameter int unsigned T_OUT     = 16,
  parameter int unsigned DEPTH     = 4608,
  parameter bit          PING_PONG = 1'b1,
  localparam int unsigned AW       = $clog2(DEPTH),
  localparam int unsigned BANKS    = PING_PONG ? 2 : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  output logic          sel,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  wgt_t          wr_data [T_IN][T_OUT],
  input  logic [AW-1:0] rd_addr,
  output wgt_t          rd_data [T_IN][T_OUT]
);
  wgt_t mem [BANKS][DEPTH][T_IN][T_OUT];
  logic wbank, rbank;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    sel <= 1'b0;
    else if (swap) sel <= PING_PONG ? ~sel : 1'b0;

  assign wbank = PING_PONG ? ~sel : 1'b0;
  assign rbank = PING_PONG ?  sel : 1'b0;

  always_ff @(posedge clk) if (wr_en) mem[wbank][wr_addr] <= wr_data;
  assign rd_data = mem[rbank][rd_addr];
endmodule
