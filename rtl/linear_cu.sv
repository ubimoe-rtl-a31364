// linear_cu: one compute unit (CU) of the reusable linear kernel.
//
// A grid of T_IN x T_OUT multiply-accumulate PEs. The CU holds one input
// tile x[T_IN] of its current patch (loaded by the round-robin router) and
// multiplies it, every cycle mac_en is high, with the weight tile
// W[T_IN][T_OUT] that is broadcast to all CUs. Column o adds its T_IN
// products and accumulates them into the accumulator register of output
// o of output tile mac_row (mac_first starts a new sum). Accumulators are
// kept for ROWS output tiles, so the input tile stays in place while the
// weight tiles of a whole output row go by.
// rd_data returns output tile rd_row, rescaled to Q16.16 and saturated
// (combinational read). x_ld loads the input tile at the clock edge.
// The PE grid with multiplier, adder and accumulator register is from the
// source design's figure; the column adder and the accumulator memory are
// this design's way of arranging them.
module linear_cu
  import ubimoe_pkg::*;
#(
  parameter int unsigned T_IN  = 16,
  parameter int unsigned T_OUT = 16,
  parameter int unsigned ROWS  = 96,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          x_ld,
  input  act_t          x_ld_data [T_IN],
  input  logic          mac_en,
  input  logic          mac_first,
  input  logic [RW-1:0] mac_row,
  input  wgt_t          w_tile [T_IN][T_OUT],
  input  logic [RW-1:0] rd_row,
  output act_t          rd_data [T_OUT]
);
  act_t               x_cur [T_IN];
  logic signed [63:0] acc [ROWS][T_OUT];
  logic signed [63:0] colsum [T_OUT];

  always_ff @(posedge clk) if (x_ld) x_cur <= x_ld_data;

  always_comb
    for (int o = 0; o < T_OUT; o++) begin
      colsum[o] = '0;
      for (int i = 0; i < T_IN; i++)
        colsum[o] += 64'(x_cur[i]) * 64'(w_tile[i][o]);
    end

  always_ff @(posedge clk)
    if (mac_en)
      for (int o = 0; o < T_OUT; o++)
        acc[mac_row][o] <= (mac_first ? 64'sd0 : acc[mac_row][o]) + colsum[o];

  always_comb
    for (int o = 0; o < T_OUT; o++)
      rd_data[o] = sat_act(96'(acc[rd_row][o] >>> WGT_FRAC));
endmodule
