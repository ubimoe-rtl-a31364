// msa_block: the MSA block: streaming attention, then the output projection.
//
// The fully streaming attention kernel (attn_kernel) takes Q as a stream
// and K/V from its buffers, and writes each finished output patch into the
// attention output buffer. When the last patch is out, the projection
// (F -> F) runs as a dense pass on its own reusable linear kernel with
// fixed weights (pw_* port), and its output tiles leave on y_* towards the
// layer buffer. QKV generation and normalisation are outside this block
// (as in the source design's architecture figure).
// Timing: start/done pulses; kv_*, pw_* are memory write ports; q_* is a
// valid/ready stream; y_valid pulses one T-lane tile per cycle and must be
// taken. Using a second linear-kernel instance for the projection (the
// "pipelined mode" of the source design) is this design's choice.
// Lint: the projection weight buffer has one bank, so its sel output is
// left open; the projection kernel's list position (y_pos) and
// partial-round flag are not needed in dense mode and stay unused.
module msa_block
  import ubimoe_pkg::*;
#(
  parameter int unsigned N_A   = 3,
  parameter int unsigned T     = 16,
  parameter int unsigned F     = 384,
  parameter int unsigned H     = 6,
  parameter int unsigned NP    = 197,
  parameter int unsigned N_LP  = 2,
  localparam int unsigned FT   = F / T,
  localparam int unsigned NPW  = $clog2(NP + 1),
  localparam int unsigned AW   = $clog2(NP * FT),
  localparam int unsigned BW   = (FT > 1) ? $clog2(FT) : 1,
  localparam int unsigned PAW  = $clog2(FT * FT)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           done,
  output logic           busy,
  input  logic           kv_we,
  input  logic           kv_sel,
  input  logic [AW-1:0]  kv_addr,
  input  act_t           kv_data [T],
  input  logic           q_valid,
  output logic           q_ready,
  input  act_t           q_data [T],
  input  logic           pw_we,
  input  logic [PAW-1:0] pw_addr,
  input  wgt_t           pw_data [T][T],
  output logic           y_valid,
  output logic [NPW-1:0] y_patch,
  output logic [BW-1:0]  y_tile,
  output act_t           y_data [T],
  output logic           attn_overlap,
  output logic           fifo_overflow
);
  logic           a_done, a_busy, o_valid, s1b, s2b;
  logic [NPW-1:0] o_patch;
  logic [BW-1:0]  o_beat;
  act_t           o_data [T];

  attn_kernel #(.N_A(N_A), .T_A(T), .F(F), .H(H), .N(NP)) u_attn (
    .clk, .rst_n, .start, .done(a_done), .busy(a_busy),
    .kv_we, .kv_sel, .kv_addr, .kv_data,
    .q_valid, .q_ready, .q_data,
    .o_valid, .o_ready(1'b1), .o_patch, .o_beat, .o_data,
    .s1_busy(s1b), .s2_busy(s2b), .fifo_overflow);
  assign attn_overlap = s1b && s2b;

  logic [NPW-1:0] act_patch, idx_pos, y_pos;
  logic [BW-1:0]  act_tile;
  act_t           act_data [T];
  logic [PAW-1:0] w_addr;
  wgt_t           w_data [T][T];
  logic           p_done, p_busy, p_partial;

  act_buffer #(.NP(NP), .TILES(FT), .LANES(T)) u_abuf (
    .clk, .we(o_valid), .waddr(AW'(32'(o_patch) * FT + 32'(o_beat))), .wdata(o_data),
    .raddr(AW'(32'(act_patch) * FT + 32'(act_tile))), .rdata(act_data));

  weight_buffer #(.T_IN(T), .T_OUT(T), .DEPTH(FT * FT), .PING_PONG(1'b0)) u_pw (
    .clk, .rst_n, .swap(1'b0), .sel(),
    .wr_en(pw_we), .wr_addr(pw_addr), .wr_data(pw_data), .rd_addr(w_addr), .rd_data(w_data));

  linear_kernel #(.N_L(N_LP), .T_IN(T), .T_OUT(T), .IN_TILES(FT), .OUT_TILES(FT), .NP(NP)) u_proj (
    .clk, .rst_n, .start(a_done), .done(p_done), .busy(p_busy),
    .in_tiles(($clog2(FT+1))'(FT)), .out_tiles(($clog2(FT+1))'(FT)), .act_fn(ACT_NONE),
    .dense(1'b1), .n_items(NPW'(NP)),
    .idx_pos, .idx_patch(idx_pos), .act_patch, .act_tile, .act_data,
    .w_addr, .w_data, .y_valid, .y_patch, .y_pos, .y_tile, .y_data, .partial_round(p_partial));

  assign done = p_done;
  assign busy = a_busy || p_busy;
endmodule
