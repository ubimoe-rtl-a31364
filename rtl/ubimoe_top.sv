// ubimoe_top: MoE-ViT accelerator with an MSA block and a MoE block that
// run independently on double-buffered activations.
//
// The MSA block (streaming attention + projection) writes its result into
// layer buffer Buf[sel]; at the same time the MoE block (gating + experts on
// the reusable linear kernel) reads its input from Buf[~sel]. A start pulse
// launches both blocks; when both have finished, buf_swap_ctrl swaps the
// buffers (layer_done pulses), so the next step's MoE block consumes what
// the MSA block just produced. The step time is the larger of the two block
// latencies.
// External parts of the source platform appear as ports: Q/K/V (from the
// QKV generation kernel, not described), projection and gate weights,
// the expert weight stream from HBM (wl_*), and a host port to write the
// MoE-side buffer (initial input) and read the MoE output (host/DDR side).
// All data ports are plain memory-style ports of T-lane tiles.
// Lint: the pending flags of the swap controller are status only and are
// not brought out.
module ubimoe_top
  import ubimoe_pkg::*;
#(
  parameter int unsigned N_A  = 3,
  parameter int unsigned T    = 16,
  parameter int unsigned F    = 384,
  parameter int unsigned H    = 6,
  parameter int unsigned HID  = 1536,
  parameter int unsigned E    = 16,
  parameter int unsigned K    = 4,
  parameter int unsigned NP   = 197,
  parameter int unsigned N_L  = 4,
  parameter int unsigned N_LP = 2,
  localparam int unsigned FT   = F / T,
  localparam int unsigned HT   = HID / T,
  localparam int unsigned ET   = E / T > 0 ? E / T : 1,
  localparam int unsigned AW   = $clog2(NP * FT),
  localparam int unsigned PAW  = $clog2(FT * FT),
  localparam int unsigned GAW  = (FT * ET > 1) ? $clog2(FT * ET) : 1,
  localparam int unsigned EWW  = $clog2(E)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           layer_done,
  output logic           buf_sel,
  output logic           msa_busy,
  output logic           moe_busy,
  // MSA inputs
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
  // MoE inputs
  input  logic           gw_we,
  input  logic [GAW-1:0] gw_addr,
  input  wgt_t           gw_data [T][T],
  output logic           wl_req,
  output logic [EWW-1:0] wl_expert,
  output logic           wl_ready,
  input  logic           wl_valid,
  input  wgt_t           wl_data [T][T],
  // host side of the layer buffers and the MoE output
  input  logic           host_we,
  input  logic [AW-1:0]  host_waddr,
  input  act_t           host_wdata [T],
  input  logic [AW-1:0]  host_raddr,
  output act_t           host_buf_rdata [T],   // MoE-side buffer (next MoE input)
  output act_t           moe_rdata [T],
  // event counters / flags
  output logic [31:0]    n_swaps,
  output logic [31:0]    n_experts_run,
  output logic [31:0]    n_overlap_cycles,
  output logic [31:0]    n_partial_rounds,
  output logic [31:0]    n_attn_overlap,
  output logic           fifo_overflow
);
  logic msa_done, moe_done, swapped, msa_pend, moe_pend;

  buf_swap_ctrl u_swap (.clk, .rst_n, .msa_done, .moe_done, .sel(buf_sel),
                        .swapped, .msa_pending(msa_pend), .moe_pending(moe_pend));
  assign layer_done = swapped;

  // MSA block
  logic           my_valid;
  logic [$clog2(NP+1)-1:0] my_patch;
  logic [(FT > 1 ? $clog2(FT) : 1)-1:0] my_tile;
  act_t           my_data [T];
  logic           attn_ov;

  msa_block #(.N_A(N_A), .T(T), .F(F), .H(H), .NP(NP), .N_LP(N_LP)) u_msa (
    .clk, .rst_n, .start, .done(msa_done), .busy(msa_busy),
    .kv_we, .kv_sel, .kv_addr, .kv_data, .q_valid, .q_ready, .q_data,
    .pw_we, .pw_addr, .pw_data,
    .y_valid(my_valid), .y_patch(my_patch), .y_tile(my_tile), .y_data(my_data),
    .attn_overlap(attn_ov), .fifo_overflow);

  // MoE block
  logic [AW-1:0] moe_in_addr;
  act_t          moe_in_data [T];
  logic [31:0]   n_dense_unused, n_gelu_unused;

  moe_block #(.N_L(N_L), .T(T), .F(F), .HID(HID), .E(E), .K(K), .NP(NP)) u_moe (
    .clk, .rst_n, .start, .done(moe_done), .busy(moe_busy),
    .in_addr(moe_in_addr), .in_data(moe_in_data),
    .gw_we, .gw_addr, .gw_data,
    .wl_req, .wl_expert, .wl_ready, .wl_valid, .wl_data,
    .out_raddr(host_raddr), .out_rdata(moe_rdata),
    .n_experts_run, .n_overlap_cycles, .n_partial_rounds,
    .n_dense_passes(n_dense_unused), .n_gelu_passes(n_gelu_unused));

  // layer buffers Buf0 / Buf1
  logic [AW-1:0] b_waddr [2];
  logic [AW-1:0] b_raddr [2];
  logic          b_we [2];
  act_t          b_wdata [2][T];
  act_t          b_rdata [2][T];
  logic [AW-1:0] msa_waddr;
  assign msa_waddr = AW'(32'(my_patch) * FT + 32'(my_tile));

  for (genvar b = 0; b < 2; b++) begin : g_buf
    // buffer b is the MSA output when buf_sel == b, else the MoE input
    logic is_msa;
    assign is_msa     = (buf_sel == b[0]);
    assign b_we[b]    = is_msa ? my_valid : host_we;
    assign b_waddr[b] = is_msa ? msa_waddr : host_waddr;
    assign b_wdata[b] = is_msa ? my_data : host_wdata;
    assign b_raddr[b] = is_msa ? host_raddr : (moe_busy ? moe_in_addr : host_raddr);
    act_buffer #(.NP(NP), .TILES(FT), .LANES(T)) u_buf (
      .clk, .we(b_we[b]), .waddr(b_waddr[b]), .wdata(b_wdata[b]),
      .raddr(b_raddr[b]), .rdata(b_rdata[b]));
  end
  assign moe_in_data    = b_rdata[~buf_sel];
  assign host_buf_rdata = b_rdata[~buf_sel];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin n_swaps <= '0; n_attn_overlap <= '0; end
    else begin
      if (swapped) n_swaps <= n_swaps + 1;
      if (attn_ov) n_attn_overlap <= n_attn_overlap + 1;
    end
endmodule
