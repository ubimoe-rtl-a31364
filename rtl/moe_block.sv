// moe_block: the MoE block, run expert by expert on one reusable linear kernel.
//
// For one image (NP patches of F features, read from the layer buffer
// through in_addr/in_data) the block runs:
//   1. gate layer: dense pass of the linear kernel, F -> E logits per patch;
//   2. gating: top-K experts per patch and their softmax weights, which
//      build one patch list per expert;
//   3. for every expert with a non-empty list, in index order:
//      fc1 (sparse, F -> HID, GELU) into the hidden buffer, then
//      fc2 (sparse, HID -> F), each result scaled by the patch's gate
//      weight and summed into the MoE output buffer.
// Expert weights (fc1 tiles, then fc2 tiles, ti-major) come from HBM over
// the wl_* stream into the ping-pong weight buffer: while expert e
// computes, the loader already fills the other bank with the next active
// expert, and the banks swap between experts (expert-level pipeline).
// The source design gives the expert-by-expert order, the shared kernel,
// the router and the weight prefetch; gate placement on the same kernel,
// top-K softmax gating and the buffer arrangement are this design's choices.
// Residual add and normalisation are outside this block.
// Interface timing: start/done pulses; in_data, gw_*, out_rdata are
// combinational/single-edge memory ports; wl_req pulses with wl_expert and
// the source then delivers EW_DEPTH tiles with wl_valid (wl_ready high
// while loading). out_raddr is served only while the block is idle.
// Lint: the bank select of the expert weight buffer (ew_sel) is kept inside
// that buffer and not needed here; unused kernel outputs (list position)
// are left open on purpose.
module moe_block
  import ubimoe_pkg::*;
#(
  parameter int unsigned N_L = 4,
  parameter int unsigned T   = 16,
  parameter int unsigned F   = 384,
  parameter int unsigned HID = 1536,
  parameter int unsigned E   = 16,
  parameter int unsigned K   = 4,
  parameter int unsigned NP  = 197,
  localparam int unsigned FT   = F / T,
  localparam int unsigned HT   = HID / T,
  localparam int unsigned ET   = E / T > 0 ? E / T : 1,
  localparam int unsigned EW_DEPTH = 2 * FT * HT,
  localparam int unsigned GW_DEPTH = FT * ET,
  localparam int unsigned NPW  = $clog2(NP + 1),
  localparam int unsigned EWW  = $clog2(E),
  localparam int unsigned INAW = $clog2(NP * FT),
  localparam int unsigned HAW  = $clog2(NP * HT),
  localparam int unsigned EAW  = $clog2(EW_DEPTH),
  localparam int unsigned GAW  = (GW_DEPTH > 1) ? $clog2(GW_DEPTH) : 1,
  localparam int unsigned MAXT = (HT > FT) ? HT : FT,
  localparam int unsigned KWAW = $clog2(MAXT * MAXT),
  localparam int unsigned IW   = (MAXT > 1) ? $clog2(MAXT) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            done,
  output logic            busy,
  output logic [INAW-1:0] in_addr,
  input  act_t            in_data [T],
  input  logic            gw_we,
  input  logic [GAW-1:0]  gw_addr,
  input  wgt_t            gw_data [T][T],
  output logic            wl_req,
  output logic [EWW-1:0]  wl_expert,
  output logic            wl_ready,
  input  logic            wl_valid,
  input  wgt_t            wl_data [T][T],
  input  logic [INAW-1:0] out_raddr,
  output act_t            out_rdata [T],
  output logic [31:0]     n_experts_run,
  output logic [31:0]     n_overlap_cycles,
  output logic [31:0]     n_partial_rounds,
  output logic [31:0]     n_dense_passes,
  output logic [31:0]     n_gelu_passes
);
  typedef enum logic [2:0] { M_IDLE, M_GATE, M_GATING, M_LOAD0, M_PRE, M_FC1, M_FC2, M_WAITL } m_e;
  m_e st;
  logic [$clog2(E+1)-1:0] e_cur, e_nxt;
  logic pf;

  // ---------------- gating ----------------
  act_t           logits [NP][E];
  logic [NPW-1:0] lg_patch;
  logic [NPW-1:0] cnt [E];
  logic [NPW-1:0] idx_pos, idx_patch, y_pos;
  act_t           gate_w;
  logic           g_start, g_done;

  gating_unit #(.E(E), .K(K), .NP(NP)) u_gate (
    .clk, .rst_n, .start(g_start), .done(g_done), .n_patch(NPW'(NP)),
    .lg_patch, .lg_data(logits[lg_patch]),
    .idx_e(EWW'(e_cur)), .idx_pos, .idx_patch,
    .w_e(EWW'(e_cur)), .w_pos(y_pos), .w_val(gate_w), .cnt);

  function automatic logic [$clog2(E+1)-1:0] next_active(input logic [$clog2(E+1)-1:0] from);
    next_active = ($clog2(E+1))'(E);
    for (int i = E - 1; i >= 0; i--)
      if (i >= 32'(from) && cnt[i] != '0) next_active = ($clog2(E+1))'(i);
  endfunction

  // ---------------- weights ----------------
  logic           ew_swap, ew_sel;
  logic [EAW-1:0] ld_addr, ew_raddr;
  logic           ld_busy;
  wgt_t           ew_rdata [T][T];
  wgt_t           gw_rdata [T][T];
  logic [KWAW-1:0] k_waddr;

  weight_buffer #(.T_IN(T), .T_OUT(T), .DEPTH(EW_DEPTH), .PING_PONG(1'b1)) u_ew (
    .clk, .rst_n, .swap(ew_swap), .sel(ew_sel),
    .wr_en(wl_valid && ld_busy), .wr_addr(ld_addr), .wr_data(wl_data),
    .rd_addr(ew_raddr), .rd_data(ew_rdata));

  weight_buffer #(.T_IN(T), .T_OUT(T), .DEPTH(GW_DEPTH), .PING_PONG(1'b0)) u_gw (
    .clk, .rst_n, .swap(1'b0), .sel(),
    .wr_en(gw_we), .wr_addr(gw_addr), .wr_data(gw_data),
    .rd_addr(GAW'(k_waddr)), .rd_data(gw_rdata));

  assign ew_raddr = (st == M_FC2) ? EAW'(32'(k_waddr) + FT * HT) : EAW'(k_waddr);
  assign wl_ready = ld_busy;

  // ---------------- linear kernel ----------------
  logic           k_start, k_done, k_busy, k_dense, k_partial;
  logic [$clog2(MAXT+1)-1:0] k_in_tiles, k_out_tiles;
  act_fn_e        k_act;
  logic [NPW-1:0] k_items, act_patch, y_patch;
  logic [IW-1:0]  act_tile, y_tile;
  act_t           k_act_data [T];
  act_t           hid_rdata [T];
  wgt_t           k_wdata [T][T];
  logic           y_valid;
  act_t           y_data [T];

  always_comb begin
    k_dense = 1'b0; k_items = cnt[EWW'(e_cur)]; k_act = ACT_NONE;
    k_in_tiles = ($bits(k_in_tiles))'(FT); k_out_tiles = ($bits(k_out_tiles))'(HT);
    k_wdata = ew_rdata; k_act_data = in_data;
    case (st)
      M_GATE: begin
        k_dense = 1'b1; k_items = NPW'(NP); k_out_tiles = ($bits(k_out_tiles))'(ET); k_wdata = gw_rdata;
      end
      M_FC2: begin
        k_in_tiles = ($bits(k_in_tiles))'(HT); k_out_tiles = ($bits(k_out_tiles))'(FT); k_act_data = hid_rdata;
      end
      default: k_act = ACT_GELU;
    endcase
  end

  linear_kernel #(.N_L(N_L), .T_IN(T), .T_OUT(T), .IN_TILES(MAXT), .OUT_TILES(MAXT), .NP(NP)) u_lin (
    .clk, .rst_n, .start(k_start), .done(k_done), .busy(k_busy),
    .in_tiles(k_in_tiles), .out_tiles(k_out_tiles), .act_fn(k_act), .dense(k_dense), .n_items(k_items),
    .idx_pos, .idx_patch, .act_patch, .act_tile, .act_data(k_act_data),
    .w_addr(k_waddr), .w_data(k_wdata),
    .y_valid, .y_patch, .y_pos, .y_tile, .y_data, .partial_round(k_partial));

  assign in_addr = INAW'(32'(act_patch) * FT + 32'(act_tile));

  // hidden buffer (fc1 -> fc2)
  act_buffer #(.NP(NP), .TILES(HT), .LANES(T)) u_hid (
    .clk, .we(y_valid && st == M_FC1), .waddr(HAW'(32'(y_patch) * HT + 32'(y_tile))), .wdata(y_data),
    .raddr(HAW'(32'(act_patch) * HT + 32'(act_tile))), .rdata(hid_rdata));

  // gate logits
  always_ff @(posedge clk)
    if (y_valid && st == M_GATE)
      for (int o = 0; o < T; o++)
        if (32'(y_tile) * T + o < E) logits[y_patch][32'(y_tile) * T + o] <= y_data[o];

  // MoE output: gate-weighted sum over experts
  logic [INAW-1:0] rmw_addr;
  act_t            out_old [T];
  act_t            out_new [T];
  logic            written [NP * FT];
  assign rmw_addr = INAW'(32'(y_patch) * FT + 32'(y_tile));
  always_comb
    for (int o = 0; o < T; o++)
      out_new[o] = sat_act((written[rmw_addr] ? 96'(out_old[o]) : 96'sd0)
                           + ((96'(y_data[o]) * 96'(gate_w)) >>> ACT_FRAC));

  act_buffer #(.NP(NP), .TILES(FT), .LANES(T)) u_out (
    .clk, .we(y_valid && st == M_FC2), .waddr(rmw_addr), .wdata(out_new),
    .raddr(busy ? rmw_addr : out_raddr), .rdata(out_old));
  assign out_rdata = out_old;

  always_ff @(posedge clk)
    if (start && st == M_IDLE) for (int i = 0; i < NP * FT; i++) written[i] <= 1'b0;
    else if (y_valid && st == M_FC2) written[rmw_addr] <= 1'b1;

  // ---------------- expert weight loader ----------------
  logic ld_req;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_busy <= 1'b0; ld_addr <= '0;
    end else if (ld_req) begin
      ld_busy <= 1'b1; ld_addr <= '0;
    end else if (ld_busy && wl_valid) begin
      ld_addr <= ld_addr + 1'b1;
      if (32'(ld_addr) == EW_DEPTH - 1) ld_busy <= 1'b0;
    end
  end
  assign wl_req = ld_req;

  // ---------------- block sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; e_cur <= '0; e_nxt <= '0; pf <= 1'b0; done <= 1'b0;
      k_start <= 1'b0; g_start <= 1'b0; ld_req <= 1'b0; ew_swap <= 1'b0; wl_expert <= '0;
      n_experts_run <= '0; n_overlap_cycles <= '0; n_partial_rounds <= '0;
      n_dense_passes <= '0; n_gelu_passes <= '0;
    end else begin
      done <= 1'b0; k_start <= 1'b0; g_start <= 1'b0; ld_req <= 1'b0; ew_swap <= 1'b0;
      if (ld_busy && k_busy) n_overlap_cycles <= n_overlap_cycles + 1;
      if (k_done && k_partial) n_partial_rounds <= n_partial_rounds + 1;
      case (st)
        M_IDLE: if (start) begin
          st <= M_GATE; k_start <= 1'b1; n_dense_passes <= n_dense_passes + 1;
        end
        M_GATE: if (k_done) begin st <= M_GATING; g_start <= 1'b1; end
        M_GATING: if (g_done) begin
          e_cur <= next_active('0);
          if (next_active('0) == ($bits(e_cur))'(E)) begin st <= M_IDLE; done <= 1'b1; end
          else begin
            ld_req <= 1'b1; wl_expert <= EWW'(next_active('0)); st <= M_LOAD0;
          end
        end
        M_LOAD0: if (!ld_busy && !ld_req) begin ew_swap <= 1'b1; st <= M_PRE; end
        M_PRE: begin
          e_nxt <= next_active(e_cur + 1'b1);
          pf    <= next_active(e_cur + 1'b1) != ($bits(e_cur))'(E);
          if (next_active(e_cur + 1'b1) != ($bits(e_cur))'(E)) begin
            ld_req <= 1'b1; wl_expert <= EWW'(next_active(e_cur + 1'b1));
          end
          k_start <= 1'b1; n_gelu_passes <= n_gelu_passes + 1; st <= M_FC1;
        end
        M_FC1: if (k_done) begin st <= M_FC2; k_start <= 1'b1; end
        M_FC2: if (k_done) begin
          n_experts_run <= n_experts_run + 1;
          if (!pf) begin st <= M_IDLE; done <= 1'b1; end
          else st <= M_WAITL;
        end
        M_WAITL: if (!ld_busy) begin ew_swap <= 1'b1; e_cur <= e_nxt; st <= M_PRE; end
        default: st <= M_IDLE;
      endcase
    end
  end
  assign busy = (st != M_IDLE);
endmodule
