// linear_kernel: reusable linear kernel, y = act(W^T x) for a list of patches.
//
// N_L compute units (linear_cu) share one weight tile per cycle; the
// round-robin router (rr_router) picks N_L patches per round and loads
// their input tiles. For each round:
//   for ti in input tiles:  router loads tile ti into the N_L CUs (N_L cycles)
//     for to in output tiles: weight tile (ti,to) is read once and
//                             broadcast; every CU accumulates (1 cycle)
//   drain: for to, for each valid CU: emit y tile (to) of its patch
// so every weight tile is read once per N_L patches. In sparse mode the
// patch list is an expert's index list (idx_*), in dense mode patches
// 0..n_items-1; this is how the same kernel also serves dense layers
// (gate, projection). act_fn selects GELU on the outputs (between the two
// linear layers of an expert).
// Interfaces: w_addr = ti*out_tiles + to with combinational w_data;
// act/idx reads are combinational; y_valid pulses one output tile of
// T_OUT lanes per cycle with its patch, list position and tile index, and
// the consumer must take it. start begins a pass, done pulses at its end.
// A round takes in_tiles*(N_L+out_tiles+2) + out_tiles*N_L cycles, about.
// Broadcast weights, router-only activation access and sparse/dense modes
// follow the source design; loop order and handshakes are this design's.
module linear_kernel
  import ubimoe_pkg::*;
#(
  parameter int unsigned N_L       = 4,
  parameter int unsigned T_IN      = 16,
  parameter int unsigned T_OUT     = 16,
  parameter int unsigned IN_TILES  = 96,
  parameter int unsigned OUT_TILES = 96,
  parameter int unsigned NP        = 197,
  parameter int unsigned WDEPTH    = IN_TILES * OUT_TILES,
  localparam int unsigned NPW      = $clog2(NP + 1),
  localparam int unsigned ITW      = $clog2(IN_TILES + 1),
  localparam int unsigned OTW      = $clog2(OUT_TILES + 1),
  localparam int unsigned IW       = (IN_TILES > 1) ? $clog2(IN_TILES) : 1,
  localparam int unsigned OW       = (OUT_TILES > 1) ? $clog2(OUT_TILES) : 1,
  localparam int unsigned WAW      = $clog2(WDEPTH),
  localparam int unsigned CW       = (N_L > 1) ? $clog2(N_L) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           done,
  output logic           busy,
  input  logic [ITW-1:0] in_tiles,
  input  logic [OTW-1:0] out_tiles,
  input  act_fn_e        act_fn,
  input  logic           dense,
  input  logic [NPW-1:0] n_items,
  output logic [NPW-1:0] idx_pos,
  input  logic [NPW-1:0] idx_patch,
  output logic [NPW-1:0] act_patch,
  output logic [IW-1:0]  act_tile,
  input  act_t           act_data [T_IN],
  output logic [WAW-1:0] w_addr,
  input  wgt_t           w_data [T_IN][T_OUT],
  output logic           y_valid,
  output logic [NPW-1:0] y_patch,
  output logic [NPW-1:0] y_pos,
  output logic [OW-1:0]  y_tile,
  output act_t           y_data [T_OUT],
  output logic           partial_round
);
  typedef enum logic [2:0] { K_IDLE, K_FETCH, K_LOAD, K_MAC, K_DRAIN, K_NEXT } k_e;
  k_e st;
  logic [IW-1:0] ti;
  logic [OW-1:0] to;
  logic [CW-1:0] c;
  logic          cmd_round, cmd_load, r_done, l_done, l_empty, list_reset;

  logic           cu_ld   [N_L];
  act_t           cu_data [T_IN];
  logic [NPW-1:0] s_patch [N_L];
  logic [NPW-1:0] s_pos   [N_L];
  logic           s_valid [N_L];
  act_t           cu_rd   [N_L][T_OUT];

  rr_router #(.N_L(N_L), .T_IN(T_IN), .NP(NP), .TILES(IN_TILES)) u_router (
    .clk, .rst_n, .dense, .n_items, .list_reset,
    .round_start(cmd_round), .round_done(r_done),
    .load_tile(cmd_load), .tile(ti), .load_done(l_done), .list_empty(l_empty),
    .idx_pos, .idx_patch, .act_patch, .act_tile, .act_data,
    .cu_ld, .cu_data, .slot_patch(s_patch), .slot_pos(s_pos), .slot_valid(s_valid));

  for (genvar k = 0; k < N_L; k++) begin : g_cu
    linear_cu #(.T_IN(T_IN), .T_OUT(T_OUT), .ROWS(OUT_TILES)) u_cu (
      .clk, .x_ld(cu_ld[k]), .x_ld_data(cu_data),
      .mac_en(st == K_MAC), .mac_first(ti == '0), .mac_row(to), .w_tile(w_data),
      .rd_row(to), .rd_data(cu_rd[k]));
  end

  assign list_reset = start && (st == K_IDLE);
  assign w_addr     = WAW'(32'(ti) * 32'(out_tiles) + 32'(to));
  assign busy       = (st != K_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= K_IDLE; ti <= '0; to <= '0; c <= '0; done <= 1'b0;
      cmd_round <= 1'b0; cmd_load <= 1'b0; partial_round <= 1'b0;
    end else begin
      done <= 1'b0; cmd_round <= 1'b0; cmd_load <= 1'b0;
      case (st)
        K_IDLE: if (start) st <= K_NEXT;
        K_NEXT: begin          // begin a round, or finish
          if (l_empty) begin st <= K_IDLE; done <= 1'b1; end
          else begin cmd_round <= 1'b1; st <= K_FETCH; end
        end
        K_FETCH: if (r_done) begin
          ti <= '0; cmd_load <= 1'b1; st <= K_LOAD;
          if (!s_valid[N_L-1]) partial_round <= 1'b1;
        end
        K_LOAD: if (l_done) begin to <= '0; st <= K_MAC; end
        K_MAC: begin
          if (32'(to) == 32'(out_tiles) - 1) begin
            to <= '0;
            if (32'(ti) == 32'(in_tiles) - 1) begin c <= '0; st <= K_DRAIN; end
            else begin ti <= ti + 1'b1; cmd_load <= 1'b1; st <= K_LOAD; end
          end else to <= to + 1'b1;
        end
        K_DRAIN: begin
          if (32'(c) == N_L - 1) begin
            c <= '0;
            if (32'(to) == 32'(out_tiles) - 1) begin to <= '0; ti <= '0; st <= K_NEXT; end
            else to <= to + 1'b1;
          end else c <= c + 1'b1;
        end
        default: st <= K_IDLE;
      endcase
    end
  end

  // output path with optional GELU
  act_t gelu_y [T_OUT];
  for (genvar o = 0; o < T_OUT; o++) begin : g_gelu
    gelu_unit u_gelu (.x(cu_rd[c][o]), .y(gelu_y[o]));
  end

  assign y_valid = (st == K_DRAIN) && s_valid[c];
  assign y_patch = s_patch[c];
  assign y_pos   = s_pos[c];
  assign y_tile  = to;
  always_comb
    for (int o = 0; o < T_OUT; o++)
      y_data[o] = (act_fn == ACT_GELU) ? gelu_y[o] : cu_rd[c][o];
endmodule
