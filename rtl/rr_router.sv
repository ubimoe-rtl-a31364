// rr_router: round-robin router of the reusable linear kernel.
//
// The router is the only part of the kernel that touches activations. For
// each round it takes the next N_L unused entries of the patch list (one per
// cycle, slot c for CU c): in sparse mode the list is the selected expert's
// patch index list, read through idx_pos/idx_patch; in dense mode entry k
// is simply patch k. On load_tile it then reads input tile `tile` of the
// N_L slot patches one after another, one per cycle, and hands each to its
// CU (cu_ld[c]), so every CU gets the same work. Slots left without a patch
// in the last round are marked invalid.
// Timing: round_start -> N_L cycles -> round_done; load_tile -> N_L cycles
// -> load_done. list_reset rewinds the list. idx and act reads are
// combinational (same cycle). Policy (first unused indices, cyclic loading)
// is from the source design; the command handshake is this design's.
module rr_router
  import ubimoe_pkg::*;
#(
  parameter int unsigned N_L      = 4,
  parameter int unsigned T_IN     = 16,
  parameter int unsigned NP       = 197,
  parameter int unsigned TILES    = 96,
  localparam int unsigned NPW     = $clog2(NP + 1),
  localparam int unsigned TW      = (TILES > 1) ? $clog2(TILES) : 1,
  localparam int unsigned CW      = (N_L > 1) ? $clog2(N_L) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           dense,
  input  logic [NPW-1:0] n_items,
  input  logic           list_reset,
  input  logic           round_start,
  output logic           round_done,
  input  logic           load_tile,
  input  logic [TW-1:0]  tile,
  output logic           load_done,
  output logic           list_empty,
  // patch index list (sparse mode)
  output logic [NPW-1:0] idx_pos,
  input  logic [NPW-1:0] idx_patch,
  // activation read
  output logic [NPW-1:0] act_patch,
  output logic [TW-1:0]  act_tile,
  input  act_t           act_data [T_IN],
  // to the CUs
  output logic           cu_ld [N_L],
  output act_t           cu_data [T_IN],
  // slot state
  output logic [NPW-1:0] slot_patch [N_L],
  output logic [NPW-1:0] slot_pos   [N_L],
  output logic           slot_valid [N_L]
);
  typedef enum logic [1:0] { R_IDLE, R_FETCH, R_LOAD } r_e;
  r_e            st;
  logic [NPW-1:0] ptr;
  logic [CW-1:0]  c;
  logic [TW-1:0]  tile_q;

  assign list_empty = (ptr >= n_items);
  assign idx_pos    = ptr;
  assign act_patch  = slot_patch[c];
  assign act_tile   = tile_q;
  assign cu_data    = act_data;

  always_comb
    for (int k = 0; k < N_L; k++)
      cu_ld[k] = (st == R_LOAD) && (32'(c) == k) && slot_valid[k];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE; ptr <= '0; c <= '0; tile_q <= '0; round_done <= 1'b0; load_done <= 1'b0;
      for (int k = 0; k < N_L; k++) begin
        slot_patch[k] <= '0; slot_pos[k] <= '0; slot_valid[k] <= 1'b0;
      end
    end else begin
      round_done <= 1'b0;
      load_done  <= 1'b0;
      case (st)
        R_IDLE: begin
          if (list_reset) ptr <= '0;
          if (round_start) begin st <= R_FETCH; c <= '0; end
          else if (load_tile) begin st <= R_LOAD; c <= '0; tile_q <= tile; end
        end
        R_FETCH: begin
          slot_valid[c] <= !list_empty;
          slot_pos[c]   <= ptr;
          slot_patch[c] <= dense ? ptr : idx_patch;
          if (!list_empty) ptr <= ptr + 1'b1;
          if (32'(c) == N_L - 1) begin st <= R_IDLE; round_done <= 1'b1; end
          else c <= c + 1'b1;
        end
        R_LOAD: begin
          if (32'(c) == N_L - 1) begin st <= R_IDLE; load_done <= 1'b1; end
          else c <= c + 1'b1;
        end
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
