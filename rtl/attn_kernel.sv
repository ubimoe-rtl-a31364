// attn_kernel: fully streaming attention kernel of the MSA block.
//
// N_A PEs (attn_pe) each hold one query patch; the keys and values of all N
// patches sit once in kv_buffer and are broadcast beat by beat. Queries are
// processed in groups of N_A (the last group may be partial). Two
// controllers run side by side:
//  * stage 1 loads the group's Q beats into the PEs (q_valid/q_ready
//    stream, order: PE, then beat), then streams K_0..K_{N-1} (BEATS beats
//    each) for the QK dot products and maxima, then waits for stage 2;
//  * stage 2, started by the hand-over (swap) of a finished group, streams
//    V_0..V_{N-1} for exp/sum/exp*V, starts the per-head divisions and then
//    sends the group's output patches (o_valid/o_ready, one beat per
//    transfer, o_patch = query index, o_beat = beat index).
// While stage 2 handles group g, stage 1 already loads and scores group
// g+1, so a layer takes about ceil(N/N_A) * N * F/T_A cycles, the
// N^2 F / (T_A N_A) of the source design's latency model.
// start begins a layer (K and V must be loaded first through kv_*); done
// pulses after the last output beat. s1_busy/s2_busy show the stages.
module attn_kernel
  import ubimoe_pkg::*;
#(
  parameter int unsigned N_A = 3,
  parameter int unsigned T_A = 16,
  parameter int unsigned F   = 384,
  parameter int unsigned H   = 6,
  parameter int unsigned N   = 197,
  localparam int unsigned BEATS = F / T_A,
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned NW    = $clog2(N + 1),
  localparam int unsigned AW    = $clog2(N * BEATS),
  localparam int unsigned G     = (N + N_A - 1) / N_A,
  localparam int unsigned GW    = $clog2(G + 1),
  localparam int unsigned PEW   = (N_A > 1) ? $clog2(N_A) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          done,
  output logic          busy,
  // K/V load
  input  logic          kv_we,
  input  logic          kv_sel,
  input  logic [AW-1:0] kv_addr,
  input  act_t          kv_data [T_A],
  // Q stream
  input  logic          q_valid,
  output logic          q_ready,
  input  act_t          q_data [T_A],
  // output stream
  output logic          o_valid,
  input  logic          o_ready,
  output logic [NW-1:0] o_patch,
  output logic [BW-1:0] o_beat,
  output act_t          o_data [T_A],
  // status
  output logic          s1_busy,
  output logic          s2_busy,
  output logic          fifo_overflow
);
  typedef enum logic [1:0] { S1_IDLE, S1_LOADQ, S1_RUN, S1_WAIT } s1_e;
  typedef enum logic [1:0] { S2_IDLE, S2_RUN, S2_DIV, S2_OUT } s2_e;
  s1_e s1;
  s2_e s2;

  logic [GW-1:0]  g1, g2;
  logic [PEW-1:0] p1, p2;
  logic [BW-1:0]  b1, b2;
  logic [NW-1:0]  j1, j2;
  logic           swap, div_start, div_done;

  // number of valid PEs in a group
  function automatic logic [PEW:0] nvalid(input logic [GW-1:0] g);
    int unsigned rest;
    rest = N - 32'(g) * N_A;
    return (rest >= N_A) ? (PEW+1)'(N_A) : (PEW+1)'(rest);
  endfunction

  // ---------------- K/V buffers ----------------
  act_t k_bc [T_A];
  act_t v_bc [T_A];
  kv_buffer #(.N(N), .BEATS(BEATS), .T_A(T_A)) u_kv (
    .clk, .we(kv_we), .sel(kv_sel), .waddr(kv_addr), .wdata(kv_data),
    .k_addr(AW'(32'(j1) * BEATS + 32'(b1))), .k_data(k_bc),
    .v_addr(AW'(32'(j2) * BEATS + 32'(b2))), .v_data(v_bc));

  // ---------------- PEs ----------------
  act_t pe_out [N_A][T_A];
  logic pe_div_done [N_A];
  logic pe_ovf [N_A];
  logic q_fire;
  assign q_ready = (s1 == S1_LOADQ);
  assign q_fire  = q_valid && q_ready;

  for (genvar p = 0; p < N_A; p++) begin : g_pe
    attn_pe #(.F(F), .H(H), .T_A(T_A), .N(N)) u_pe (
      .clk, .rst_n,
      .q_we(q_fire && 32'(p1) == p), .q_beat(b1), .q_data,
      .s1_valid(s1 == S1_RUN), .s1_beat(b1), .s1_first_j(j1 == '0), .k_data(k_bc),
      .swap,
      .s2_valid(s2 == S2_RUN), .s2_beat(b2), .s2_first_j(j2 == '0), .v_data(v_bc),
      .div_start, .div_done(pe_div_done[p]),
      .out_beat(b2), .out_data(pe_out[p]), .fifo_overflow(pe_ovf[p]));
  end
  assign div_done = pe_div_done[0];

  always_comb begin
    fifo_overflow = 1'b0;
    for (int p = 0; p < N_A; p++) fifo_overflow |= pe_ovf[p];
  end

  assign swap = (s1 == S1_WAIT) && (s2 == S2_IDLE);

  // ---------------- stage 1 controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= S1_IDLE; g1 <= '0; p1 <= '0; b1 <= '0; j1 <= '0;
    end else begin
      case (s1)
        S1_IDLE: if (start) begin s1 <= S1_LOADQ; g1 <= '0; p1 <= '0; b1 <= '0; end
        S1_LOADQ: if (q_fire) begin
          if (32'(b1) == BEATS - 1) begin
            b1 <= '0;
            if ((PEW+1)'(p1) + 1'b1 == nvalid(g1)) begin
              p1 <= '0; j1 <= '0; s1 <= S1_RUN;
            end else p1 <= p1 + 1'b1;
          end else b1 <= b1 + 1'b1;
        end
        S1_RUN: begin
          if (32'(b1) == BEATS - 1) begin
            b1 <= '0;
            if (32'(j1) == N - 1) s1 <= S1_WAIT;
            else j1 <= j1 + 1'b1;
          end else b1 <= b1 + 1'b1;
        end
        S1_WAIT: if (swap) begin
          j1 <= '0;
          if (32'(g1) == G - 1) s1 <= S1_IDLE;
          else begin g1 <= g1 + 1'b1; s1 <= S1_LOADQ; end
        end
        default: s1 <= S1_IDLE;
      endcase
    end
  end

  // ---------------- stage 2 controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2 <= S2_IDLE; g2 <= '0; p2 <= '0; b2 <= '0; j2 <= '0; div_start <= 1'b0; done <= 1'b0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      case (s2)
        S2_IDLE: if (swap) begin s2 <= S2_RUN; g2 <= g1; j2 <= '0; b2 <= '0; end
        S2_RUN: begin
          if (32'(b2) == BEATS - 1) begin
            b2 <= '0;
            if (32'(j2) == N - 1) begin s2 <= S2_DIV; div_start <= 1'b1; end
            else j2 <= j2 + 1'b1;
          end else b2 <= b2 + 1'b1;
        end
        S2_DIV: if (div_done) begin s2 <= S2_OUT; p2 <= '0; b2 <= '0; end
        S2_OUT: if (o_ready) begin
          if (32'(b2) == BEATS - 1) begin
            b2 <= '0;
            if ((PEW+1)'(p2) + 1'b1 == nvalid(g2)) begin
              s2 <= S2_IDLE; j2 <= '0;
              if (32'(g2) == G - 1) done <= 1'b1;
            end else p2 <= p2 + 1'b1;
          end else b2 <= b2 + 1'b1;
        end
        default: s2 <= S2_IDLE;
      endcase
    end
  end

  assign o_valid = (s2 == S2_OUT);
  assign o_patch = NW'(32'(g2) * N_A + 32'(p2));
  assign o_beat  = b2;
  assign o_data  = pe_out[p2];
  assign s1_busy = (s1 != S1_IDLE);
  assign s2_busy = (s2 != S2_IDLE);
  assign busy    = s1_busy || s2_busy;
endmodule
