// gating_unit: expert selection of the MoE block ("Gating" / gate function).
//
// For each patch p = 0..n_patch-1 it reads the E gate logits (produced by
// the gate linear layer on the linear kernel), picks the K largest (ties go
// to the lower expert index), computes softmax weights over the K chosen
// logits (exp of the difference to the largest, one shared division of
// 2^32 by their sum) and appends (p, weight) to the patch list of each
// chosen expert. The lists are what the round-robin router walks in sparse
// mode. Two combinational read ports serve the router (patch index) and
// the output combiner (gate weight); cnt[e] is the length of expert e's
// list. A patch takes 3 cycles plus the 48-cycle division.
// The source design says only that a gate network chooses the experts from
// the input; top-K softmax gating and K = 4 of E = 16 are this design's
// assumption about the evaluated MoE-ViT model.
// Lint: the divider's busy output is unused; the FSM waits for its done.
module gating_unit
  import ubimoe_pkg::*;
#(
  parameter int unsigned E  = 16,
  parameter int unsigned K  = 4,
  parameter int unsigned NP = 197,
  localparam int unsigned EW  = $clog2(E),
  localparam int unsigned NPW = $clog2(NP + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           done,
  input  logic [NPW-1:0] n_patch,
  output logic [NPW-1:0] lg_patch,
  input  act_t           lg_data [E],
  input  logic [EW-1:0]  idx_e,
  input  logic [NPW-1:0] idx_pos,
  output logic [NPW-1:0] idx_patch,
  input  logic [EW-1:0]  w_e,
  input  logic [NPW-1:0] w_pos,
  output act_t           w_val,
  output logic [NPW-1:0] cnt [E]
);
  typedef enum logic [1:0] { G_IDLE, G_SEL, G_DIV, G_WR } g_e;
  g_e st;
  logic [NPW-1:0] p;

  logic [NPW-1:0] lst_patch [E][NP];
  act_t           lst_w     [E][NP];

  // combinational top-K
  logic [EW-1:0] sel_e [K];
  act_t          sel_l [K];
  logic [E-1:0]  taken;
  always_comb begin
    taken = '0;
    for (int k = 0; k < K; k++) begin
      sel_e[k] = '0; sel_l[k] = '0;
      // pick the first untaken index with the largest logit
      begin
        logic found;
        found = 1'b0;
        for (int i = 0; i < E; i++)
          if (!taken[i] && (!found || lg_data[i] > sel_l[k])) begin
            found = 1'b1; sel_e[k] = EW'(i); sel_l[k] = lg_data[i];
          end
      end
      taken[sel_e[k]] = 1'b1;
    end
  end

  // registered choice, exps, sum, division
  logic [EW-1:0] r_e [K];
  act_t          r_l [K];
  expv_t         ex  [K];
  logic [47:0]   esum, recip;
  logic          dstart, ddone, dbusy;

  for (genvar k = 0; k < K; k++) begin : g_exp
    act_t d;
    always_comb d = sat_act(96'(r_l[k]) - 96'(r_l[0]));
    exp_unit u_exp (.d(d), .e(ex[k]));
  end
  always_comb begin
    esum = '0;
    for (int k = 0; k < K; k++) esum += 48'(ex[k]);
  end

  recip_div #(.W(48)) u_div (.clk, .rst_n, .start(dstart), .num(48'h1_0000_0000),
                             .den(esum), .busy(dbusy), .done(ddone), .q(recip));

  assign lg_patch  = p;
  assign idx_patch = lst_patch[idx_e][idx_pos];
  assign w_val     = lst_w[w_e][w_pos];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; p <= '0; done <= 1'b0; dstart <= 1'b0;
      for (int e = 0; e < E; e++) cnt[e] <= '0;
      for (int k = 0; k < K; k++) begin r_e[k] <= '0; r_l[k] <= '0; end
    end else begin
      done <= 1'b0; dstart <= 1'b0;
      case (st)
        G_IDLE: if (start) begin
          p <= '0;
          for (int e = 0; e < E; e++) cnt[e] <= '0;
          st <= (n_patch == '0) ? G_IDLE : G_SEL;
          if (n_patch == '0) done <= 1'b1;
        end
        G_SEL: begin
          r_e <= sel_e; r_l <= sel_l; dstart <= 1'b1; st <= G_DIV;
        end
        G_DIV: if (ddone) st <= G_WR;
        G_WR: begin
          for (int k = 0; k < K; k++) cnt[r_e[k]] <= cnt[r_e[k]] + 1'b1;
          if (p == n_patch - 1'b1) begin st <= G_IDLE; done <= 1'b1; end
          else begin p <= p + 1'b1; st <= G_SEL; end
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (st == G_WR)
      for (int k = 0; k < K; k++) begin
        lst_patch[r_e[k]][cnt[r_e[k]]] <= p;
        lst_w[r_e[k]][cnt[r_e[k]]]     <= act_t'((64'(ex[k]) * 64'(recip)) >> 16);
      end
endmodule
