// attn_pe: one processing element of the fully streaming attention kernel.
//
// After patch reordering each PE keeps one query patch Q_i for the whole
// computation (Q-reg) while every key patch K_j is broadcast to all PEs.
// The PE works in two concurrent stages on two different queries:
//  * Stage 1 (QK dot + max): for each K_j, F/T_A beats of T_A lanes arrive;
//    T_A multipliers accumulate the dot product of one head over DH/T_A
//    beats, then the score x = Q_i.K_j (per head) is pushed into that head's
//    score FIFO and the head's max register m is updated.
//  * Stage 2 (fused softmax + V): after a swap the final maxima move into
//    stage-2 registers. For each V_j the PE pops one score per head, forms
//    e = exp(x - m) with one exp unit per head, adds e to the head's
//    denominator l and accumulates e * V_j into an F-wide accumulator
//    (T_A multipliers). At the end one division per head gives 2^40 / l,
//    and the outputs are acc * (2^40 / l) >> 40, read out one beat at a time.
// Stage 1 can therefore work on the next query while stage 2 finishes the
// current one; the FIFOs hold the scores in between.
// Timing: one beat per cycle on each stage (s1_valid / s2_valid), the
// reciprocal takes 48 cycles after div_start, out_data is combinational in
// out_beat. Scores are not scaled by 1/sqrt(DH): the scale is assumed to be
// folded into Q upstream.
// From the source design: Q kept in a PE, K/V broadcast, per-head max
// registers, score FIFOs between QK and softmax, numerator multiplied with V
// directly, single division per head, T_A multipliers per stage. Beat
// ordering, fixed-point formats and the handshake are this design's choice.
// Lint: all per-head dividers start together and take the same number of
// cycles, so only head 0's done is used and the busy outputs stay unused.
module attn_pe
  import ubimoe_pkg::*;
#(
  parameter int unsigned F     = 384,
  parameter int unsigned H     = 6,
  parameter int unsigned T_A   = 16,
  parameter int unsigned N     = 197,
  localparam int unsigned BEATS = F / T_A,
  localparam int unsigned BPH   = (F / H) / T_A,
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned HW    = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned DEPTH = N + 2,
  localparam int unsigned PW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // Q-reg load
  input  logic          q_we,
  input  logic [BW-1:0] q_beat,
  input  act_t          q_data [T_A],
  // stage 1: broadcast K beats
  input  logic          s1_valid,
  input  logic [BW-1:0] s1_beat,
  input  logic          s1_first_j,
  input  act_t          k_data [T_A],
  // hand the finished maxima of stage 1 over to stage 2
  input  logic          swap,
  // stage 2: broadcast V beats
  input  logic          s2_valid,
  input  logic [BW-1:0] s2_beat,
  input  logic          s2_first_j,
  input  act_t          v_data [T_A],
  // division and readout
  input  logic          div_start,
  output logic          div_done,
  input  logic [BW-1:0] out_beat,
  output act_t          out_data [T_A],
  output logic          fifo_overflow
);
  // ---------------- Q-reg ----------------
  act_t q_reg [BEATS][T_A];
  always_ff @(posedge clk) if (q_we) q_reg[q_beat] <= q_data;

  // ---------------- stage 1 ----------------
  logic signed [95:0] psum1;
  logic signed [95:0] hacc;
  logic [HW-1:0]      h1;
  logic               head_first, head_last;
  act_t               score;
  act_t               max1 [H];

  always_comb begin
    psum1 = '0;
    for (int t = 0; t < T_A; t++)
      psum1 += 96'(q_reg[s1_beat][t]) * 96'(k_data[t]);
    h1         = HW'(32'(s1_beat) / BPH);
    head_first = (32'(s1_beat) % BPH) == 0;
    head_last  = (32'(s1_beat) % BPH) == BPH - 1;
    score      = sat_act(((head_first ? 96'sd0 : hacc) + psum1) >>> ACT_FRAC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hacc <= '0;
      for (int h = 0; h < H; h++) max1[h] <= '0;
    end else if (s1_valid) begin
      hacc <= (head_first ? 96'sd0 : hacc) + psum1;
      if (head_last)
        max1[h1] <= (s1_first_j || score > max1[h1]) ? score : max1[h1];
    end
  end

  // ---------------- per-head score FIFOs ("parallel streams") ----------------
  act_t            fifo_mem [H][DEPTH];
  logic [PW-1:0]   wptr [H];
  logic [PW-1:0]   rptr [H];
  logic [PW:0]     fcnt [H];
  logic            pop;
  logic            push [H];

  always_comb begin
    pop = s2_valid && (32'(s2_beat) == BEATS - 1);
    for (int h = 0; h < H; h++) push[h] = s1_valid && head_last && (32'(h1) == h);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fifo_overflow <= 1'b0;
      for (int h = 0; h < H; h++) begin
        wptr[h] <= '0; rptr[h] <= '0; fcnt[h] <= '0;
      end
    end else begin
      for (int h = 0; h < H; h++) begin
        if (push[h]) wptr[h] <= (32'(wptr[h]) == DEPTH - 1) ? '0 : wptr[h] + 1'b1;
        if (pop)     rptr[h] <= (32'(rptr[h]) == DEPTH - 1) ? '0 : rptr[h] + 1'b1;
        fcnt[h] <= fcnt[h] + (push[h] ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
        if (push[h] && !pop && 32'(fcnt[h]) == DEPTH) fifo_overflow <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    for (int h = 0; h < H; h++)
      if (push[h]) fifo_mem[h][wptr[h]] <= score;

  // ---------------- stage 2 ----------------
  act_t               max2 [H];
  expv_t              e [H];
  logic [31:0]        lsum [H];
  logic signed [63:0] acc [BEATS][T_A];
  logic [HW-1:0]      h2;

  for (genvar h = 0; h < H; h++) begin : g_exp
    act_t diff;
    always_comb diff = sat_act(96'(fifo_mem[h][rptr[h]]) - 96'(max2[h]));
    exp_unit u_exp (.d(diff), .e(e[h]));
  end

  always_comb h2 = HW'(32'(s2_beat) / BPH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < H; h++) begin max2[h] <= '0; lsum[h] <= '0; end
    end else begin
      if (swap)
        for (int h = 0; h < H; h++) max2[h] <= max1[h];
      if (pop)
        for (int h = 0; h < H; h++) lsum[h] <= (s2_first_j ? 32'd0 : lsum[h]) + 32'(e[h]);
    end
  end

  always_ff @(posedge clk)
    if (s2_valid)
      for (int t = 0; t < T_A; t++)
        acc[s2_beat][t] <= (s2_first_j ? 64'sd0 : acc[s2_beat][t])
                           + 64'($signed({1'b0, e[h2]})) * 64'(v_data[t]);

  // ---------------- one division per head ----------------
  logic [47:0] recip [H];
  logic        hdone [H];
  logic        hbusy [H];
  for (genvar h = 0; h < H; h++) begin : g_div
    recip_div #(.W(48)) u_div (
      .clk, .rst_n, .start(div_start),
      .num(48'h0100_0000_0000), .den(48'(lsum[h])),
      .busy(hbusy[h]), .done(hdone[h]), .q(recip[h]));
  end
  assign div_done = hdone[0];

  logic [HW-1:0] ho;
  always_comb begin
    ho = HW'(32'(out_beat) / BPH);
    for (int t = 0; t < T_A; t++)
      out_data[t] = sat_act(96'((128'(acc[out_beat][t]) * 128'($signed({1'b0, recip[ho]}))) >>> 40));
  end
endmodule
