// tb_attn_pe: one PE driven directly: two queries one after the other,
// where the QK stage of the second query runs while the softmax/V stage of
// the first one is still going (the overlap the kernel relies on). Each
// output is checked against real-valued softmax attention.
module tb_attn_pe;
  import ubimoe_pkg::*;
  localparam int F = 4, H = 2, T_A = 2, N = 6, BEATS = F / T_A, DH = F / H;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic q_we = 0, s1_valid = 0, s1_first_j = 0, swap = 0, s2_valid = 0, s2_first_j = 0, div_start = 0;
  logic [0:0] q_beat = 0, s1_beat = 0, s2_beat = 0, out_beat = 0;
  act_t q_data [T_A]; act_t k_data [T_A]; act_t v_data [T_A]; act_t out_data [T_A];
  logic div_done, fifo_overflow;
  attn_pe #(.F(F), .H(H), .T_A(T_A), .N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  act_t q [2][F]; act_t k [N][F]; act_t v [N][F];

  function automatic real want(input int qi, input int d);
    real s [N]; real m, l, o; int h;
    h = d / DH; m = -1.0e30; l = 0.0; o = 0.0;
    for (int j = 0; j < N; j++) begin
      s[j] = 0.0;
      for (int x = h * DH; x < (h + 1) * DH; x++) s[j] += real'(q[qi][x]) * real'(k[j][x]) / 4294967296.0;
      if (s[j] > m) m = s[j];
    end
    for (int j = 0; j < N; j++) l += $exp(s[j] - m);
    for (int j = 0; j < N; j++) o += $exp(s[j] - m) / l * real'(v[j][d]) / 65536.0;
    return o;
  endfunction

  task automatic load_q(input int qi);
    for (int b = 0; b < BEATS; b++) begin
      @(negedge clk); q_we = 1; q_beat = b[0];
      for (int t = 0; t < T_A; t++) q_data[t] = q[qi][b * T_A + t];
    end
    @(negedge clk) q_we = 0;
  endtask

  task automatic check_out(input int qi);
    @(negedge clk) div_start = 1; @(negedge clk) div_start = 0;
    wait (div_done); @(negedge clk);
    for (int b = 0; b < BEATS; b++) begin
      out_beat = b[0]; #1;
      for (int t = 0; t < T_A; t++) begin
        real got, w;
        got = real'(out_data[t]) / 65536.0; w = want(qi, b * T_A + t);
        checks++;
        if (got - w > 0.01 || w - got > 0.01) begin failures++; $display("q%0d d%0d got %f want %f", qi, b*T_A+t, got, w); end
      end
    end
  endtask

  initial begin
    for (int d = 0; d < F; d++) begin
      q[0][d] = act_t'($urandom_range(0, 4 * 65536)) - 32'sd131072;
      q[1][d] = act_t'($urandom_range(0, 4 * 65536)) - 32'sd131072;
      for (int j = 0; j < N; j++) begin
        k[j][d] = act_t'($urandom_range(0, 4 * 65536)) - 32'sd131072;
        v[j][d] = act_t'($urandom_range(0, 4 * 65536)) - 32'sd131072;
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    load_q(0);
    // stage 1 for query 0
    for (int j = 0; j < N; j++) for (int b = 0; b < BEATS; b++) begin
      @(negedge clk); s1_valid = 1; s1_beat = b[0]; s1_first_j = (j == 0);
      for (int t = 0; t < T_A; t++) k_data[t] = k[j][b * T_A + t];
    end
    @(negedge clk) begin s1_valid = 0; swap = 1; end
    @(negedge clk) swap = 0;
    load_q(1);
    // stage 2 for query 0 and stage 1 for query 1 together
    for (int j = 0; j < N; j++) for (int b = 0; b < BEATS; b++) begin
      @(negedge clk);
      s1_valid = 1; s1_beat = b[0]; s1_first_j = (j == 0);
      s2_valid = 1; s2_beat = b[0]; s2_first_j = (j == 0);
      for (int t = 0; t < T_A; t++) begin k_data[t] = k[j][b * T_A + t]; v_data[t] = v[j][b * T_A + t]; end
    end
    @(negedge clk) begin s1_valid = 0; s2_valid = 0; end
    check_out(0);
    @(negedge clk) swap = 1; @(negedge clk) swap = 0;
    for (int j = 0; j < N; j++) for (int b = 0; b < BEATS; b++) begin
      @(negedge clk); s2_valid = 1; s2_beat = b[0]; s2_first_j = (j == 0);
      for (int t = 0; t < T_A; t++) v_data[t] = v[j][b * T_A + t];
    end
    @(negedge clk) s2_valid = 0;
    check_out(1);
    checks++; if (fifo_overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
