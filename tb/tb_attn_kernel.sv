// tb_attn_kernel: end-to-end check of the streaming attention kernel
// against a real-valued multi-head softmax attention, at N = 13 patches,
// F = 8, 2 heads, T_A = 2 and N_A = 2 PEs (so the last Q group is
// partial). The output stream is throttled at random. Also checked: the
// two stages overlap, no score FIFO overflows, and the layer takes no more
// than ceil(N/N_A) * N * F/T_A cycles plus a fixed per-group overhead.
module tb_attn_kernel;
  import ubimoe_pkg::*;
  localparam int N_A = 2, T_A = 2, F = 8, H = 2, N = 13;
  localparam int BEATS = F / T_A, DH = F / H, G = (N + N_A - 1) / N_A;
  localparam int AW = $clog2(N * BEATS), NW = $clog2(N + 1), BW = $clog2(BEATS);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, done, busy;
  logic kv_we = 0, kv_sel = 0; logic [AW-1:0] kv_addr = '0; act_t kv_data [T_A];
  logic q_valid = 0, q_ready; act_t q_data [T_A];
  logic o_valid, o_ready = 0; logic [NW-1:0] o_patch; logic [BW-1:0] o_beat; act_t o_data [T_A];
  logic s1_busy, s2_busy, fifo_overflow;
  attn_kernel #(.N_A(N_A), .T_A(T_A), .F(F), .H(H), .N(N)) dut (.*);
  always #5 clk = ~clk;

  act_t q [N][F]; act_t k [N][F]; act_t v [N][F];
  real  want [N][F];
  int   seen [N];
  int   cycles = 0, overlap = 0;
  bit   counting = 0;
  always @(posedge clk) begin
    if (counting) cycles++;
    if (s1_busy && s2_busy) overlap++;
  end

  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // reference
  task automatic reference();
    for (int i = 0; i < N; i++)
      for (int h = 0; h < H; h++) begin
        real s [N]; real m, l;
        m = -1.0e30; l = 0.0;
        for (int j = 0; j < N; j++) begin
          s[j] = 0.0;
          for (int d = h * DH; d < (h + 1) * DH; d++) s[j] += real'(q[i][d]) * real'(k[j][d]) / 4294967296.0;
          if (s[j] > m) m = s[j];
        end
        for (int j = 0; j < N; j++) l += $exp(s[j] - m);
        for (int d = h * DH; d < (h + 1) * DH; d++) begin
          want[i][d] = 0.0;
          for (int j = 0; j < N; j++) want[i][d] += $exp(s[j] - m) / l * real'(v[j][d]) / 65536.0;
        end
      end
  endtask

  // Q stream
  initial begin
    int p, b;
    p = 0; b = 0;
    wait (rst_n);
    forever begin
      bit fire;
      @(posedge clk); fire = q_valid && q_ready;
      @(negedge clk);
      if (fire) begin
        b++; if (b == BEATS) begin b = 0; p++; end
      end
      q_valid = (p < N) && counting;
      if (p < N) for (int t = 0; t < T_A; t++) q_data[t] = q[p][b * T_A + t];
    end
  end

  // output sink with random backpressure
  always @(negedge clk) o_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk)
    if (o_valid && o_ready) begin
      for (int t = 0; t < T_A; t++) begin
        real got, w;
        got = real'(o_data[t]) / 65536.0; w = want[o_patch][o_beat * T_A + t];
        checks++;
        if (got - w > 0.02 || w - got > 0.02) begin
          failures++;
          if (failures < 6) $display("out[%0d][%0d] got %f want %f", o_patch, o_beat * T_A + t, got, w);
        end
      end
      seen[o_patch]++;
    end

  initial begin
    for (int i = 0; i < N; i++) for (int d = 0; d < F; d++) begin
      q[i][d] = act_t'($urandom_range(0, 4 * 65536)) - 32'sd131072;
      k[i][d] = act_t'($urandom_range(0, 4 * 65536)) - 32'sd131072;
      v[i][d] = act_t'($urandom_range(0, 4 * 65536)) - 32'sd131072;
    end
    reference();
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int j = 0; j < N; j++) for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        kv_we = 1; kv_sel = s[0]; kv_addr = AW'(j * BEATS + b);
        for (int t = 0; t < T_A; t++) kv_data[t] = (s == 0) ? k[j][b * T_A + t] : v[j][b * T_A + t];
      end
    @(negedge clk) begin kv_we = 0; start = 1; counting = 1; end
    @(negedge clk) start = 0;
    wait (done);
    counting = 0;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin checks++; if (seen[i] != BEATS) failures++; end
    checks++; if (overlap == 0) begin failures++; $display("stages never overlapped"); end
    checks++; if (fifo_overflow) failures++;
    checks++;
    if (cycles > G * N * BEATS + G * (48 + 4 * N_A * BEATS + 10) + 20) begin
      failures++; $display("too slow: %0d cycles", cycles);
    end
    $display("attention: %0d cycles, model N^2F/(T_a N_a) = %0d, overlap %0d cycles", cycles, N * N * F / (T_A * N_A), overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
