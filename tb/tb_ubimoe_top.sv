// tb_ubimoe_top: end-to-end test of the accelerator at reduced size
// (N = 5 patches, F = 4, 2 heads, HID = 8, 4 experts, top-2, 2x2 tiles).
// Two steps of the double-buffered pipeline are run. Step 1: the host
// writes an input image X0 into the MoE-side buffer, then one start pulse
// runs the MSA block on image A (Q/K/V given) and the MoE block on X0 at
// the same time. After the swap the MSA result (now on the MoE side) is
// read back and checked against real-valued attention + projection, and
// the MoE output is checked against a reference MoE layer (integer gate
// logits, top-K softmax gating, GELU expert MLPs, gate-weighted sum).
// Step 2: a second start makes the MoE block consume the MSA result of
// step 1, and its output is checked the same way. Weights and data come
// from a hash, so no tables are stored. Counted mechanisms, each of which
// must occur: buffer swaps, QK/softmax stage overlap, expert weight
// prefetch overlapping computation, partial router rounds, more than one
// expert per layer; the score FIFOs must never overflow.
module tb_ubimoe_top;
  import ubimoe_pkg::*;
  localparam int N_A = 2, T = 2, F = 4, H = 2, HID = 8, E = 4, K = 2, NP = 5;
  localparam int N_L = 2, N_LP = 2;
  localparam int FT = F / T, HT = HID / T, ET = (E / T > 0) ? E / T : 1, DH = F / H;
  localparam int AW = $clog2(NP * FT), PAW = $clog2(FT * FT), GAW = (FT * ET > 1) ? $clog2(FT * ET) : 1;
  localparam int EWW = $clog2(E), EW_DEPTH = 2 * FT * HT;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, start = 0;
  logic layer_done, buf_sel, msa_busy, moe_busy;
  logic kv_we = 0, kv_sel = 0; logic [AW-1:0] kv_addr = '0; act_t kv_data [T];
  logic q_valid = 0, q_ready; act_t q_data [T];
  logic pw_we = 0; logic [PAW-1:0] pw_addr = '0; wgt_t pw_data [T][T];
  logic gw_we = 0; logic [GAW-1:0] gw_addr = '0; wgt_t gw_data [T][T];
  logic wl_req, wl_ready, wl_valid = 0; logic [EWW-1:0] wl_expert; wgt_t wl_data [T][T];
  logic host_we = 0; logic [AW-1:0] host_waddr = '0, host_raddr = '0; act_t host_wdata [T];
  act_t host_buf_rdata [T]; act_t moe_rdata [T];
  logic [31:0] n_swaps, n_experts_run, n_overlap_cycles, n_partial_rounds, n_attn_overlap;
  logic fifo_overflow;

  ubimoe_top #(.N_A(N_A), .T(T), .F(F), .H(H), .HID(HID), .E(E), .K(K), .NP(NP), .N_L(N_L), .N_LP(N_LP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- deterministic data ----------------
  function automatic int unsigned hsh(input int unsigned a, input int unsigned b, input int unsigned c);
    int unsigned x;
    x = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77 ^ (c + 32'h165667B1) * 32'hC2B2AE3D;
    x ^= x >> 15; x *= 32'h2C1B3C6D; x ^= x >> 12; x *= 32'h297A2D39; x ^= x >> 15;
    return x;
  endfunction
  function automatic int isqrt(input int v);
    int r; r = 1; while ((r + 1) * (r + 1) <= v) r++; return r;
  endfunction
  // activation in [-0.5, 0.5]
  function automatic act_t adat(input int kind, input int p, input int d);
    return act_t'(int'(hsh(kind, p, d) % 65537) - 32768);
  endfunction
  // weight in +-(1/sqrt(fan_in)), Q4.12
  function automatic wgt_t wdat(input int kind, input int a, input int b, input int fan);
    int wr; wr = 4096 / isqrt(fan);
    return wgt_t'(int'(hsh(kind, a, b) % (2 * wr + 1)) - wr);
  endfunction
  // full-matrix views of the tiled weights
  function automatic wgt_t w_proj(input int i, input int o);   // F x F
    return wdat(10, i, o, F);
  endfunction
  function automatic wgt_t w_gate(input int i, input int o);   // F x E
    return wdat(11, i, o, F);
  endfunction
  function automatic wgt_t w_fc1(input int e, input int i, input int o);  // F x HID
    return wdat(20 + e, i, o, F);
  endfunction
  function automatic wgt_t w_fc2(input int e, input int i, input int o);  // HID x F
    return wdat(60 + e, i, o, HID);
  endfunction

  function automatic real gelu_r(input real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction

  // ---------------- references ----------------
  real msa_ref [NP][F];
  task automatic msa_reference(input int img);
    real att [F];
    for (int i = 0; i < NP; i++) begin
      for (int h = 0; h < H; h++) begin
        real s [NP]; real m, l;
        m = -1.0e30; l = 0.0;
        for (int j = 0; j < NP; j++) begin
          s[j] = 0.0;
          for (int d = h * DH; d < (h + 1) * DH; d++)
            s[j] += real'(adat(3 * img, i, d)) * real'(adat(3 * img + 1, j, d)) / 4294967296.0;
          if (s[j] > m) m = s[j];
        end
        for (int j = 0; j < NP; j++) l += $exp(s[j] - m);
        for (int d = h * DH; d < (h + 1) * DH; d++) begin
          att[d] = 0.0;
          for (int j = 0; j < NP; j++) att[d] += $exp(s[j] - m) / l * real'(adat(3 * img + 2, j, d)) / 65536.0;
        end
      end
      for (int o = 0; o < F; o++) begin
        msa_ref[i][o] = 0.0;
        for (int d = 0; d < F; d++) msa_ref[i][o] += att[d] * real'(w_proj(d, o)) / 4096.0;
      end
    end
  endtask

  act_t moe_in [NP][F];
  real  moe_ref [NP][F];
  int   ref_experts_used;
  task automatic moe_reference();
    bit used_e [E];
    for (int e = 0; e < E; e++) used_e[e] = 0;
    for (int p = 0; p < NP; p++) begin
      act_t lg [E]; int sel [K]; bit tk [E]; real s;
      for (int e = 0; e < E; e++) begin
        longint acc; acc = 0;
        for (int d = 0; d < F; d++) acc += longint'(moe_in[p][d]) * longint'(w_gate(d, e));
        lg[e] = sat_act(96'(acc >>> 12)); tk[e] = 0;
      end
      for (int k = 0; k < K; k++) begin
        sel[k] = -1;
        for (int e = 0; e < E; e++) if (!tk[e] && (sel[k] < 0 || lg[e] > lg[sel[k]])) sel[k] = e;
        tk[sel[k]] = 1; used_e[sel[k]] = 1;
      end
      s = 0.0;
      for (int k = 0; k < K; k++) s += $exp(real'(lg[sel[k]] - lg[sel[0]]) / 65536.0);
      for (int o = 0; o < F; o++) moe_ref[p][o] = 0.0;
      for (int k = 0; k < K; k++) begin
        real g; real hv [HID];
        g = $exp(real'(lg[sel[k]] - lg[sel[0]]) / 65536.0) / s;
        for (int j = 0; j < HID; j++) begin
          longint acc; acc = 0;
          for (int d = 0; d < F; d++) acc += longint'(moe_in[p][d]) * longint'(w_fc1(sel[k], d, j));
          hv[j] = gelu_r(real'(sat_act(96'(acc >>> 12))) / 65536.0);
        end
        for (int o = 0; o < F; o++) begin
          real y; y = 0.0;
          for (int j = 0; j < HID; j++) y += hv[j] * real'(w_fc2(sel[k], j, o)) / 4096.0;
          moe_ref[p][o] += g * y;
        end
      end
    end
    ref_experts_used = 0;
    for (int e = 0; e < E; e++) if (used_e[e]) ref_experts_used++;
  endtask

  // ---------------- expert weights from "HBM" ----------------
  // tile address a < FT*HT: fc1 tile (ti = a / HT, to = a % HT);
  // otherwise fc2 tile (ti = b / FT, to = b % FT), b = a - FT*HT.
  initial begin
    forever begin
      int e;
      @(posedge clk);
      if (wl_req) begin
        e = wl_expert;
        for (int a = 0; a < EW_DEPTH; a++) begin
          @(negedge clk);
          while ($urandom_range(0, 7) == 0) begin wl_valid = 0; @(negedge clk); end
          wl_valid = 1;
          for (int i = 0; i < T; i++) for (int o = 0; o < T; o++)
            wl_data[i][o] = (a < FT * HT) ? w_fc1(e, (a / HT) * T + i, (a % HT) * T + o)
                                          : w_fc2(e, ((a - FT * HT) / FT) * T + i, ((a - FT * HT) % FT) * T + o);
          @(posedge clk);
        end
        @(negedge clk) wl_valid = 0;
      end
    end
  end

  // ---------------- Q stream ----------------
  int q_img = 0; bit q_on = 0;
  initial begin
    int p, b;
    forever begin
      bit fire;
      @(posedge clk); fire = q_valid && q_ready;
      @(negedge clk);
      if (!q_on) begin p = 0; b = 0; end
      else if (fire) begin b++; if (b == FT) begin b = 0; p++; end end
      q_valid = q_on && (p < NP);
      if (p < NP) for (int t = 0; t < T; t++) q_data[t] = adat(3 * q_img, p, b * T + t);
    end
  end

  // ---------------- helpers ----------------
  task automatic load_weights();
    for (int ti = 0; ti < FT; ti++) for (int to = 0; to < FT; to++) begin
      @(negedge clk); pw_we = 1; pw_addr = PAW'(ti * FT + to);
      for (int i = 0; i < T; i++) for (int o = 0; o < T; o++) pw_data[i][o] = w_proj(ti * T + i, to * T + o);
    end
    @(negedge clk) pw_we = 0;
    for (int ti = 0; ti < FT; ti++) for (int to = 0; to < ET; to++) begin
      @(negedge clk); gw_we = 1; gw_addr = GAW'(ti * ET + to);
      for (int i = 0; i < T; i++) for (int o = 0; o < T; o++)
        gw_data[i][o] = (to * T + o < E) ? w_gate(ti * T + i, to * T + o) : 16'sd0;
    end
    @(negedge clk) gw_we = 0;
  endtask

  task automatic load_kv(input int img);
    for (int s = 0; s < 2; s++) for (int j = 0; j < NP; j++) for (int b = 0; b < FT; b++) begin
      @(negedge clk); kv_we = 1; kv_sel = s[0]; kv_addr = AW'(j * FT + b);
      for (int t = 0; t < T; t++) kv_data[t] = adat(3 * img + 1 + s, j, b * T + t);
    end
    @(negedge clk) kv_we = 0;
  endtask

  task automatic check_moe(input string tag);
    real maxerr; maxerr = 0.0;
    for (int p = 0; p < NP; p++) for (int b = 0; b < FT; b++) begin
      host_raddr = AW'(p * FT + b); #1;
      for (int t = 0; t < T; t++) begin
        real got, w;
        got = real'(moe_rdata[t]) / 65536.0; w = moe_ref[p][b * T + t];
        checks++;
        if (got - w > maxerr) maxerr = got - w;
        if (w - got > maxerr) maxerr = w - got;
        if (got - w > 0.03 || w - got > 0.03) begin
          failures++;
          if (failures < 8) $display("%s moe[%0d][%0d] got %f want %f", tag, p, b * T + t, got, w);
        end
      end
    end
    $display("%s: MoE output max error %f", tag, maxerr);
  endtask

  int cyc = 0; always @(posedge clk) cyc++;

  initial begin
    int t0, t1;
    int ov_attn_1, ov_pf_1;
    repeat (3) @(posedge clk); rst_n = 1;
    load_weights();
    // step 1: MoE input X0 through the host port, MSA on image A = 1
    for (int p = 0; p < NP; p++) for (int b = 0; b < FT; b++) begin
      @(negedge clk); host_we = 1; host_waddr = AW'(p * FT + b);
      for (int t = 0; t < T; t++) begin
        host_wdata[t] = adat(99, p, b * T + t);
        moe_in[p][b * T + t] = host_wdata[t];
      end
    end
    @(negedge clk) host_we = 0;
    moe_reference();
    load_kv(1);
    q_img = 1;
    @(negedge clk) begin start = 1; q_on = 1; end
    @(negedge clk) start = 0;
    t0 = cyc;
    wait (layer_done);
    t1 = cyc;
    @(negedge clk) q_on = 0;
    $display("step 1: %0d cycles, experts run %0d (reference %0d)", t1 - t0, n_experts_run, ref_experts_used);
    checks++; if (n_experts_run != 32'(ref_experts_used)) failures++;
    check_moe("step 1");
    // MSA result, now on the MoE side
    msa_reference(1);
    begin
      real maxerr; maxerr = 0.0;
      for (int p = 0; p < NP; p++) for (int b = 0; b < FT; b++) begin
        host_raddr = AW'(p * FT + b); #1;
        for (int t = 0; t < T; t++) begin
          real got, w;
          moe_in[p][b * T + t] = host_buf_rdata[t];
          got = real'(host_buf_rdata[t]) / 65536.0; w = msa_ref[p][b * T + t];
          checks++;
          if (got - w > maxerr) maxerr = got - w;
          if (w - got > maxerr) maxerr = w - got;
          if (got - w > 0.03 || w - got > 0.03) begin
            failures++;
            if (failures < 8) $display("msa[%0d][%0d] got %f want %f", p, b * T + t, got, w);
          end
        end
      end
      $display("step 1: MSA output max error %f", maxerr);
    end
    ov_attn_1 = n_attn_overlap; ov_pf_1 = n_overlap_cycles;
    // step 2: the MoE block consumes the MSA output of step 1
    moe_reference();
    load_kv(2);
    q_img = 2;
    @(negedge clk) begin start = 1; q_on = 1; end
    @(negedge clk) start = 0;
    t0 = cyc;
    wait (layer_done);
    t1 = cyc;
    @(negedge clk) q_on = 0;
    $display("step 2: %0d cycles", t1 - t0);
    check_moe("step 2");
    // mechanisms
    $display("events: swaps %0d, attention stage-overlap cycles %0d, prefetch-overlap cycles %0d, partial rounds %0d",
             n_swaps, n_attn_overlap, n_overlap_cycles, n_partial_rounds);
    checks++; if (n_swaps != 2) begin failures++; $display("swap count %0d", n_swaps); end
    checks++; if (ov_attn_1 == 0) begin failures++; $display("attention stages never overlapped"); end
    checks++; if (ov_pf_1 == 0) begin failures++; $display("no expert weight prefetch overlapped compute"); end
    checks++; if (n_partial_rounds == 0) begin failures++; $display("no partial router round"); end
    checks++; if (n_experts_run < 2) begin failures++; $display("fewer than two experts"); end
    checks++; if (fifo_overflow) begin failures++; $display("score FIFO overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
