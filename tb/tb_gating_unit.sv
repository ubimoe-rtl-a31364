// tb_gating_unit: top-3 of 8 experts for 6 patches with distinct random
// logits; checks list lengths, list contents in patch order and the
// softmax weights over the chosen logits (within 3e-3).
module tb_gating_unit;
  import ubimoe_pkg::*;
  localparam int E = 8, K = 3, NP = 6, NPW = $clog2(NP + 1), EW = $clog2(E);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [NPW-1:0] n_patch = NP, lg_patch, idx_pos, idx_patch, w_pos;
  logic [EW-1:0] idx_e, w_e;
  act_t lg_data [E]; act_t w_val; logic [NPW-1:0] cnt [E];
  gating_unit #(.E(E), .K(K), .NP(NP)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  act_t lg [NP][E];
  assign lg_data = lg[lg_patch];
  initial begin
    int rc [E]; int rp [E][NP]; real rw [E][NP];
    for (int p = 0; p < NP; p++) for (int e = 0; e < E; e++) lg[p][e] = act_t'($urandom_range(0, 6 * 65536)) - 32'sd196608;
    for (int e = 0; e < E; e++) rc[e] = 0;
    for (int p = 0; p < NP; p++) begin
      int sel [K]; bit used [E]; real s;
      for (int e = 0; e < E; e++) used[e] = 0;
      for (int k = 0; k < K; k++) begin
        sel[k] = -1;
        for (int e = 0; e < E; e++) if (!used[e] && (sel[k] < 0 || lg[p][e] > lg[p][sel[k]])) sel[k] = e;
        used[sel[k]] = 1;
      end
      s = 0.0;
      for (int k = 0; k < K; k++) s += $exp(real'(lg[p][sel[k]] - lg[p][sel[0]]) / 65536.0);
      for (int k = 0; k < K; k++) begin
        rp[sel[k]][rc[sel[k]]] = p;
        rw[sel[k]][rc[sel[k]]] = $exp(real'(lg[p][sel[k]] - lg[p][sel[0]]) / 65536.0) / s;
        rc[sel[k]]++;
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    wait (done); @(negedge clk);
    for (int e = 0; e < E; e++) begin
      checks++; if (cnt[e] != NPW'(rc[e])) begin failures++; $display("cnt[%0d] %0d want %0d", e, cnt[e], rc[e]); end
      for (int i = 0; i < rc[e]; i++) begin
        real got;
        idx_e = EW'(e); w_e = EW'(e); idx_pos = NPW'(i); w_pos = NPW'(i); #1;
        got = real'(w_val) / 65536.0;
        checks += 2;
        if (idx_patch != NPW'(rp[e][i])) failures++;
        if (got - rw[e][i] > 0.003 || rw[e][i] - got > 0.003) begin failures++; $display("w e%0d i%0d %f want %f", e, i, got, rw[e][i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
