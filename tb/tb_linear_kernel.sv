// tb_linear_kernel: the kernel on 3 CUs with 2x2 tiles. Pass 1 is sparse
// (5 listed patches out of 7, 3 input tiles -> 2 output tiles, no
// activation) and must match the integer reference exactly; pass 2 is
// dense over all 7 patches with GELU (2 -> 3 tiles) and is compared with a
// real-valued GELU. Each output tile must appear exactly once, a partial
// last round must occur, and pass 1 must end within its cycle budget.
module tb_linear_kernel;
  import ubimoe_pkg::*;
  localparam int N_L = 3, T = 2, IT = 3, OT = 3, NP = 7, NPW = $clog2(NP + 1);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, done, busy, dense = 0, y_valid, partial_round;
  logic [$clog2(IT+1)-1:0] in_tiles; logic [$clog2(OT+1)-1:0] out_tiles;
  act_fn_e act_fn = ACT_NONE;
  logic [NPW-1:0] n_items, idx_pos, idx_patch, act_patch, y_patch, y_pos;
  logic [1:0] act_tile, y_tile; logic [3:0] w_addr;
  act_t act_data [T]; wgt_t w_data [T][T]; act_t y_data [T];
  linear_kernel #(.N_L(N_L), .T_IN(T), .T_OUT(T), .IN_TILES(IT), .OUT_TILES(OT), .NP(NP)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  act_t x [NP][IT * T]; wgt_t w [IT * OT][T][T];
  int lst [5] = '{6, 1, 3, 4, 0};
  int seen [NP][OT];
  assign idx_patch = NPW'(lst[idx_pos < 5 ? idx_pos : 0]);
  always_comb for (int t = 0; t < T; t++) act_data[t] = x[act_patch][act_tile * T + t];
  assign w_data = w[w_addr];

  always @(posedge clk) if (y_valid) begin
    seen[y_patch][y_tile]++;
    for (int o = 0; o < T; o++) begin
      longint s; act_t e; real er, got;
      s = 0;
      for (int ti = 0; ti < in_tiles; ti++) for (int i = 0; i < T; i++)
        s += longint'(x[y_patch][ti * T + i]) * longint'(w[ti * out_tiles + y_tile][i][o]);
      e = sat_act(96'(s >>> 12));
      checks++;
      if (act_fn == ACT_NONE) begin
        if (y_data[o] != e) begin failures++; $display("p%0d t%0d got %0d want %0d", y_patch, y_tile, y_data[o], e); end
      end else begin
        er = real'(e) / 65536.0; got = real'(y_data[o]) / 65536.0;
        er = 0.5 * er * (1.0 + $tanh(0.7978845608 * (er + 0.044715 * er * er * er)));
        if (got - er > 0.03 || er - got > 0.03) begin failures++; $display("gelu p%0d got %f want %f", y_patch, got, er); end
      end
    end
  end

  task automatic pass(input bit dn, input int it, input int ot, input act_fn_e f, input int n, output int cyc);
    for (int p = 0; p < NP; p++) for (int t = 0; t < OT; t++) seen[p][t] = 0;
    dense = dn; in_tiles = it[1:0]; out_tiles = ot[1:0]; act_fn = f; n_items = NPW'(n);
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int p = 0; p < NP; p++) begin
      bit listed;
      listed = dn;
      for (int k = 0; k < 5; k++) if (!dn && lst[k] == p) listed = 1;
      for (int t = 0; t < ot; t++) begin checks++; if (seen[p][t] != (listed ? 1 : 0)) failures++; end
    end
  endtask

  initial begin
    int c1, c2;
    for (int p = 0; p < NP; p++) for (int i = 0; i < IT * T; i++) x[p][i] = act_t'($urandom_range(0, 2 * 65536)) - 32'sd65536;
    for (int a = 0; a < IT * OT; a++) for (int i = 0; i < T; i++) for (int o = 0; o < T; o++) w[a][i][o] = wgt_t'($urandom_range(0, 8192)) - 16'sd4096;
    repeat (2) @(posedge clk); rst_n = 1;
    pass(0, 3, 2, ACT_NONE, 5, c1);
    pass(1, 2, 3, ACT_GELU, 7, c2);
    checks++; if (!partial_round) failures++;
    // budget: per round in_tiles*(N_L+out_tiles+2) + out_tiles*N_L + 6
    checks++; if (c1 > 2 * (3 * (N_L + 2 + 2) + 2 * N_L + 6) + 4) begin failures++; $display("pass1 %0d cycles", c1); end
    $display("linear kernel: sparse pass %0d cycles, dense pass %0d cycles", c1, c2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
