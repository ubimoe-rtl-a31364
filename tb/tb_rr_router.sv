// tb_rr_router: a sparse list of 5 patches on 3 CUs gives a full round and
// a partial one; each tile load must read the slot patches in CU order,
// one per cycle, and hand them to the matching CU. Dense mode must use
// the list positions themselves as patch numbers.
module tb_rr_router;
  import ubimoe_pkg::*;
  localparam int N_L = 3, T_IN = 2, NP = 9, TILES = 4, NPW = $clog2(NP + 1);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, dense = 0, list_reset = 0, round_start = 0, load_tile = 0;
  logic [NPW-1:0] n_items; logic [1:0] tile = 0;
  logic round_done, load_done, list_empty;
  logic [NPW-1:0] idx_pos, idx_patch, act_patch; logic [1:0] act_tile;
  act_t act_data [T_IN]; logic cu_ld [N_L]; act_t cu_data [T_IN];
  logic [NPW-1:0] slot_patch [N_L]; logic [NPW-1:0] slot_pos [N_L]; logic slot_valid [N_L];
  rr_router #(.N_L(N_L), .T_IN(T_IN), .NP(NP), .TILES(TILES)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int lst [5] = '{7, 2, 5, 8, 0};
  assign idx_patch = (idx_pos < 5) ? NPW'(lst[idx_pos]) : '0;
  always_comb for (int t = 0; t < T_IN; t++) act_data[t] = act_t'(32'(act_patch) * 100 + 32'(act_tile) * 10 + t);
  int got_ld [N_L];
  always @(posedge clk) for (int c = 0; c < N_L; c++) if (cu_ld[c]) begin
    got_ld[c]++;
    checks++;
    if (cu_data[0] != act_t'(32'(slot_patch[c]) * 100 + 32'(tile) * 10)) failures++;
  end
  task automatic round(input int base, input int nvalid, input bit dn);
    @(negedge clk) round_start = 1; @(negedge clk) round_start = 0;
    wait (round_done); @(negedge clk);
    for (int c = 0; c < N_L; c++) begin
      checks++;
      if (slot_valid[c] != (c < nvalid)) failures++;
      if (c < nvalid) begin
        checks++;
        if (slot_patch[c] != (dn ? NPW'(base + c) : NPW'(lst[base + c]))) failures++;
      end
    end
    for (int ti = 0; ti < 2; ti++) begin
      for (int c = 0; c < N_L; c++) got_ld[c] = 0;
      tile = ti[1:0];
      @(negedge clk) load_tile = 1; @(negedge clk) load_tile = 0;
      wait (load_done); @(negedge clk);
      for (int c = 0; c < N_L; c++) begin checks++; if (got_ld[c] != (c < nvalid ? 1 : 0)) failures++; end
    end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    n_items = 5; dense = 0;
    @(negedge clk) list_reset = 1; @(negedge clk) list_reset = 0;
    round(0, 3, 0); round(3, 2, 0);
    checks++; if (!list_empty) failures++;
    dense = 1; n_items = 4;
    @(negedge clk) list_reset = 1; @(negedge clk) list_reset = 0;
    round(0, 3, 1); round(3, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
