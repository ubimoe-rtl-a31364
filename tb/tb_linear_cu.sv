// tb_linear_cu: a CU accumulating over three input tiles into two output
// rows; results are compared with an integer matrix product rescaled to
// Q16.16 the same way (sum of x*w, arithmetic shift by 12, saturation).
module tb_linear_cu;
  import ubimoe_pkg::*;
  localparam int TI = 2, TO = 3, ROWS = 2, NT = 3;
  int checks = 0, failures = 0;
  logic clk = 0, x_ld = 0, mac_en = 0, mac_first = 0;
  logic [0:0] mac_row = 0, rd_row = 0;
  act_t x_ld_data [TI]; wgt_t w_tile [TI][TO]; act_t rd_data [TO];
  linear_cu #(.T_IN(TI), .T_OUT(TO), .ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  act_t x [NT][TI]; wgt_t w [NT][ROWS][TI][TO];
  initial begin
    for (int a = 0; a < NT; a++) for (int i = 0; i < TI; i++) begin
      x[a][i] = act_t'($urandom_range(0, 8 * 65536)) - 32'sd262144;
      for (int r = 0; r < ROWS; r++) for (int o = 0; o < TO; o++) w[a][r][i][o] = wgt_t'($urandom);
    end
    for (int a = 0; a < NT; a++) begin
      @(negedge clk) begin x_ld = 1; x_ld_data = x[a]; end
      @(negedge clk) x_ld = 0;
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk) begin mac_en = 1; mac_first = (a == 0); mac_row = r[0]; w_tile = w[a][r]; end
      end
      @(negedge clk) mac_en = 0;
    end
    for (int r = 0; r < ROWS; r++) begin
      rd_row = r[0]; #1;
      for (int o = 0; o < TO; o++) begin
        longint s; act_t e;
        s = 0;
        for (int a = 0; a < NT; a++) for (int i = 0; i < TI; i++) s += longint'(x[a][i]) * longint'(w[a][r][i][o]);
        e = sat_act(96'(s >>> 12));
        checks++;
        if (rd_data[o] != e) begin failures++; $display("r%0d o%0d got %0d want %0d", r, o, rd_data[o], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
