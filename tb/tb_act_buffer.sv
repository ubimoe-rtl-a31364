// tb_act_buffer: random writes then read-back of every address.
module tb_act_buffer;
  import ubimoe_pkg::*;
  localparam int NP = 4, TILES = 3, LANES = 2, D = NP * TILES;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [$clog2(D)-1:0] waddr, raddr;
  act_t wdata [LANES]; act_t rdata [LANES];
  act_t refm [D][LANES];
  act_buffer #(.NP(NP), .TILES(TILES), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int r = 0; r < 3; r++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk); we = 1; waddr = a[$clog2(D)-1:0];
        for (int t = 0; t < LANES; t++) begin wdata[t] = act_t'($urandom); refm[a][t] = wdata[t]; end
      end
    @(negedge clk) we = 0;
    for (int a = 0; a < D; a++) begin
      raddr = a[$clog2(D)-1:0]; #1;
      for (int t = 0; t < LANES; t++) begin checks++; if (rdata[t] != refm[a][t]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
