// tb_weight_buffer: ping-pong behaviour. Bank A is loaded and swapped in;
// while it is read, bank B is loaded with other data, and the reads must
// still see A until the next swap, after which they see B.
module tb_weight_buffer;
  import ubimoe_pkg::*;
  localparam int TI = 2, TO = 2, D = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, swap = 0, sel, wr_en = 0;
  logic [$clog2(D)-1:0] wr_addr, rd_addr;
  wgt_t wr_data [TI][TO]; wgt_t rd_data [TI][TO];
  wgt_t ref_a [D][TI][TO]; wgt_t ref_b [D][TI][TO];
  weight_buffer #(.T_IN(TI), .T_OUT(TO), .DEPTH(D), .PING_PONG(1'b1)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic load(input bit b);
    for (int a = 0; a < D; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = a[$clog2(D)-1:0];
      for (int i = 0; i < TI; i++) for (int o = 0; o < TO; o++) begin
        wr_data[i][o] = wgt_t'($urandom);
        if (b) ref_b[a][i][o] = wr_data[i][o]; else ref_a[a][i][o] = wr_data[i][o];
      end
    end
    @(negedge clk) wr_en = 0;
  endtask
  task automatic check(input bit b);
    for (int a = 0; a < D; a++) begin
      rd_addr = a[$clog2(D)-1:0]; #1;
      for (int i = 0; i < TI; i++) for (int o = 0; o < TO; o++) begin
        checks++;
        if (rd_data[i][o] != (b ? ref_b[a][i][o] : ref_a[a][i][o])) failures++;
      end
    end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    load(0);
    @(negedge clk) swap = 1; @(negedge clk) swap = 0;
    check(0);
    load(1);
    check(0);
    @(negedge clk) swap = 1; @(negedge clk) swap = 0;
    check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
