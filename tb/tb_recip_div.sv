// tb_recip_div: random quotients against integer division, and the
// W-cycle latency from start to done.
module tb_recip_div;
  localparam int W = 48;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [W-1:0] num, den, q;
  recip_div #(.W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      int cyc;
      num = (i % 2) ? 48'h0100_0000_0000 : {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
      den = 48'($urandom_range(1, 32'hFFFFFF)) >> (i % 20);
      if (den == 0) den = 1;
      @(negedge clk) start = 1; @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 2;
      if (q != num / den) begin failures++; $display("q %0d / %0d = %0d", num, den, q); end
      if (cyc != W + 1) begin failures++; $display("latency %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
