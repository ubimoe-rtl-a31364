// tb_buf_swap_ctrl: the buffers swap only after both blocks reported
// done, in either order or in the same cycle.
module tb_buf_swap_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, msa_done = 0, moe_done = 0, sel, swapped, msa_pending, moe_pending;
  buf_swap_ctrl dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic step(input bit a, input bit b, input bit exp_swap, input bit exp_sel);
    @(negedge clk) begin msa_done = a; moe_done = b; end
    @(negedge clk) begin msa_done = 0; moe_done = 0; end
    checks += 2;
    if (swapped != exp_swap) failures++;
    if (sel != exp_sel) failures++;
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    step(1, 0, 0, 0);  step(0, 0, 0, 0);  step(0, 1, 1, 1);
    step(0, 1, 0, 1);  step(0, 1, 0, 1);  step(1, 0, 1, 0);
    step(1, 1, 1, 1);
    step(1, 0, 0, 1);  step(1, 0, 0, 1);  step(0, 1, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
