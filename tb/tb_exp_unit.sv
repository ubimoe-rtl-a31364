// tb_exp_unit: checks the fixed-point exponential against $exp over
// arguments from 0 down to -12 (absolute error below 3e-3 of 1.0).
module tb_exp_unit;
  import ubimoe_pkg::*;
  int checks = 0, failures = 0;
  act_t d; expv_t e;
  exp_unit dut (.d, .e);
  initial begin
    for (int i = 0; i < 400; i++) begin
      real x, got, want;
      d = (i == 0) ? 32'sd0 : -act_t'($urandom_range(0, 12 * 65536));
      #1;
      x = real'(d) / 65536.0; want = $exp(x); got = real'(e) / 65536.0;
      checks++;
      if ((got - want > 0.003) || (want - got > 0.003)) begin
        failures++;
        if (failures < 5) $display("exp(%f): got %f want %f", x, got, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
