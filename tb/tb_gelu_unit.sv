// tb_gelu_unit: the piecewise-linear GELU against the tanh form of GELU
// over [-6, 6]; the linear pieces of width 0.5 stay within 0.03.
module tb_gelu_unit;
  import ubimoe_pkg::*;
  int checks = 0, failures = 0;
  act_t x, y;
  gelu_unit dut (.x, .y);
  initial begin
    for (int i = 0; i < 600; i++) begin
      real xr, want, got;
      x = act_t'($urandom_range(0, 12 * 65536)) - 32'sd393216;
      #1;
      xr = real'(x) / 65536.0;
      want = 0.5 * xr * (1.0 + $tanh(0.7978845608 * (xr + 0.044715 * xr * xr * xr)));
      got = real'(y) / 65536.0;
      checks++;
      if ((got - want > 0.03) || (want - got > 0.03)) begin
        failures++;
        if (failures < 5) $display("gelu(%f): got %f want %f", xr, got, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
