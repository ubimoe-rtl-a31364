// tb_kv_buffer: fills K and V with different data and reads both ports
// at once, each at its own address.
module tb_kv_buffer;
  import ubimoe_pkg::*;
  localparam int N = 5, BEATS = 3, T_A = 2, D = N * BEATS;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, sel = 0;
  logic [$clog2(D)-1:0] waddr, k_addr, v_addr;
  act_t wdata [T_A]; act_t k_data [T_A]; act_t v_data [T_A];
  act_t refk [D][T_A]; act_t refv [D][T_A];
  kv_buffer #(.N(N), .BEATS(BEATS), .T_A(T_A)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        we = 1; sel = s[0]; waddr = a[$clog2(D)-1:0];
        for (int t = 0; t < T_A; t++) begin
          wdata[t] = act_t'($urandom);
          if (s == 0) refk[a][t] = wdata[t]; else refv[a][t] = wdata[t];
        end
      end
    @(negedge clk) we = 0;
    for (int i = 0; i < 40; i++) begin
      k_addr = $urandom_range(0, D - 1); v_addr = $urandom_range(0, D - 1);
      #1;
      for (int t = 0; t < T_A; t++) begin
        checks += 2;
        if (k_data[t] != refk[k_addr][t]) failures++;
        if (v_data[t] != refv[v_addr][t]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
