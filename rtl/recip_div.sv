// recip_div: sequential unsigned restoring divider, q = floor(num / den).
//
// The softmax divides each head's weighted sum by that head's denominator
// l(x). Since l(x) is common to all outputs of a head, the PE performs a
// single division per head, 2^40 / l, and afterwards only multiplies; this
// single-division idea is the source design's, the radix-2 restoring
// algorithm is this design's choice.
// Timing: a pulse on start latches num/den; W cycles later done pulses for
// one cycle and q holds the quotient until the next start. den = 0 gives
// all ones.
module recip_div #(
  parameter int unsigned W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] q
);
  logic [W-1:0] rem, dvs, nsh;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0] trial;

  always_comb trial = {rem, nsh[W-1]} - {1'b0, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; rem <= '0; dvs <= '0; nsh <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; rem <= '0; dvs <= den; nsh <= num; q <= '0; cnt <= '0;
      end else if (busy) begin
        nsh <= nsh << 1;
        if (!trial[W]) begin
          rem <= trial[W-1:0];
          q   <= {q[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-2:0], nsh[W-1]};
          q   <= {q[W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (32'(cnt) == W-1) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
