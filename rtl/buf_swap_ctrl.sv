// buf_swap_ctrl: double-buffer control between the MSA and MoE blocks.
//
// The MSA block writes its output into buffer `sel` while the MoE block
// reads its input from buffer `~sel`, so both blocks run at the same time on
// different images (or layers). Each block reports completion with a done
// pulse; only when both have finished are the buffers swapped (sel
// toggles, `swapped` pulses) and the next step may start. Layer latency is
// therefore the larger of the two block latencies. The rule is the source
// design's; the pulse interface is this design's.
module buf_swap_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic msa_done,
  input  logic moe_done,
  output logic sel,
  output logic swapped,
  output logic msa_pending,
  output logic moe_pending
);
  logic msa_f, moe_f, both;
  assign both = (msa_f || msa_done) && (moe_f || moe_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel <= 1'b0; swapped <= 1'b0; msa_f <= 1'b0; moe_f <= 1'b0;
    end else begin
      swapped <= 1'b0;
      if (both) begin
        sel <= ~sel; swapped <= 1'b1; msa_f <= 1'b0; moe_f <= 1'b0;
      end else begin
        if (msa_done) msa_f <= 1'b1;
        if (moe_done) moe_f <= 1'b1;
      end
    end
  end
  assign msa_pending = !msa_f;
  assign moe_pending = !moe_f;
endmodule
