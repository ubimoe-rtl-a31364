// kv_buffer: the K-Buffer and V-Buffer of the streaming attention kernel.
//
// Holds all N key patches and all N value patches of one layer, each as
// F/T_A beats of T_A lanes (address = j * BEATS + beat). One write port
// loads either store (sel = 0: K, sel = 1: V). Two independent read ports
// serve the two kernel stages at the same time: the QK stage reads K, the
// softmax/V stage reads V; each read beat is broadcast to all N_a PEs.
// Reads are combinational (address to data in the same cycle), writes take
// effect at the clock edge. Sharing one K/V copy among all PEs is the source
// design's point; port arrangement and read timing are this design's choice.
module kv_buffer
  import ubimoe_pkg::*;
#(
  parameter int unsigned N     = 197,
  parameter int unsigned BEATS = 24,
  parameter int unsigned T_A   = 16,
  localparam int unsigned DEPTH = N * BEATS,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic          sel,
  input  logic [AW-1:0] waddr,
  input  act_t          wdata [T_A],
  input  logic [AW-1:0] k_addr,
  output act_t          k_data [T_A],
  input  logic [AW-1:0] v_addr,
  output act_t          v_data [T_A]
);
  act_t kmem [DEPTH][T_A];
  act_t vmem [DEPTH][T_A];

  always_ff @(posedge clk)
    if (we) begin
      if (!sel) kmem[waddr] <= wdata;
      else      vmem[waddr] <= wdata;
    end

  assign k_data = kmem[k_addr];
  assign v_data = vmem[v_addr];
endmodule
