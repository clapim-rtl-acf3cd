// noc_merge_node -- one 2:1 node of the hit-gathering tree.
//
// What it does: forwards packets from two children towards the root, one per clock.
// How it works: a one-entry output register; when it is empty or being emptied in the
// same clock, the node takes a packet from one child, alternating between the children
// when both offer one (round robin), so neither can starve the other.
// Interface: valid/ready on both sides; a packet moves when valid and ready are both high.
// Timing: one clock of latency per node, full throughput.
// The paper only names a tree-topology network on chip; this node is this design's own.
module noc_merge_node #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [1:0]   in_valid,
  output logic [1:0]   in_ready,
  input  logic [W-1:0] in_data [2],
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);

  logic take, grant, last;

  assign take  = !out_valid || out_ready;
  // child 1 wins when only it is valid, or when both are and child 0 won last time
  assign grant = in_valid[1] && (!in_valid[0] || !last);

  assign in_ready[0] = take && !grant;
  assign in_ready[1] = take && grant;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      last      <= 1'b1;
    end else if (take) begin
      out_valid <= |in_valid;
      if (|in_valid) begin
        out_data <= in_data[grant];
        last     <= grant;
      end
    end
  end

  // a packet offered downstream must stay until it is taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_hold: assert property (p_hold);

endmodule
