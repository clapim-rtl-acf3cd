// hit_gather_tree -- tree-topology network that gathers crossbar results to the controller.
//
// What it does: N crossbar tiles each offer at most one result packet per search; the tree
// delivers all of them, one per clock, to the chip controller at its root.
// How it works: a binary tree of noc_merge_node, stored heap-style: node n (1..NP-1) merges
// its children 2n and 2n+1, leaves NP..2NP-1 are the tiles, node 1 is the root. NP is N
// rounded up to a power of two; the extra leaves never offer a packet.
// Interface: valid/ready per leaf and at the root, packets of W bits.
// Timing: log2(NP) clocks from a leaf to the root; one packet per clock at the root.
// The paper states only that a simple tree-like network on chip gathers the hit results;
// the node design, arbitration and handshake are this design's own.
module hit_gather_tree #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  logic [W-1:0] in_data [N],
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);

  localparam int unsigned LVL = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned NP  = 1 << LVL;

  logic         v [2*NP];
  logic         r [2*NP];
  logic [W-1:0] d [2*NP];

  // leaves
  for (genvar l = 0; l < NP; l++) begin : g_leaf
    if (l < N) begin : g_used
      assign v[NP+l]     = in_valid[l];
      assign d[NP+l]     = in_data[l];
      assign in_ready[l] = r[NP+l];
    end else begin : g_pad
      assign v[NP+l] = 1'b0;
      assign d[NP+l] = '0;
    end
  end

  // internal nodes
  for (genvar n = 1; n < NP; n++) begin : g_node
    logic [W-1:0] cd [2];
    logic [1:0]   crdy;
    assign cd[0] = d[2*n];
    assign cd[1] = d[2*n+1];
    assign r[2*n]   = crdy[0];
    assign r[2*n+1] = crdy[1];
    noc_merge_node #(.W(W)) u_node (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  ({v[2*n+1], v[2*n]}),
      .in_ready  (crdy),
      .in_data   (cd),
      .out_valid (v[n]),
      .out_ready (r[n]),
      .out_data  (d[n])
    );
  end

  assign out_valid = v[1];
  assign out_data  = d[1];
  assign r[1]      = out_ready;
  assign v[0]      = 1'b0;
  assign d[0]      = '0;
  assign r[0]      = 1'b0;

endmodule
