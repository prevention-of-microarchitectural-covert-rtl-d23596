// plru_tree: tree pseudo-LRU replacement state for N entries (N a power of
// two), used by the TLB.
//
// N-1 node bits form a binary tree stored as a heap (node 1 is the root,
// node n has children 2n and 2n+1; leaves N..2N-1 stand for entries 0..N-1).
// A node bit of 0 points the victim search to its left child, 1 to its right
// child. Touching an entry sets every node on its path to point away from it.
// The paper names the TLB's pseudo-LRU tree as second-order state that must
// be reset by fence.t; flush_i clears all node bits, so the victim sequence
// after a fence no longer depends on history. The tree encoding is the
// common textbook one, chosen by this design.
//
// Interface: touch_i/touch_idx_i mark an entry as used (registered, seen
// from the next cycle); victim_o is combinational from the current tree.
// flush_i has priority over touch_i.
module plru_tree #(
  parameter int unsigned N = 16
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 flush_i,
  input  logic                 touch_i,
  input  logic [$clog2(N)-1:0] touch_idx_i,
  output logic [$clog2(N)-1:0] victim_o
);
  localparam int unsigned LW = $clog2(N);
  logic [N-1:0] node_q, node_d;   // bit 0 unused

  // victim search
  always_comb begin
    int unsigned n;
    n = 1;
    for (int unsigned l = 0; l < LW; l++) n = 2 * n + int'(node_q[n]);
    victim_o = LW'(n - N);
  end

  // update on touch: walk from the root along the touched entry's path
  always_comb begin
    int unsigned n;
    n      = 1;
    node_d = node_q;
    if (touch_i) begin
      for (int unsigned l = 0; l < LW; l++) begin
        node_d[n] = ~touch_idx_i[LW-1-l];
        n = 2 * n + int'(touch_idx_i[LW-1-l]);
      end
    end
    if (flush_i) node_d = '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) node_q <= '0;
    else         node_q <= node_d;
  end
endmodule
