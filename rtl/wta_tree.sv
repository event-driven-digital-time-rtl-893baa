`timescale 1ps/1ps
// wta_tree: tree-based winner-takes-all arbiter over NUM_CLASS race signals,
// the alternative to wta_mesh (selected in the classifiers by WTA_TREE).
//
// The classes are the leaves of a binary tree of ceil(log2 NUM_CLASS)
// levels. Each cell arbitrates between the requests of its two subtrees
// with one mutex and passes the OR of the two mutex outputs up as its own
// request, so a local winner is propagated towards the root. The root's
// grant is its own request. The grant coming down from the parent is
// steered to the subtree that holds the mutex by an AND gate per side.
// A subtree made of padding leaves only (NUM_CLASS not a power of two) is
// left out, so there are exactly NUM_CLASS - 1 cells; the bypassed level is
// a delay of one mutex (T_MUTEX_PS), which keeps every class at the same
// depth so that no class is favoured.
//
// The first race signal to rise wins every mutex on its path and is the
// one granted; grant is one-hot. Simultaneous arrivals go to the lower
// class index, as in wta_mesh. When the winner's race line falls its grant
// falls, and, like the mesh, the grant may pass to a later class while the
// race lines are being released. Latency: ceil(log2 NUM_CLASS) mutex delays.
//
// The binary tree of m - 1 cells follows the published arbiter, whose cell
// holds a mutex, an OR gate and a C-element. Where the C-element sits is not
// given; a C-element on the steering path would hold a grant after its
// race line fell for as long as the parent grant stays high, so AND gates
// steer the grant here and the cell has no C-element. The heap numbering,
// the padding delay and the tie order are this design's choices. The module
// is a timed model through its mutexes and padding delay.
module wta_tree #(
  parameter int NUM_CLASS  = tm_pkg::NUM_CLASS,
  parameter int T_MUTEX_PS = tm_pkg::T_MUTEX_PS
) (
  input  logic [NUM_CLASS-1:0] race_class,
  output logic [NUM_CLASS-1:0] grant
);

  // Heap numbering: node 1 is the root, node n has children 2n and 2n+1,
  // leaves are nodes NLEAF .. 2*NLEAF-1.
  localparam int NLEAF = (NUM_CLASS > 1) ? (1 << $clog2(NUM_CLASS)) : 1;

  logic [2*NLEAF-1:0] rq;   // request of the subtree under each node
  logic [2*NLEAF-1:0] gd;   // grant into each node

  for (genvar i = 0; i < NLEAF; i++) begin : g_leaf
    if (i < NUM_CLASS) begin : g_used
      assign rq[NLEAF+i] = race_class[i];
      assign grant[i]    = gd[NLEAF+i];
    end else begin : g_pad
      assign rq[NLEAF+i] = 1'b0;
    end
  end

  assign gd[1] = rq[1];
  assign gd[0] = 1'b0;
  assign rq[0] = 1'b0;

  for (genvar n = NLEAF - 1; n >= 1; n--) begin : g_node
    // First leaf under the right child: the right subtree is all padding
    // when it lies at or beyond NUM_CLASS.
    localparam int LEVEL = $clog2(n + 1) - 1;         // floor(log2 n)
    localparam int SPAN  = NLEAF >> LEVEL;            // leaves under node n
    localparam int FIRST = n * SPAN - NLEAF + SPAN / 2; // first leaf of right child
    if (FIRST >= NUM_CLASS) begin : g_wire
      logic rq_d = 1'b0;
      always @(rq[2*n]) rq_d <= #(T_MUTEX_PS) rq[2*n];
      assign rq[n]     = rq_d;
      assign gd[2*n]   = gd[n];
      assign gd[2*n+1] = 1'b0;
    end else begin : g_cell
      logic m0, m1;
      mutex #(.T_MUTEX_PS(T_MUTEX_PS)) u_mutex (
        .r0(rq[2*n]), .r1(rq[2*n+1]), .g0(m0), .g1(m1)
      );
      assign rq[n]     = m0 | m1;
      assign gd[2*n]   = m0 & gd[n];
      assign gd[2*n+1] = m1 & gd[n];
    end
  end

  // Grants are mutually exclusive.
  always @(grant) begin
    assert ($onehot0(grant)) else $error("wta_tree: grant not one-hot: %b", grant);
  end

endmodule
