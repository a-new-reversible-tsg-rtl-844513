// cska_block: one reversible carry skip adder block of width W (default 4).
//
// Structure (W TSG gates + W-1 Fredkin ANDs + 1 Fredkin selector = 2W gates):
//   * A W-bit TSG ripple carry adder (tsg_rca) adds x, y and the block carry in.
//     Its bit-i garbage output Q = x[i] xor y[i] is reused as the bit propagate p[i].
//   * W-1 Fredkin gates, each with its third input tied to 0, form a W-input AND of
//     the propagates: the block propagate P. They are arranged as a balanced tree;
//     for W = 4 that is (p0.p1).(p2.p3).
//   * One Fredkin gate with control P, B = c_W (the ripple carry out) and C = cin
//     gives cout = P ? cin : c_W on its Q output. When every bit propagates the
//     block's carry in is passed straight on; otherwise the ripple carry is.
// Both choices give the same settled value (if P = 1 the ripple carry equals cin);
// the selector lets a carry skip the block instead of rippling through it.
//
// garbage (3W bits) holds every output that is not a result:
//   [W-1:0]                      x[i] pass-through of each TSG gate
//   [W+2k+1 : W+2k], k=0..W-2    outputs {Q, P} of the AND gate at tree node k+1
//   [3W-2]                       P pass-through of the selector (= block propagate)
//   [3W-1]                       R output of the selector (P ? c_W : cin)
// The garbage ordering, the tree shape for widths other than 4 and the selector's
// input order are this design's choices. Purely combinational.
module cska_block #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0]   x,
  input  logic [W-1:0]   y,
  input  logic           cin,
  output logic [W-1:0]   sum,
  output logic           cout,
  output logic [3*W-1:0] garbage
);

  import tsg_pkg::*;

  logic [2*W-1:0] rca_g;     // ripple adder garbage: {Q, P} per bit
  logic           c_last;    // carry out of the most significant full adder
  logic           blk_p;     // block propagate

  tsg_rca #(.N(W)) u_rca (
    .x       (x),
    .y       (y),
    .cin     (cin),
    .sum     (sum),
    .cout    (c_last),
    .garbage (rca_g)
  );

  for (genvar i = 0; i < W; i++) begin : g_pass
    assign garbage[i] = rca_g[2*i];
  end

  if (W == 1) begin : g_no_and
    assign blk_p = rca_g[1];
  end else begin : g_and_tree
    // Heap-ordered tree: node[W+i] is leaf p[i], node[k] = node[2k] AND node[2k+1].
    logic node [1:2*W-1];
    for (genvar i = 0; i < W; i++) begin : g_leaf
      assign node[W+i] = rca_g[2*i+1];
    end
    for (genvar k = 1; k < W; k++) begin : g_and
      fredkin_gate u_and (
        .a (node[2*k]),
        .b (node[2*k+1]),
        .c (1'b0),
        .p (garbage[W+2*(k-1)]),
        .q (garbage[W+2*(k-1)+1]),
        .r (node[k])
      );
    end
    assign blk_p = node[1];
  end

  fredkin_gate u_skip (
    .a (blk_p),
    .b (c_last),
    .c (cin),
    .p (garbage[3*W-2]),
    .q (cout),
    .r (garbage[3*W-1])
  );

  if (cska_garbage(W) != 3 * W) begin : g_bad_count
    $error("garbage count of a carry skip block must be 3W");
  end

endmodule
