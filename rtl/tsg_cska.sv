// tsg_cska: N-bit reversible carry skip adder (top level).
//
// The adder is a chain of N/W carry skip blocks (cska_block) of width W. The carry
// out of block j, chosen by that block's Fredkin selector, is the carry in of block
// j+1; cin enters block 0 and cout leaves the last block. Inside each block a TSG
// ripple adder forms the sum bits and a Fredkin AND tree forms the block propagate,
// so a carry that reaches a block whose bits all propagate is handed straight to
// the next block.
//
// Cost: 2N reversible gates and 3N garbage outputs, all brought out on `garbage`
// (block j occupies bits [3W(j+1)-1 : 3Wj], laid out as in cska_block).
// The block width of 4 follows the four-bit block the design is drawn with; the
// total width of 16 and the equal-size blocks are this design's choices. N must be
// a multiple of W. Purely combinational.
module tsg_cska #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 4
) (
  input  logic [N-1:0]   x,
  input  logic [N-1:0]   y,
  input  logic           cin,
  output logic [N-1:0]   sum,
  output logic           cout,
  output logic [3*N-1:0] garbage
);

  localparam int unsigned NB = N / W;

  if (N % W != 0 || N == 0) begin : g_bad_size
    $error("tsg_cska: N must be a non-zero multiple of W");
  end

  logic bc [NB+1];   // carry between blocks

  assign bc[0] = cin;

  for (genvar j = 0; j < NB; j++) begin : g_blk
    cska_block #(.W(W)) u_blk (
      .x       (x[W*j +: W]),
      .y       (y[W*j +: W]),
      .cin     (bc[j]),
      .sum     (sum[W*j +: W]),
      .cout    (bc[j+1]),
      .garbage (garbage[3*W*j +: 3*W])
    );
  end

  assign cout = bc[NB];

endmodule
