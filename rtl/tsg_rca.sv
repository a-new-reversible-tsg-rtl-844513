// tsg_rca: N-bit reversible ripple carry adder built from TSG full adders.
//
// Bit i is one TSG gate used as a full adder (tsg_full_adder); its carry out feeds
// the carry in of bit i+1, and cin enters at bit 0. The adder therefore uses
// N reversible gates and leaves 2N garbage outputs, which are brought out on
// `garbage`:
//   garbage[2i+1] = x[i] xor y[i]   (TSG output Q, also bit i's propagate signal)
//   garbage[2i]   = x[i]            (TSG output P)
// The garbage ordering within a bit is this design's choice. The default width of 4
// matches the four-stage adder drawn for the design; any N >= 1 works.
// Purely combinational: the carry ripples through N cells.
module tsg_rca #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]   x,
  input  logic [N-1:0]   y,
  input  logic           cin,
  output logic [N-1:0]   sum,
  output logic           cout,
  output logic [2*N-1:0] garbage
);

  logic carry [N+1];

  assign carry[0] = cin;

  for (genvar i = 0; i < N; i++) begin : g_bit
    tsg_full_adder u_fa (
      .a    (x[i]),
      .b    (y[i]),
      .cin  (carry[i]),
      .sum  (sum[i]),
      .cout (carry[i+1]),
      .prop (garbage[2*i+1]),
      .g_a  (garbage[2*i])
    );
  end

  assign cout = carry[N];

endmodule
