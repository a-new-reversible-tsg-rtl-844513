// tsg_full_adder: a reversible full adder made of a single TSG gate.
//
// The TSG gate is driven with A = a, B = b, C = 0, D = cin, the published wiring. Its outputs are then
//   P = a                                 (garbage, kept as port g_a)
//   Q = a xor b                           (propagate; garbage in a plain ripple adder)
//   R = a xor b xor cin                   (sum)
//   S = (a xor b).cin xor a.b             (carry out)
// so one gate gives both sum and carry with two garbage outputs. The same cell serves
// the carry skip block, where Q is used as the bit's propagate signal.
// Purely combinational.
module tsg_full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout,
  output logic prop,   // a xor b (TSG output Q)
  output logic g_a     // a passed through (TSG output P)
);

  tsg_gate u_tsg (
    .a (a),
    .b (b),
    .c (1'b0),
    .d (cin),
    .p (g_a),
    .q (prop),
    .r (sum),
    .s (cout)
  );

endmodule
