// fredkin_gate: the 3x3 reversible Fredkin (controlled swap) gate.
//
// The control input A passes straight through; when A is 1 the other two inputs
// are swapped:
//   P = A
//   Q = A'B + AC
//   R = A'C + AB
// The carry skip block uses it in two ways:
//   C = 0            -> R = A.B           (two-input AND; P and Q are garbage)
//   A = sel          -> Q = sel ? C : B   (2:1 selector; P and R are garbage)
// This is the standard Fredkin gate; its definition is taken from the literature on
// reversible logic, not developed here. Purely combinational.
module fredkin_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);

  always_comb begin
    p = a;
    q = a ? c : b;
    r = a ? b : c;
  end

endmodule
