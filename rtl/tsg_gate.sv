// tsg_gate: the 4x4 reversible TSG gate.
//
// Inputs A, B, C, D map one-to-one onto outputs P, Q, R, S:
//   P = A
//   Q = A'C' xor B'
//   R = Q xor D          = (A'C' xor B') xor D
//   S = Q.D xor (AB xor C) = (A'C' xor B').D xor (AB xor C)
// The equations and the 16-row truth table are the gate as originally published;
// both agree row for row. P is a plain copy of A: it is what keeps the mapping
// one-to-one, not a wiring mistake. Because the mapping is a bijection the gate loses no
// information. Fixing some inputs to constants turns it into ordinary gates:
//   B=1, C=0  -> Q = NOT A
//   C=0       -> Q = A xor B
//   B=1       -> Q = NOR(A, C)   (B=0 gives Q = OR(A, C); the published drawing of
//                the NOR setting shows B=0, which the equations do not support)
//   C=0, D=Cin-> R = A xor B xor Cin (sum), S = (A xor B).Cin xor AB (carry out)
// Purely combinational; no clock, no state.
module tsg_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);

  always_comb begin
    p = a;
    q = (~a & ~c) ^ ~b;
    r = q ^ d;
    s = (q & d) ^ ((a & b) ^ c);
  end

endmodule
