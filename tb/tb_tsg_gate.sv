// tb_tsg_gate: self-checking test of the TSG gate.
//
// Applies all 16 input patterns and compares P Q R S with the gate's published
// truth table, written out below row by row (not derived from the equations the
// gate implements). It then checks that the 16 output patterns are all different
// (the gate is reversible) and that the constant-input settings give NOT, XOR,
// NOR, OR and a full adder. Ends with a TB_RESULT line.
module tb_tsg_gate;

  logic a, b, c, d;
  logic p, q, r, s;
  int   checks   = 0;
  int   failures = 0;

  tsg_gate dut (.*);

  // Truth table, index {A,B,C,D}, value {P,Q,R,S}.
  localparam logic [3:0] TABLE [16] = '{
    4'b0000, 4'b0010, 4'b0111, 4'b0100,
    4'b0110, 4'b0101, 4'b0001, 4'b0011,
    4'b1110, 4'b1101, 4'b1111, 4'b1100,
    4'b1001, 4'b1011, 4'b1000, 4'b1010
  };

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: a=%b b=%b c=%b d=%b got %b expected %b", what, a, b, c, d, got, exp);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    bit [15:0] seen;
    seen = '0;
    // Truth table and reversibility.
    for (int i = 0; i < 16; i++) begin
      {a, b, c, d} = 4'(i);
      #1;
      check(p, TABLE[i][3], "P");
      check(q, TABLE[i][2], "Q");
      check(r, TABLE[i][1], "R");
      check(s, TABLE[i][0], "S");
      checks++;
      if (seen[{p, q, r, s}]) begin
        failures++;
        $display("FAIL output pattern %b produced twice", {p, q, r, s});
      end
      seen[{p, q, r, s}] = 1'b1;
    end
    // NOT: B=1, C=0 -> Q = not A.
    for (int i = 0; i < 4; i++) begin
      {a, d} = 2'(i); b = 1'b1; c = 1'b0;
      #1 check(q, ~a, "NOT");
    end
    // XOR: C=0 -> Q = A xor B.
    for (int i = 0; i < 8; i++) begin
      {a, b, d} = 3'(i); c = 1'b0;
      #1 check(q, a ^ b, "XOR");
    end
    // NOR: B=1 -> Q = not (A or C); B=0 -> Q = A or C.
    for (int i = 0; i < 8; i++) begin
      {a, c, d} = 3'(i); b = 1'b1;
      #1 check(q, ~(a | c), "NOR");
      b = 1'b0;
      #1 check(q, a | c, "OR");
    end
    // Full adder: C=0, D=cin -> R = sum, S = carry.
    for (int i = 0; i < 8; i++) begin
      logic [1:0] tot;
      {a, b, d} = 3'(i); c = 1'b0;
      tot = 2'(a) + 2'(b) + 2'(d);
      #1;
      check(r, tot[0], "FA sum");
      check(s, tot[1], "FA carry");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
