// tb_fredkin_gate: self-checking test of the Fredkin (controlled swap) gate.
//
// All 8 input patterns: P must equal A; Q and R must be B and C, swapped when A is
// 1. The 8 outputs must all differ (reversible). The two uses in the carry skip
// block are checked separately: C=0 gives R = A AND B, and Q selects C when A is 1
// and B otherwise. Ends with a TB_RESULT line.
module tb_fredkin_gate;

  logic a, b, c;
  logic p, q, r;
  int   checks   = 0;
  int   failures = 0;

  fredkin_gate dut (.*);

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: a=%b b=%b c=%b got %b expected %b", what, a, b, c, got, exp);
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
    bit [7:0] seen;
    seen = '0;
    for (int i = 0; i < 8; i++) begin
      {a, b, c} = 3'(i);
      #1;
      check(p, a, "P");
      check(q, (a == 1'b0) ? b : c, "Q");
      check(r, (a == 1'b0) ? c : b, "R");
      checks++;
      if (seen[{p, q, r}]) begin
        failures++;
        $display("FAIL output pattern %b produced twice", {p, q, r});
      end
      seen[{p, q, r}] = 1'b1;
    end
    for (int i = 0; i < 4; i++) begin
      {a, b} = 2'(i); c = 1'b0;
      #1 check(r, a & b, "AND");
    end
    for (int i = 0; i < 8; i++) begin
      {a, b, c} = 3'(i);
      #1 check(q, (a & c) | (~a & b), "select");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
