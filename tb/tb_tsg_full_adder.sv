// tb_tsg_full_adder: self-checking test of the one-gate TSG full adder.
//
// All 8 combinations of a, b, cin: {cout, sum} must equal the arithmetic sum
// a + b + cin, prop must be a xor b and g_a must be a. Ends with a TB_RESULT line.
module tb_tsg_full_adder;

  logic a, b, cin;
  logic sum, cout, prop, g_a;
  int   checks   = 0;
  int   failures = 0;

  tsg_full_adder dut (.*);

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: a=%b b=%b cin=%b got %b expected %b", what, a, b, cin, got, exp);
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
    for (int i = 0; i < 8; i++) begin
      int tot;
      {a, b, cin} = 3'(i);
      tot = int'(a) + int'(b) + int'(cin);
      #1;
      check(sum,  1'(tot % 2), "sum");
      check(cout, 1'(tot / 2), "cout");
      check(prop, a != b,      "prop");
      check(g_a,  a,           "g_a");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
