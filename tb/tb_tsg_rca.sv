// tb_tsg_rca: self-checking test of the TSG ripple carry adder.
//
// A 4-bit adder (default width) is tried with all 512 combinations of x, y and cin;
// a 16-bit adder with 20000 random operand pairs plus long carry chains. Sum and
// carry out are compared with integer addition; the garbage outputs must be x[i]
// and x[i] xor y[i] for every bit, and the garbage port must be 2N bits wide.
// Ends with a TB_RESULT line.
module tb_tsg_rca;

  import tsg_pkg::*;

  localparam int unsigned NS = 4;
  localparam int unsigned NL = 16;

  logic [NS-1:0]   xs, ys, ss;
  logic            cis, cos;
  logic [2*NS-1:0] gs;
  logic [NL-1:0]   xl, yl, sl;
  logic            cil, col;
  logic [2*NL-1:0] gl;

  int checks   = 0;
  int failures = 0;

  tsg_rca dut_s (.x(xs), .y(ys), .cin(cis), .sum(ss), .cout(cos), .garbage(gs));
  tsg_rca #(.N(NL)) dut_l (.x(xl), .y(yl), .cin(cil), .sum(sl), .cout(col), .garbage(gl));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_small();
    logic [NS:0] exp;
    exp = {1'b0, xs} + {1'b0, ys} + (NS+1)'(cis);
    checks++;
    if ({cos, ss} !== exp) begin
      failures++;
      $display("FAIL N=%0d: %h + %h + %b = %h, expected %h", NS, xs, ys, cis, {cos, ss}, exp);
    end
    for (int i = 0; i < NS; i++) begin
      checks++;
      if (gs[2*i] !== xs[i] || gs[2*i+1] !== (xs[i] ^ ys[i])) begin
        failures++;
        $display("FAIL N=%0d garbage bit %0d", NS, i);
      end
    end
  endtask

  task automatic check_large();
    logic [NL:0] exp;
    exp = {1'b0, xl} + {1'b0, yl} + (NL+1)'(cil);
    checks++;
    if ({col, sl} !== exp) begin
      failures++;
      $display("FAIL N=%0d: %h + %h + %b = %h, expected %h", NL, xl, yl, cil, {col, sl}, exp);
    end
    checks++;
    for (int i = 0; i < NL; i++) begin
      if (gl[2*i] !== xl[i] || gl[2*i+1] !== (xl[i] ^ yl[i])) begin
        failures++;
        $display("FAIL N=%0d garbage bit %0d", NL, i);
      end
    end
  endtask

  initial begin : stimulus
    checks++;
    if ($bits(gs) != rca_garbage(NS) || $bits(gl) != rca_garbage(NL)) begin
      failures++;
      $display("FAIL garbage width");
    end
    for (int i = 0; i < (1 << (2*NS+1)); i++) begin
      {xs, ys, cis} = (2*NS+1)'(i);
      #1 check_small();
    end
    for (int i = 0; i < 20000; i++) begin
      xl  = NL'($urandom);
      yl  = NL'($urandom);
      cil = 1'($urandom);
      #1 check_large();
    end
    // Carry rippling through every stage.
    xl = '1; yl = '0; cil = 1'b1;
    #1 check_large();
    xl = '1; yl = '1; cil = 1'b1;
    #1 check_large();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
