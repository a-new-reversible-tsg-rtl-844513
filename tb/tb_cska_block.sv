// tb_cska_block: self-checking test of one carry skip block.
//
// The default 4-bit block and a 3-bit block (uneven AND tree) get every
// combination of x, y and cin; an 8-bit block gets 20000 random patterns.
// Checked against values computed here from integer addition:
//   * {cout, sum} = x + y + cin
//   * the block propagate (garbage bit 3W-2) = AND of x[i] xor y[i]
//   * the selector's other output (bit 3W-1) = P ? (ripple carry) : cin, which
//     for this adder equals the ripple carry when P = 0 and cin when P = 1
//   * the TSG pass-through garbage bits equal x
// It also counts how often the carry was skipped (P = 1 with a carry in of 1) and
// how often the ripple carry was selected with a carry produced inside the block,
// and fails if either never happened. Ends with a TB_RESULT line.
module tb_cska_block;

  import tsg_pkg::*;

  int checks   = 0;
  int failures = 0;
  int n_skip   = 0;   // P = 1 and cin = 1: carry handed over the block
  int n_ripple = 0;   // P = 0 and a carry generated inside the block

  localparam int unsigned W4 = 4;
  localparam int unsigned W3 = 3;
  localparam int unsigned W8 = 8;

  logic [W4-1:0] x4, y4, s4;  logic c4i, c4o;  logic [3*W4-1:0] g4;
  logic [W3-1:0] x3, y3, s3;  logic c3i, c3o;  logic [3*W3-1:0] g3;
  logic [W8-1:0] x8, y8, s8;  logic c8i, c8o;  logic [3*W8-1:0] g8;

  cska_block            dut4 (.x(x4), .y(y4), .cin(c4i), .sum(s4), .cout(c4o), .garbage(g4));
  cska_block #(.W(W3))  dut3 (.x(x3), .y(y3), .cin(c3i), .sum(s3), .cout(c3o), .garbage(g3));
  cska_block #(.W(W8))  dut8 (.x(x8), .y(y8), .cin(c8i), .sum(s8), .cout(c8o), .garbage(g8));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Generic check on W-bit operands held in 32-bit containers.
  task automatic check(input int unsigned w, input logic [31:0] x, input logic [31:0] y,
                       input logic cin, input logic [31:0] sum, input logic cout,
                       input logic [95:0] g);
    logic [32:0] exp;
    logic [31:0] mask;
    logic        p_exp, ripple_c;
    mask     = (w == 32) ? '1 : ((32'd1 << w) - 1);
    exp      = {1'b0, x & mask} + {1'b0, y & mask} + 33'(cin);
    p_exp    = (((x ^ y) & mask) == mask);
    ripple_c = exp[w];
    checks++;
    if (cout !== ripple_c || (sum & mask) !== (exp[31:0] & mask)) begin
      failures++;
      $display("FAIL W=%0d: %h + %h + %b -> sum %h cout %b, expected %h", w, x, y, cin,
               sum & mask, cout, exp);
    end
    checks++;
    if (g[3*w-2] !== p_exp) begin
      failures++;
      $display("FAIL W=%0d: block propagate %b expected %b (x=%h y=%h)", w, g[3*w-2], p_exp, x, y);
    end
    checks++;
    if (g[3*w-1] !== (p_exp ? ripple_c : cin)) begin
      failures++;
      $display("FAIL W=%0d: selector garbage", w);
    end
    checks++;
    if ((32'(g) & mask) !== (x & mask)) begin
      failures++;
      $display("FAIL W=%0d: pass-through garbage", w);
    end
    if (p_exp && cin) n_skip++;
    if (!p_exp && ripple_c) n_ripple++;
  endtask

  initial begin : stimulus
    checks++;
    if ($bits(g4) != cska_garbage(W4) || $bits(g8) != cska_garbage(W8)) begin
      failures++;
      $display("FAIL garbage width");
    end
    for (int i = 0; i < (1 << (2*W4+1)); i++) begin
      {x4, y4, c4i} = (2*W4+1)'(i);
      #1 check(W4, 32'(x4), 32'(y4), c4i, 32'(s4), c4o, 96'(g4));
    end
    for (int i = 0; i < (1 << (2*W3+1)); i++) begin
      {x3, y3, c3i} = (2*W3+1)'(i);
      #1 check(W3, 32'(x3), 32'(y3), c3i, 32'(s3), c3o, 96'(g3));
    end
    for (int i = 0; i < 20000; i++) begin
      x8  = W8'($urandom);
      y8  = (i % 4 == 0) ? ~x8 : W8'($urandom);   // force full propagate often
      c8i = 1'($urandom);
      #1 check(W8, 32'(x8), 32'(y8), c8i, 32'(s8), c8o, 96'(g8));
    end
    $display("carry skipped %0d times, ripple carry selected %0d times", n_skip, n_ripple);
    checks += 2;
    if (n_skip == 0)   begin failures++; $display("FAIL no carry skip exercised"); end
    if (n_ripple == 0) begin failures++; $display("FAIL no ripple carry exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
