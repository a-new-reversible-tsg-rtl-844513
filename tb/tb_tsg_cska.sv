// tb_tsg_cska: end-to-end test of the N-bit reversible carry skip adder at its
// default size (16 bits in four 4-bit blocks).
//
// Random operands, operands whose bits all propagate (y = ~x), and patterns that
// make a single block propagate or generate. Every result is compared with integer
// addition; the carry into each block is worked out here as
// (x + y + cin) xor x xor y, and each block's propagate flag and garbage bits are
// checked against it. The test counts how often each mechanism occurred and fails
// if one never did:
//   skip      a block with P = 1 handed an incoming carry of 1 to the next block
//   pass0     a block with P = 1 handed an incoming carry of 0 on
//   ripple    a block with P = 0 sent a carry it produced itself
//   full_skip the carry in travelled over every block (all blocks P = 1, cin = 1)
//   overflow  the adder's carry out was 1
// Ends with a TB_RESULT line.
module tb_tsg_cska;

  import tsg_pkg::*;

  localparam int unsigned N  = 16;
  localparam int unsigned W  = 4;
  localparam int unsigned NB = N / W;

  logic [N-1:0]   x, y, sum;
  logic           cin, cout;
  logic [3*N-1:0] garbage;

  int checks    = 0;
  int failures  = 0;
  int n_skip    = 0;
  int n_pass0   = 0;
  int n_ripple  = 0;
  int n_fullskp = 0;
  int n_ovf     = 0;

  tsg_cska dut (.*);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    logic [N:0] exp, carry;
    int         all_p;
    exp   = {1'b0, x} + {1'b0, y} + (N+1)'(cin);
    carry = exp ^ {1'b0, x} ^ {1'b0, y};
    checks++;
    if ({cout, sum} !== exp) begin
      failures++;
      $display("FAIL %h + %h + %b = %h, expected %h", x, y, cin, {cout, sum}, exp);
    end
    all_p = 1;
    for (int j = 0; j < NB; j++) begin
      logic p_exp, c_in_blk, c_out_blk;
      logic [3*W-1:0] g;
      p_exp     = &(x[W*j +: W] ^ y[W*j +: W]);
      c_in_blk  = carry[W*j];
      c_out_blk = carry[W*(j+1)];
      g         = garbage[3*W*j +: 3*W];
      checks++;
      if (g[3*W-2] !== p_exp || g[W-1:0] !== x[W*j +: W]) begin
        failures++;
        $display("FAIL block %0d garbage: P %b expected %b", j, g[3*W-2], p_exp);
      end
      if (p_exp && c_in_blk)   n_skip++;
      if (p_exp && !c_in_blk)  n_pass0++;
      if (!p_exp && c_out_blk) n_ripple++;
      if (!p_exp) all_p = 0;
    end
    if (all_p != 0 && cin) n_fullskp++;
    if (exp[N]) n_ovf++;
  endtask

  initial begin : stimulus
    checks++;
    if ($bits(garbage) != NB * cska_garbage(W)) begin
      failures++;
      $display("FAIL garbage width %0d", $bits(garbage));
    end
    // Random operands.
    for (int i = 0; i < 50000; i++) begin
      x   = N'($urandom);
      y   = N'($urandom);
      cin = 1'($urandom);
      #1 check();
    end
    // Every bit propagates: the carry in must reach the carry out.
    for (int i = 0; i < 2000; i++) begin
      x   = N'($urandom);
      y   = ~x;
      cin = 1'($urandom);
      #1 check();
    end
    // One block generates, the blocks above it propagate.
    for (int j = 0; j < NB; j++) begin
      for (int i = 0; i < 200; i++) begin
        x   = N'($urandom);
        y   = ~x;
        x[W*j +: W] = W'($urandom);
        y[W*j +: W] = W'($urandom);
        cin = 1'($urandom);
        #1 check();
      end
    end
    // Corner cases.
    x = '1; y = '0; cin = 1'b1; #1 check();
    x = '1; y = '1; cin = 1'b1; #1 check();
    x = '0; y = '0; cin = 1'b0; #1 check();
    $display("mechanisms: skip=%0d pass0=%0d ripple=%0d full_skip=%0d overflow=%0d",
             n_skip, n_pass0, n_ripple, n_fullskp, n_ovf);
    checks += 5;
    if (n_skip    == 0) begin failures++; $display("FAIL skip never happened");      end
    if (n_pass0   == 0) begin failures++; $display("FAIL pass0 never happened");     end
    if (n_ripple  == 0) begin failures++; $display("FAIL ripple never happened");    end
    if (n_fullskp == 0) begin failures++; $display("FAIL full_skip never happened"); end
    if (n_ovf     == 0) begin failures++; $display("FAIL overflow never happened");  end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
