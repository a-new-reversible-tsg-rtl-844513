// tsg_pkg: cost figures shared by the reversible adder modules and their testbenches.
//
// Reversible circuits are judged by two numbers: how many reversible gates they use
// and how many garbage outputs (outputs that are neither a primary result nor fed to
// another gate) they leave behind. The functions below give those numbers for the
// structures in this library, as counted for the TSG-based designs:
//   full adder            1 gate,  2 garbage
//   N-bit ripple adder    N gates, 2N garbage
//   N-bit carry skip      2N gates (N TSG + N-1 Fredkin AND + 1 Fredkin selector),
//                         3N garbage
// Every module exposes its garbage outputs as a port, so the port widths can be
// checked against these functions.
package tsg_pkg;

  // Gate and garbage counts of the N-bit TSG ripple carry adder.
  function automatic int unsigned rca_gates(input int unsigned n);
    return n;
  endfunction

  function automatic int unsigned rca_garbage(input int unsigned n);
    return 2 * n;
  endfunction

  // Gate and garbage counts of one carry skip block of width w:
  // w TSG gates, w-1 Fredkin gates for the w-input AND, one Fredkin selector.
  function automatic int unsigned cska_gates(input int unsigned w);
    return w + (w - 1) + 1;
  endfunction

  // Each TSG leaves its A pass-through as garbage (A xor B is used as propagate),
  // each Fredkin gate leaves two of its three outputs as garbage.
  function automatic int unsigned cska_garbage(input int unsigned w);
    return w + 2 * (w - 1) + 2;
  endfunction

endpackage
