// f2g_gate: the 3x3 reversible double Feynman gate (F2G).
//
//   P = A
//   Q = A ^ B
//   R = A ^ C
// With B = C = 0 it produces two copies of A; the carry-skip adder uses it to
// fan the carry-in out to the ripple chain and to the skip multiplexer. The
// design names the gate, its use for fan-out and its cost of two XORs but not
// its equations; the standard double-Feynman mapping above is used, built
// here from two Feynman gates sharing their control input.
//
// Purely combinational.
module f2g_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);

  logic p_unused;  // both halves pass A through; the second copy is dropped

  feynman_gate u_fg_b (.a(a), .b(b), .p(p),        .q(q));
  feynman_gate u_fg_c (.a(a), .b(c), .p(p_unused), .q(r));

endmodule : f2g_gate
