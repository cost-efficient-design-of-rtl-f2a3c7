// feynman_gate: the 2x2 reversible Feynman (controlled NOT) gate.
//
//   P = A
//   Q = A ^ B
// With B = 0, Q is a copy of A, which is how reversible circuits fan a
// signal out. The equations follow the design; here the gate is the building
// block of the double Feynman gate (f2g_gate).
//
// Purely combinational.
module feynman_gate (
  input  logic a,
  input  logic b,
  output logic p,
  output logic q
);

  always_comb begin
    p = a;
    q = a ^ b;
  end

endmodule : feynman_gate
