// inventive0_gate: the 4x4 reversible Inventive0 gate.
//
// Maps (A, B, C, D) one-to-one onto (P, Q, R, S):
//   P = C
//   Q = A ^ B ^ C
//   R = ((A ^ B) C + A B) ^ D           -- full-adder carry, inverted by D
//   S = ((A xnor B) C + ~A B) ^ ~D      -- full-subtractor borrow, inverted by ~D
// With D = 0 the gate is a full adder (Q = sum, R = carry out, C = carry in);
// with D = 1 it is a full subtractor computing A - B - C (Q = difference,
// S = borrow out). The other two outputs are garbage that a reversible
// circuit keeps but does not use. The equations and the truth table they
// must reproduce follow the design; writing the two sums of products with
// XOR/XNOR and AND operators is this implementation's choice.
//
// Purely combinational: no clock, outputs follow inputs after gate delay.
module inventive0_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);

  logic a_xor_b;    // A ^ B, shared by Q and R
  logic carry;      // (A ^ B) C + A B
  logic borrow;     // (A xnor B) C + ~A B

  always_comb begin
    a_xor_b = a ^ b;
    carry   = (a_xor_b & c) | (a & b);
    borrow  = (~a_xor_b & c) | (~a & b);
    p       = c;
    q       = a_xor_b ^ c;
    r       = carry ^ d;
    s       = borrow ^ ~d;
  end

endmodule : inventive0_gate
