// hng_gate: the 4x4 reversible HNG gate.
//
// Maps (A, B, C, D) onto
//   P = A
//   Q = B
//   R = A ^ B ^ C
//   S = ((A ^ B) C) ^ (A B) ^ D
// With C = D = 0 it passes copies of A and B and produces the propagate bit
// A ^ B on R (S is then A B, a garbage output). The carry-skip adder uses it
// this way, once per bit. The equations follow the design.
//
// Purely combinational.
module hng_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);

  logic a_xor_b;

  always_comb begin
    a_xor_b = a ^ b;
    p       = a;
    q       = b;
    r       = a_xor_b ^ c;
    s       = (a_xor_b & c) ^ (a & b) ^ d;
  end

endmodule : hng_gate
