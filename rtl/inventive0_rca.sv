// inventive0_rca: N-bit reversible ripple-carry adder built from Inventive0 gates.
//
// One Inventive0 gate per bit, each with D tied to 0 so that it acts as a
// full adder. Stage i takes (A = a[i], B = b[i], C = carry in) and gives
// Q = sum[i] and R = carry out, which feeds C of stage i+1. The carry out of
// the last stage is cout. Computes {cout, sum} = a + b + cin with N gates, N
// constant inputs, 2N garbage outputs and a carry path of N gate delays.
//
// carry[i] is the carry out of stage i (carry[WIDTH-1] == cout); garbage holds
// the unused P and S outputs of every stage, {s, p} per bit, so that no
// gate output is silently dropped. The structure follows the design; the
// parameterised width (default 4, the design's size) and the garbage port
// are this implementation's choices.
//
// Purely combinational.
module inventive0_rca
  import rev_pkg::*;
#(
  parameter int unsigned WIDTH = ADDER_WIDTH
) (
  input  logic [WIDTH-1:0]   a,
  input  logic [WIDTH-1:0]   b,
  input  logic               cin,
  output logic [WIDTH-1:0]   sum,
  output logic               cout,
  output logic [WIDTH-1:0]   carry,
  output logic [2*WIDTH-1:0] garbage
);

  logic [WIDTH:0] c;  // c[i] is the carry into stage i

  assign c[0] = cin;

  for (genvar i = 0; i < WIDTH; i++) begin : g_stage
    inventive0_gate u_gate (
      .a (a[i]),
      .b (b[i]),
      .c (c[i]),
      .d (D_ADD),
      .p (garbage[2*i]),
      .q (sum[i]),
      .r (c[i+1]),
      .s (garbage[2*i+1])
    );
  end

  assign carry = c[WIDTH:1];
  assign cout  = c[WIDTH];

endmodule : inventive0_rca
