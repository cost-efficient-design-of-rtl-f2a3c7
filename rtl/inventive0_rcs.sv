// inventive0_rcs: N-bit reversible ripple-borrow subtractor built from Inventive0 gates.
//
// One Inventive0 gate per bit, each with D tied to 1 so that it acts as a
// full subtractor. Stage i takes (A = a[i], B = b[i], C = borrow in) and gives
// Q = diff[i] and S = borrow out, which feeds C of stage i+1. Computes
// diff = (a - b - bin) mod 2^N, with bout = 1 when a < b + bin.
//
// borrow[i] is the borrow out of stage i (borrow[WIDTH-1] == bout); garbage
// holds the unused P and R outputs of every stage, {r, p} per bit. The
// structure follows the design; the parameterised width (default 4) and the
// garbage port are this implementation's choices.
//
// Purely combinational.
module inventive0_rcs
  import rev_pkg::*;
#(
  parameter int unsigned WIDTH = ADDER_WIDTH
) (
  input  logic [WIDTH-1:0]   a,
  input  logic [WIDTH-1:0]   b,
  input  logic               bin,
  output logic [WIDTH-1:0]   diff,
  output logic               bout,
  output logic [WIDTH-1:0]   borrow,
  output logic [2*WIDTH-1:0] garbage
);

  logic [WIDTH:0] w;  // w[i] is the borrow into stage i

  assign w[0] = bin;

  for (genvar i = 0; i < WIDTH; i++) begin : g_stage
    inventive0_gate u_gate (
      .a (a[i]),
      .b (b[i]),
      .c (w[i]),
      .d (D_SUB),
      .p (garbage[2*i]),
      .q (diff[i]),
      .r (garbage[2*i+1]),
      .s (w[i+1])
    );
  end

  assign borrow = w[WIDTH:1];
  assign bout   = w[WIDTH];

endmodule : inventive0_rcs
