// rev_adder_top: 4-bit reversible adder and subtractor built from Inventive0 gates.
//
// Places the two arithmetic circuits of the design side by side on shared
// operands:
//   - carry_skip_adder: {cout, sum} = a + b + cin. Inside it, HNG gates split
//     off the propagate bits, an Inventive0 ripple-carry adder forms the sum,
//     and Fredkin gates let cin skip to cout when all four bits propagate
//     (skip = 1).
//   - inventive0_rcs: diff = a - b - bin (mod 16), bout = 1 on underflow.
// The two circuits follow the design; putting them under one top with shared
// operand inputs and separate carry-in and borrow-in is this implementation's
// choice, since the design treats them as separate circuits.
//
// Purely combinational; no clock or reset.
module rev_adder_top
  import rev_pkg::*;
(
  input  logic [ADDER_WIDTH-1:0] a,
  input  logic [ADDER_WIDTH-1:0] b,
  input  logic                   cin,
  input  logic                   bin,
  output logic [ADDER_WIDTH-1:0] sum,
  output logic                   cout,
  output logic                   skip,
  output logic [ADDER_WIDTH-1:0] diff,
  output logic                   bout
);

  logic c4;  // ripple carry of the adder, internal

  carry_skip_adder u_csa (
    .a    (a),
    .b    (b),
    .cin  (cin),
    .sum  (sum),
    .cout (cout),
    .skip (skip),
    .c4   (c4)
  );

  logic [ADDER_WIDTH-1:0]   sub_borrow;
  logic [2*ADDER_WIDTH-1:0] sub_go;

  inventive0_rcs #(.WIDTH(ADDER_WIDTH)) u_sub (
    .a       (a),
    .b       (b),
    .bin     (bin),
    .diff    (diff),
    .bout    (bout),
    .borrow  (sub_borrow),
    .garbage (sub_go)
  );

endmodule : rev_adder_top
