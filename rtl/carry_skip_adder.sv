// carry_skip_adder: 4-bit reversible carry-skip adder.
//
// Three levels, all built from reversible gates:
//   1. Four HNG gates, one per bit, with C = D = 0: each passes copies of
//      a[i] and b[i] and produces the propagate bit p[i] = a[i] ^ b[i].
//   2. A 4-bit Inventive0 ripple-carry adder on the copies gives sum and the
//      ripple carry c4.
//   3. Skip logic: three Fredkin gates with one input tied to 0 AND the
//      propagate bits into P = p0 p1 p2 p3, as (p0 p1)(p2 p3). A fourth
//      Fredkin gate, controlled by P, selects cout = ~P c4 + P cin: when every
//      bit propagates, the carry-in goes straight to the carry-out without
//      waiting for the ripple chain. A double Feynman gate (F2G) fans cin out
//      to the ripple chain and to this multiplexer.
// The gate counts (4 HNG, 4 Inventive0, 4 Fredkin, 1 F2G), the three levels
// and the carry-out equation follow the design. Which pin of each Fredkin
// gate takes which signal is this implementation's choice, made so that the
// gates compute the equations above.
//
// Interface: a, b, cin in; sum, cout out. skip (= P) and c4 are brought out
// so that the skip path can be observed. Purely combinational.
module carry_skip_adder
  import rev_pkg::*;
(
  input  logic [3:0] a,
  input  logic [3:0] b,
  input  logic       cin,
  output logic [3:0] sum,
  output logic       cout,
  output logic       skip,
  output logic       c4
);

  localparam int unsigned W = 4;

  // Level 1: copies of the operands and the propagate bits.
  logic [W-1:0] a_cp, b_cp, prop, hng_go;

  for (genvar i = 0; i < W; i++) begin : g_hng
    hng_gate u_hng (
      .a (a[i]),
      .b (b[i]),
      .c (1'b0),
      .d (1'b0),
      .p (a_cp[i]),
      .q (b_cp[i]),
      .r (prop[i]),
      .s (hng_go[i])
    );
  end

  // Fan-out of the carry-in.
  logic cin_rca, cin_skip, f2g_go;

  f2g_gate u_f2g (
    .a (cin),
    .b (1'b0),
    .c (1'b0),
    .p (f2g_go),
    .q (cin_rca),
    .r (cin_skip)
  );

  // Level 2: Inventive0 ripple-carry adder.
  logic [W-1:0]   rca_carry;
  logic [2*W-1:0] rca_go;

  inventive0_rca #(.WIDTH(W)) u_rca (
    .a       (a_cp),
    .b       (b_cp),
    .cin     (cin_rca),
    .sum     (sum),
    .cout    (c4),
    .carry   (rca_carry),
    .garbage (rca_go)
  );

  // Level 3: group propagate P = (p0 p1)(p2 p3) from Fredkin gates used as AND
  // (FRG(A=x, B=y, C=0).R = x y).
  logic p01, p23, p_all;
  logic [2:0] and_go_p, and_go_q;

  fredkin_gate u_and01 (.a(prop[0]), .b(prop[1]), .c(1'b0), .p(and_go_p[0]), .q(and_go_q[0]), .r(p01));
  fredkin_gate u_and23 (.a(prop[2]), .b(prop[3]), .c(1'b0), .p(and_go_p[1]), .q(and_go_q[1]), .r(p23));
  fredkin_gate u_and   (.a(p01),     .b(p23),     .c(1'b0), .p(and_go_p[2]), .q(and_go_q[2]), .r(p_all));

  // Skip multiplexer: cout = FRG(A=P, B=c4, C=cin).Q = ~P c4 + P cin.
  logic mux_go_p, mux_go_r;

  fredkin_gate u_skip_mux (
    .a (p_all),
    .b (c4),
    .c (cin_skip),
    .p (mux_go_p),
    .q (cout),
    .r (mux_go_r)
  );

  assign skip = p_all;

endmodule : carry_skip_adder
