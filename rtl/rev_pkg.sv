// rev_pkg: constants shared by the reversible adder/subtractor blocks.
//
// The Inventive0 gate is switched between full-adder and full-subtractor
// behaviour by the constant on its D input (0 = add, 1 = subtract). The
// adders built from it are 4 bits wide, the width of every circuit the
// design describes; the ripple chains take this as the default of their
// WIDTH parameter.
package rev_pkg;

  // Operand width of the ripple adder, ripple subtractor and carry-skip adder.
  parameter int unsigned ADDER_WIDTH = 4;

  // Constant fed to the D input of an Inventive0 gate.
  parameter logic D_ADD = 1'b0;  // gate acts as full adder: Q = sum, R = carry
  parameter logic D_SUB = 1'b1;  // gate acts as full subtractor: Q = difference, S = borrow

endpackage : rev_pkg
