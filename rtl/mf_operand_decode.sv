// mf_operand_decode -- unpacks one minifloat operand for the MAC datapath.
//
// What it does: splits an ExMy operand {S, E, M} into its sign, its
// significand with the implicit digit restored, and the left shift that places
// the significand on the fixed-point grid of the accumulator.
//
// How: the implicit digit is (E != 0): normal numbers read 1.M, subnormals
// (E = 0) read 0.M.  Subnormals use exponent 1, so the effective exponent is
// max(E, 1) and its distance from the smallest binade is E - (E != 0).  This is
// the "!=0" comparator and the subtractor drawn per operand in the minifloat
// MAC diagram; the comparator output feeds both the subtractor and the
// multiplier (as the hidden bit).
//
// Value of the operand: (-1)^sign * sig * 2^offset * 2^(1 - b - M).
//
// The sign and the mantissa bits pass straight through; only the implicit
// digit and the offset are computed.
//
// Interface: combinational, no clock.  Requires E >= 1 and M >= 1, which the
// design space (e in [1, r-1), m = r - 1 - e) always satisfies.
module mf_operand_decode #(
  parameter int unsigned E = 3,
  parameter int unsigned M = 4
) (
  input  logic [E+M:0] x,
  output logic         sign,
  output logic [M:0]   sig,
  output logic [E-1:0] offset
);

  logic [E-1:0] exp_field;
  logic         nonzero_exp;

  always_comb begin
    sign        = x[E+M];
    exp_field   = x[E+M-1 -: E];
    nonzero_exp = (exp_field != '0);
    sig         = {nonzero_exp, x[M-1:0]};
    offset      = exp_field - E'(nonzero_exp);
  end

endmodule
