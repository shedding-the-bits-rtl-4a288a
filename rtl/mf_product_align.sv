// mf_product_align -- significand multiplier and alignment shifter of the
// minifloat MAC.
//
// What it does: turns two decoded operands into the magnitude of their exact
// product, expressed as an integer number of accumulator LSBs.  The LSB weight
// is 2^(1-ba-ma) * 2^(1-bb-mb), the product of the two smallest subnormals.
//
// How: the (ma+1) x (mb+1)-bit significand product is shifted left by the sum
// of the two exponent offsets (the '+' and '<<' of the minifloat MAC diagram).
// The output is wide enough for the largest product, 2^ea + 2^eb + ma + mb - 2
// bits, so nothing is ever rounded or lost.
//
// Interface: combinational.  The sign is handled downstream in the
// accumulator, so this block sees magnitudes only.
module mf_product_align
  import mf_pkg::*;
#(
  parameter int unsigned EA = 3,
  parameter int unsigned MA = 4,
  parameter int unsigned EB = 3,
  parameter int unsigned MB = 4,
  localparam int unsigned MAG_W = mf_mag_width(EA, MA, EB, MB),
  localparam int unsigned SH_W  = ((EA > EB) ? EA : EB) + 1
) (
  input  logic [MA:0]      sig_a,
  input  logic [EA-1:0]    offset_a,
  input  logic [MB:0]      sig_b,
  input  logic [EB-1:0]    offset_b,
  output logic [MAG_W-1:0] mag
);

  logic [MA+MB+1:0] sig_prod;
  logic [SH_W-1:0]  shift;

  always_comb begin
    sig_prod = (MA+MB+2)'(sig_a) * (MA+MB+2)'(sig_b);
    shift    = SH_W'(offset_a) + SH_W'(offset_b);
    mag      = MAG_W'(sig_prod) << shift;
  end

endmodule
