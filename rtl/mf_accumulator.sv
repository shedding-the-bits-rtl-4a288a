// mf_accumulator -- long fixed-point accumulator with merged sign inversion.
//
// What it does: keeps the exact running sum of signed products of a dot
// product as a two's-complement integer of ACC_W bits (a Kulisch-style long
// accumulator without segmentation: one wide carry chain).
//
// How: the incoming product arrives as a magnitude and a sign.  A negative
// product is subtracted by adding the bitwise inverse of the magnitude with a
// carry-in of 1 (-x = ~x + 1), so the inverter, the selecting multiplexer and
// the adder of the minifloat MAC diagram become one adder with carry-in.  A
// multiplexer on the feedback path replaces the old sum by 0 for the first
// product of a new dot product.
//
// Interface and timing: acc is the accumulator register.  When add_valid is
// high at a rising clock edge, acc takes (add_first ? 0 : acc) + (+/-)mag; it
// holds otherwise.  add_first is only looked at with add_valid.  rst_n is
// an active-low synchronous reset that clears acc; the reset, valid and first
// signals are this design's choice, the diagram only shows the zero multiplexer.
module mf_accumulator #(
  parameter int unsigned MAG_W = 28,
  parameter int unsigned ACC_W = 36
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    add_valid,
  input  logic                    add_first,
  input  logic                    add_neg,
  input  logic [MAG_W-1:0]        mag,
  output logic signed [ACC_W-1:0] acc
);

  logic [ACC_W-1:0] base;
  logic [ACC_W-1:0] addend;
  logic [ACC_W-1:0] sum;

  always_comb begin
    base   = add_first ? '0 : acc;
    addend = add_neg ? ~ACC_W'(mag) : ACC_W'(mag);
    sum    = base + addend + ACC_W'(add_neg);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)         acc <= '0;
    else if (add_valid) acc <= sum;
  end

endmodule
