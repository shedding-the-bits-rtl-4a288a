// mf_mac -- minifloat multiply-accumulate unit with a long fixed-point
// accumulator.
//
// What it does: accumulates exact dot products of two minifloat vectors,
// a in format E{EA}M{MA} and b in format E{EB}M{MB}, for up to N terms.  The
// result is the exact sum as a two's-complement integer whose LSB weighs
// 2^(2 - ba - ma - bb - mb), with b = 2^(e-1) - 1 for each operand.  Converting
// it back to a float is left to what follows (for example a thresholding
// activation) and is not part of the unit.
//
// How: stage 1 decodes both operands (implicit digit = E != 0, alignment offset
// = E - (E != 0)), multiplies the significands, shifts the product left by the
// sum of the offsets and takes the product sign as Sa xor Sb.  Stage 2 is the
// accumulator, which adds or subtracts the aligned magnitude (sign inversion
// merged into the adder as invert plus carry-in) and can start over from 0.
// The accumulator is ACC_W = 2^EA + MA + 2^EB + MB + ceil(log2 N) - 1 bits.
//
// Interface and timing (pipeline depth two):
//   cycle t   : in_valid, in_first, in_last, a, b presented
//   edge t+1  : stage-1 register holds the aligned product
//   edge t+2  : acc includes the product; out_valid is high for that cycle
//   in_first marks the first term of a dot product (the accumulator restarts
//   from 0), in_last the last; out_done is high in the cycle in which acc holds
//   a finished dot product.  A new term can enter every cycle; in_valid low
//   inserts a bubble and leaves acc unchanged.  rst_n is synchronous, active
//   low.  The two pipeline stages and the operand formats follow the design;
//   the valid/first/last handshake and the reset are this design's own choice.
module mf_mac
  import mf_pkg::*;
#(
  parameter int unsigned EA = 3,
  parameter int unsigned MA = 4,
  parameter int unsigned EB = 3,
  parameter int unsigned MB = 4,
  parameter int unsigned N  = DEFAULT_N,
  localparam int unsigned MAG_W = mf_mag_width(EA, MA, EB, MB),
  localparam int unsigned ACC_W = mf_acc_width(EA, MA, EB, MB, N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [EA+MA:0]          a,
  input  logic [EB+MB:0]          b,
  output logic                    out_valid,
  output logic                    out_done,
  output logic signed [ACC_W-1:0] acc
);

  // ---- stage 1: decode, multiply, align ----
  logic            sign_a, sign_b;
  logic [MA:0]     sig_a;
  logic [MB:0]     sig_b;
  logic [EA-1:0]   offset_a;
  logic [EB-1:0]   offset_b;
  logic [MAG_W-1:0] mag;

  mf_operand_decode #(.E(EA), .M(MA)) u_dec_a (
    .x(a), .sign(sign_a), .sig(sig_a), .offset(offset_a)
  );
  mf_operand_decode #(.E(EB), .M(MB)) u_dec_b (
    .x(b), .sign(sign_b), .sig(sig_b), .offset(offset_b)
  );
  mf_product_align #(.EA(EA), .MA(MA), .EB(EB), .MB(MB)) u_align (
    .sig_a(sig_a), .offset_a(offset_a), .sig_b(sig_b), .offset_b(offset_b),
    .mag(mag)
  );

  logic             s1_valid, s1_first, s1_last, s1_neg;
  logic [MAG_W-1:0] s1_mag;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_neg   <= 1'b0;
      s1_mag   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_first <= in_first;
      s1_last  <= in_last;
      s1_neg   <= sign_a ^ sign_b;
      s1_mag   <= mag;
    end
  end

  // ---- stage 2: long accumulator ----
  mf_accumulator #(.MAG_W(MAG_W), .ACC_W(ACC_W)) u_acc (
    .clk(clk), .rst_n(rst_n),
    .add_valid(s1_valid), .add_first(s1_first), .add_neg(s1_neg),
    .mag(s1_mag), .acc(acc)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_done  <= 1'b0;
    end else begin
      out_valid <= s1_valid;
      out_done  <= s1_valid & s1_last;
    end
  end

  // The accumulator is exact only for dot products of at most N terms.
  int unsigned terms;
  always_ff @(posedge clk) begin
    if (!rst_n) terms <= '0;
    else if (s1_valid) terms <= s1_first ? 1 : ((terms > N) ? terms : terms + 1);
  end
  always_ff @(posedge clk) begin
    if (rst_n && out_valid)
      assert (terms <= N) else $error("mf_mac: more than N=%0d terms in one dot product", N);
  end

endmodule
