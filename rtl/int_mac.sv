// int_mac -- signed integer multiply-accumulate unit.
//
// What it does: accumulates exact dot products of two signed integer vectors
// (RA-bit a, RB-bit b) of up to N terms into an accumulator of
// RA + RB + ceil(log2 N) + 1 bits.
//
// How: stage 1 registers the signed product a*b; stage 2 adds it to the
// accumulator, or to 0 when the term is the first of a new dot product (the
// zero multiplexer on the feedback path).  Operands are signed two's
// complement with zero point 0, as the quantizer produces them.
//
// Interface and timing are the same as those of mf_mac (pipeline depth two):
// a term presented with in_valid in cycle t is in acc after edge t+2, when
// out_valid is high; out_done flags a finished dot product (in_last).  The
// handshake and the synchronous active-low reset are this design's choice.
module int_mac
  import mf_pkg::*;
#(
  parameter int unsigned RA = 8,
  parameter int unsigned RB = 8,
  parameter int unsigned N  = DEFAULT_N,
  localparam int unsigned ACC_W = int_acc_width(RA, RB, N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic signed [RA-1:0]    a,
  input  logic signed [RB-1:0]    b,
  output logic                    out_valid,
  output logic                    out_done,
  output logic signed [ACC_W-1:0] acc
);

  logic                      s1_valid, s1_first, s1_last;
  logic signed [RA+RB-1:0]   s1_prod;
  logic signed [ACC_W-1:0]   base;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_prod  <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_first <= in_first;
      s1_last  <= in_last;
      s1_prod  <= a * b;
    end
  end

  always_comb base = s1_first ? '0 : acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_done  <= 1'b0;
    end else begin
      if (s1_valid) acc <= base + ACC_W'(s1_prod);
      out_valid <= s1_valid;
      out_done  <= s1_valid & s1_last;
    end
  end

endmodule
