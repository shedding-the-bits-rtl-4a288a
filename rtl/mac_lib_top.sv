// mac_lib_top -- the MAC operator library: one minifloat MAC and one integer
// MAC side by side.
//
// What it does: offers both kinds of multiply-accumulate unit the library is
// built from, each with its own operand formats, so that a quantized layer
// can be mapped onto either.  The two units share clock and reset and nothing
// else; each keeps its own handshake.
//
// Default configuration: both minifloat operands in E3M4 and both integer
// operands in INT8, the formats used for the first and last layers of the
// evaluated networks, with dot products of up to N = 4608 terms (the largest in
// ResNet-18).  The minifloat accumulator is then 2^3+4+2^3+4+13-1 = 36 bits and
// the integer one 8+8+13+1 = 30 bits.  Any other ExMy or INTr format of the
// design space is set through the parameters.  Choosing these defaults, and
// putting the two units in one top, is this design's choice.
//
// Timing: both units have a pipeline depth of two (see mf_mac and int_mac).
module mac_lib_top
  import mf_pkg::*;
#(
  parameter int unsigned FP_EA  = 3,
  parameter int unsigned FP_MA  = 4,
  parameter int unsigned FP_EB  = 3,
  parameter int unsigned FP_MB  = 4,
  parameter int unsigned INT_RA = 8,
  parameter int unsigned INT_RB = 8,
  parameter int unsigned N      = DEFAULT_N,
  localparam int unsigned FP_ACC_W  = mf_acc_width(FP_EA, FP_MA, FP_EB, FP_MB, N),
  localparam int unsigned INT_ACC_W = int_acc_width(INT_RA, INT_RB, N)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // minifloat MAC
  input  logic                        fp_in_valid,
  input  logic                        fp_in_first,
  input  logic                        fp_in_last,
  input  logic [FP_EA+FP_MA:0]        fp_a,
  input  logic [FP_EB+FP_MB:0]        fp_b,
  output logic                        fp_out_valid,
  output logic                        fp_out_done,
  output logic signed [FP_ACC_W-1:0]  fp_acc,
  // integer MAC
  input  logic                        int_in_valid,
  input  logic                        int_in_first,
  input  logic                        int_in_last,
  input  logic signed [INT_RA-1:0]    int_a,
  input  logic signed [INT_RB-1:0]    int_b,
  output logic                        int_out_valid,
  output logic                        int_out_done,
  output logic signed [INT_ACC_W-1:0] int_acc
);

  mf_mac #(.EA(FP_EA), .MA(FP_MA), .EB(FP_EB), .MB(FP_MB), .N(N)) u_mf_mac (
    .clk(clk), .rst_n(rst_n),
    .in_valid(fp_in_valid), .in_first(fp_in_first), .in_last(fp_in_last),
    .a(fp_a), .b(fp_b),
    .out_valid(fp_out_valid), .out_done(fp_out_done), .acc(fp_acc)
  );

  int_mac #(.RA(INT_RA), .RB(INT_RB), .N(N)) u_int_mac (
    .clk(clk), .rst_n(rst_n),
    .in_valid(int_in_valid), .in_first(int_in_first), .in_last(int_in_last),
    .a(int_a), .b(int_b),
    .out_valid(int_out_valid), .out_done(int_out_done), .acc(int_acc)
  );

endmodule
