// tb_mf_operand_decode -- exhaustive check of the minifloat operand decoder.
//
// Four formats (E3M4, E1M1, E4M3, E2M5) are decoded for every code word.  For
// each, the decoded fields must rebuild the word's value from the format
// definition: (-1)^sign * sig * 2^offset * 2^(1-b-m), and the implicit digit
// must be 1 exactly when the exponent field is non-zero.
module tb_mf_operand_decode;
  import tb_mf_ref_pkg::*;

  localparam int NF = 4;
  localparam int FE [NF] = '{3, 1, 4, 2};
  localparam int FM [NF] = '{4, 1, 3, 5};

  int checks [NF];
  int failures_f [NF];
  bit done [NF];
  int checks_all, failures;
  logic clk;
  initial clk = 0;
  always #5 clk = ~clk;

  for (genvar g = 0; g < NF; g++) begin : g_fmt
    localparam int E = FE[g];
    localparam int M = FM[g];
    logic [E+M:0] x;
    logic         sign;
    logic [M:0]   sig;
    logic [E-1:0] offset;

    mf_operand_decode #(.E(E), .M(M)) dut (.x(x), .sign(sign), .sig(sig), .offset(offset));

    initial begin
      real ref_v, got_v;
      checks[g] = 0; failures_f[g] = 0; done[g] = 0;
      for (int i = 0; i < (1 << (E + M + 1)); i++) begin
        x = (E+M+1)'(i);
        #1;
        ref_v = mf_value(longint'(i), E, M);
        got_v = real'(sig) * pow2(int'(offset)) * pow2(1 - bias(E) - M);
        if (sign) got_v = -got_v;
        checks[g]++;
        if (got_v != ref_v || sign != x[E+M]) begin
          failures_f[g]++;
          $display("FAIL E%0dM%0d x=%h: value %f expected %f", E, M, x, got_v, ref_v);
        end
        checks[g]++;
        if (sig[M] != (x[E+M-1 -: E] != 0)) begin
          failures_f[g]++;
          $display("FAIL E%0dM%0d x=%h: implicit digit %b", E, M, x, sig[M]);
        end
      end
      done[g] = 1;
    end
  end

  initial begin
    wait (done[0] && done[1] && done[2] && done[3]);
    checks_all = 0; failures = 0;
    for (int g = 0; g < NF; g++) begin
      checks_all += checks[g];
      failures   += failures_f[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks_all, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_all, failures + 1);
    $finish;
  end
endmodule
