// tb_mf_product_align -- checks the significand multiplier and aligner.
//
// Two format pairs (E3M4 x E3M4, and the asymmetric E2M1 x E4M3) are driven
// through an operand decoder each and the aligner, for every pair of positive
// code words.  The aligned magnitude must equal |a * b| divided by the
// accumulator LSB 2^(1-ba-ma) * 2^(1-bb-mb), with a and b valued from the
// format definition.
module tb_mf_product_align;
  import tb_mf_ref_pkg::*;

  localparam int NP = 2;
  localparam int PEA [NP] = '{3, 2};
  localparam int PMA [NP] = '{4, 1};
  localparam int PEB [NP] = '{3, 4};
  localparam int PMB [NP] = '{4, 3};

  int checks [NP];
  int failures_p [NP];
  bit done [NP];
  int checks_all, failures;
  logic clk;
  initial clk = 0;
  always #5 clk = ~clk;

  for (genvar g = 0; g < NP; g++) begin : g_pair
    localparam int EA = PEA[g], MA = PMA[g], EB = PEB[g], MB = PMB[g];
    localparam int MAG_W = (1 << EA) + (1 << EB) + MA + MB - 2;
    logic [EA+MA:0] a;
    logic [EB+MB:0] b;
    logic sa, sb;  // signs are not used by the aligner
    logic [MA:0] siga;
    logic [MB:0] sigb;
    logic [EA-1:0] offa;
    logic [EB-1:0] offb;
    logic [MAG_W-1:0] mag;

    mf_operand_decode #(.E(EA), .M(MA)) u_da (.x(a), .sign(sa), .sig(siga), .offset(offa));
    mf_operand_decode #(.E(EB), .M(MB)) u_db (.x(b), .sign(sb), .sig(sigb), .offset(offb));
    mf_product_align #(.EA(EA), .MA(MA), .EB(EB), .MB(MB)) dut (
      .sig_a(siga), .offset_a(offa), .sig_b(sigb), .offset_b(offb), .mag(mag));

    initial begin
      real expect_mag;
      checks[g] = 0; failures_p[g] = 0; done[g] = 0;
      for (int i = 0; i < (1 << (EA + MA)); i++)
        for (int j = 0; j < (1 << (EB + MB)); j++) begin
          a = (EA+MA+1)'(i);
          b = (EB+MB+1)'(j);
          #1;
          expect_mag = mf_value(longint'(i), EA, MA) * mf_value(longint'(j), EB, MB)
                       / acc_lsb(EA, MA, EB, MB);
          checks[g]++;
          if (real'(mag) != expect_mag) begin
            failures_p[g]++;
            if (failures_p[g] < 10)
              $display("FAIL E%0dM%0d x E%0dM%0d a=%h b=%h: mag %0d expected %f",
                       EA, MA, EB, MB, a, b, mag, expect_mag);
          end
        end
      // The largest product must use the top bit of the output.
      a = {1'b0, {(EA+MA){1'b1}}};
      b = {1'b0, {(EB+MB){1'b1}}};
      #1;
      checks[g]++;
      if (!mag[MAG_W-1]) begin
        failures_p[g]++;
        $display("FAIL largest product does not reach bit %0d", MAG_W - 1);
      end
      done[g] = 1;
    end
  end

  initial begin
    wait (done[0] && done[1]);
    checks_all = checks[0] + checks[1];
    failures   = failures_p[0] + failures_p[1];
    $display("TB_RESULT checks=%0d failures=%0d", checks_all, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_all, failures + 1);
    $finish;
  end
endmodule
