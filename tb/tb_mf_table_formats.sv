// tb_mf_table_formats -- the minifloat MAC in the weight x activation format
// pairs that the accuracy study selects (a = weight format, b = activation
// format), each with the dot-product bound N = 4608 of ResNet-18.
//
// For every pair: a full-length dot product of the largest products with one
// sign, then with the other (the accumulator must hold both exactly, which is
// what its width formula promises), then random dot products of the three
// networks' largest lengths (4608, 3072, 1280).  Every partial sum is compared
// with an exact model computed from the number formats, with the two-cycle
// latency and out_done checked as well.
module tb_mf_table_formats;
  import tb_mf_ref_pkg::*;

  // E1M1xE1M1, E1M1xE2M1, E2M1xE2M1, E1M2xE2M1, E1M1xE3M1, E2M2xE2M2,
  // E1M1xE4M3, E2M1xE2M5, E1M3xE2M4, E4M2xE2M4, E2M4xE3M4, E4M3xE4M3
  localparam int NC = 12;
  localparam int CEA [NC] = '{1, 1, 2, 1, 1, 2, 1, 2, 1, 4, 2, 4};
  localparam int CMA [NC] = '{1, 1, 1, 2, 1, 2, 1, 1, 3, 2, 4, 3};
  localparam int CEB [NC] = '{1, 2, 2, 2, 3, 2, 4, 2, 2, 2, 3, 4};
  localparam int CMB [NC] = '{1, 1, 1, 1, 1, 2, 3, 5, 4, 4, 4, 3};
  localparam int CN  [NC] = '{NC{4608}};

  logic clk, rst_n;
  int cycle;
  int checks [NC];
  int failures_c [NC];
  bit done [NC];
  int checks_all, failures;

  initial clk = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  for (genvar g = 0; g < NC; g++) begin : g_cfg
    localparam int EA = CEA[g], MA = CMA[g], EB = CEB[g], MB = CMB[g], N = CN[g];
    localparam int ACC_W = (1 << EA) + MA + (1 << EB) + MB + $clog2(N) - 1;

    logic in_valid, in_first, in_last;
    logic [EA+MA:0] a;
    logic [EB+MB:0] b;
    logic out_valid, out_done;
    logic signed [ACC_W-1:0] acc;

    mf_mac #(.EA(EA), .MA(MA), .EB(EB), .MB(MB), .N(N)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
      .in_last(in_last), .a(a), .b(b), .out_valid(out_valid),
      .out_done(out_done), .acc(acc));

    real exp_q [$];
    int  cyc_q [$];
    bit  last_q [$];
    real sum;

    // One term; kind 0 random, 1 largest positive, 4 largest negative.
    task automatic term(input bit first, input bit last, input int kind);
      logic [EA+MA:0] va;
      logic [EB+MB:0] vb;
      va = (EA+MA+1)'($urandom);
      vb = (EB+MB+1)'($urandom);
      if (kind == 1 || kind == 4) begin
        va[EA+MA-1:0] = '1;
        vb[EB+MB-1:0] = '1;
        va[EA+MA] = 1'b0;
        vb[EB+MB] = (kind == 4);
      end else if (kind == 2) begin
        va[EA+MA-1 -: EA] = '0;
        vb[EB+MB-1 -: EB] = '0;
      end else if (kind == 3) begin
        va[EA+MA-1:0] = '0;
      end
      // random bubbles; inputs change at the falling edge
      while (($urandom % 5) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
        in_first = 1'($urandom);
      end
      @(negedge clk);
      in_valid = 1'b1; in_first = first; in_last = last; a = va; b = vb;
      if (first) sum = 0.0;
      sum += mf_value(longint'(va), EA, MA) * mf_value(longint'(vb), EB, MB)
             / acc_lsb(EA, MA, EB, MB);
      exp_q.push_back(sum);
      cyc_q.push_back(cycle);      // index of the cycle in which the term is presented
      last_q.push_back(last);
    endtask

    task automatic dot(input int len, input int kind);
      for (int k = 0; k < len; k++) term(k == 0, k == len - 1, kind);
    endtask

    always @(posedge clk) begin
      if (rst_n && out_valid) begin
        real e;
        int  c;
        bit  l;
        e = exp_q.pop_front();
        c = cyc_q.pop_front();
        l = last_q.pop_front();
        checks[g] += 3;
        if (real'(acc) != e) begin
          failures_c[g]++;
          if (failures_c[g] < 10) $display("FAIL cfg%0d acc=%0d expected %f", g, acc, e);
        end
        if (cycle - c != 2) begin
          failures_c[g]++;
          $display("FAIL cfg%0d latency %0d cycles", g, cycle - c);
        end
        if (out_done != l) begin
          failures_c[g]++;
          $display("FAIL cfg%0d out_done=%b expected %b", g, out_done, l);
        end
      end
    end

    initial begin
      checks[g] = 0; failures_c[g] = 0; done[g] = 0;
      in_valid = 0; in_first = 0; in_last = 0; a = '0; b = '0;
      wait (rst_n === 1'b0);
      wait (rst_n === 1'b1);
      @(posedge clk);
      dot(N, 1);                     // full-length worst case, positive
      checks[g]++;
      if (sum != real'(N) * mf_max(EA, MA) * mf_max(EB, MB) / acc_lsb(EA, MA, EB, MB)) begin
        failures_c[g]++;
        $display("FAIL cfg%0d worst-case model", g);
      end
      dot(N, 4);                     // full-length worst case, negative
      dot(4608, 0);
      dot(3072, 0);
      dot(1280, 0);
      @(negedge clk);
      in_valid = 1'b0;
      repeat (4) @(posedge clk);
      checks[g]++;
      if (exp_q.size() != 0) begin
        failures_c[g]++;
        $display("FAIL cfg%0d %0d results never came out", g, exp_q.size());
      end
      done[g] = 1;
    end
  end

  initial begin
    cycle = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NC; i++) wait (done[i]);
    checks_all = 0; failures = 0;
    for (int i = 0; i < NC; i++) begin
      checks_all += checks[i];
      failures   += failures_c[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks_all, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_all, failures + 1);
    $finish;
  end
endmodule
