// tb_int_mac -- end-to-end check of the signed integer MAC.
//
// Two instances: the default INT8 x INT8 unit (N = 4608) and an INT3 x INT5
// unit with N = 16.  Each is fed random dot products of random length with
// random bubbles.  A 64-bit model of the exact partial sums is queued with the
// input cycle; every out_valid must come exactly two cycles after its input
// (pipeline depth two) and carry the queued sum, and out_done must mark the
// last term.  A directed dot product of N terms of (-2^(ra-1)) x (-2^(rb-1)),
// the largest product, checks that the accumulator width holds the worst case.
module tb_int_mac;

  localparam int NC = 2;
  localparam int CRA [NC] = '{8, 3};
  localparam int CRB [NC] = '{8, 5};
  localparam int CN  [NC] = '{4608, 16};

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
    localparam int RA = CRA[g], RB = CRB[g], N = CN[g];
    localparam int ACC_W = RA + RB + $clog2(N) + 1;

    logic in_valid, in_first, in_last;
    logic signed [RA-1:0] a;
    logic signed [RB-1:0] b;
    logic out_valid, out_done;
    logic signed [ACC_W-1:0] acc;

    int_mac #(.RA(RA), .RB(RB), .N(N)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
      .in_last(in_last), .a(a), .b(b), .out_valid(out_valid),
      .out_done(out_done), .acc(acc));

    longint exp_q [$];
    int  cyc_q [$];
    bit  last_q [$];
    longint sum;

    // One term; kind 0 random, 1 most negative operands, 3 zero a operand.
    task automatic term(input bit first, input bit last, input int kind);
      logic signed [RA-1:0] va;
      logic signed [RB-1:0] vb;
      va = RA'($urandom);
      vb = RB'($urandom);
      if (kind == 1) begin
        va = {1'b1, {(RA-1){1'b0}}};
        vb = {1'b1, {(RB-1){1'b0}}};
      end else if (kind == 3) begin
        va = '0;
      end
      // random bubbles; inputs change at the falling edge
      while (($urandom % 5) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
        in_first = 1'($urandom);
      end
      @(negedge clk);
      in_valid = 1'b1; in_first = first; in_last = last; a = va; b = vb;
      if (first) sum = 0;
      sum += longint'(va) * longint'(vb);
      exp_q.push_back(sum);
      cyc_q.push_back(cycle);      // index of the cycle in which the term is presented
      last_q.push_back(last);
    endtask

    task automatic dot(input int len, input int kind);
      for (int k = 0; k < len; k++) term(k == 0, k == len - 1, kind);
    endtask

    always @(posedge clk) begin
      if (rst_n && out_valid) begin
        longint e;
        int  c;
        bit  l;
        e = exp_q.pop_front();
        c = cyc_q.pop_front();
        l = last_q.pop_front();
        checks[g] += 3;
        if (longint'(acc) != e) begin
          failures_c[g]++;
          if (failures_c[g] < 10) $display("FAIL cfg%0d acc=%0d expected %0d", g, acc, e);
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
      dot(N, 1);                     // largest product, full length
      dot(9, 3);                     // zero a operands
      dot(1, 0);                     // single-term dot product
      for (int d = 0; d < 300; d++) dot(1 + ($urandom % N), 0);
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
    wait (done[0] && done[1]);
    checks_all = checks[0] + checks[1];
    failures   = failures_c[0] + failures_c[1];
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
