// tb_mac_lib_top -- end-to-end test of the MAC library at its default
// configuration (E3M4 x E3M4 minifloat MAC, INT8 x INT8 integer MAC,
// N = 4608).  No parameter of the top is overridden.
//
// Both units run at the same time.  The minifloat side runs dot products with
// the lengths of the evaluated networks' largest layers (4608, 3072, 1280
// terms) plus random ones; the integer side runs its own stream.  Every result
// is compared with an exact model computed from the number formats, and its
// latency (two cycles) is checked.  Worst cases are included: 4608 products of
// the largest magnitude with the same sign, for both signs, on both units.
//
// Each mechanism of the datapath is counted and must occur at least once:
// accumulator restart, subtraction of a negative product, subnormal operand,
// zero operand, product with the largest alignment shift, pipeline bubble,
// back-to-back terms, full-length worst-case sums of both signs.
module tb_mac_lib_top;
  import tb_mf_ref_pkg::*;

  localparam int EA = 3, MA = 4, EB = 3, MB = 4, N = 4608;
  localparam int RA = 8, RB = 8;
  localparam int FP_ACC_W  = (1 << EA) + MA + (1 << EB) + MB + $clog2(N) - 1;
  localparam int INT_ACC_W = RA + RB + $clog2(N) + 1;

  logic clk, rst_n;
  logic fp_in_valid, fp_in_first, fp_in_last;
  logic [EA+MA:0] fp_a;
  logic [EB+MB:0] fp_b;
  logic fp_out_valid, fp_out_done;
  logic signed [FP_ACC_W-1:0] fp_acc;
  logic int_in_valid, int_in_first, int_in_last;
  logic signed [RA-1:0] int_a;
  logic signed [RB-1:0] int_b;
  logic int_out_valid, int_out_done;
  logic signed [INT_ACC_W-1:0] int_acc;

  mac_lib_top dut (.*);

  int cycle, checks, failures;
  bit fp_done, int_done;

  // mechanism counters
  typedef enum int {M_RESTART, M_NEG, M_SUBNORMAL, M_ZERO, M_MAXSHIFT, M_BUBBLE,
                    M_BACK2BACK, M_WORST_POS, M_WORST_NEG, M_INT_NEG, M_INT_WORST,
                    M_COUNT} mech_e;
  int mech [M_COUNT];
  string mech_name [M_COUNT] = '{"restart", "negative product", "subnormal operand",
                                 "zero operand", "largest shift", "bubble", "back-to-back",
                                 "full-length positive worst case", "full-length negative worst case",
                                 "int negative product", "int full-length worst case"};

  initial clk = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- minifloat side ----------------
  real fp_exp_q [$];
  int  fp_cyc_q [$];
  bit  fp_last_q [$];
  real fp_sum;
  bit  fp_prev_valid;

  // kind 0 random, 1 largest positive product, 2 largest negative product
  task automatic fp_term(input bit first, input bit last, input int kind, input bit bubbles);
    logic [EA+MA:0] va;
    logic [EB+MB:0] vb;
    va = (EA+MA+1)'($urandom);
    vb = (EB+MB+1)'($urandom);
    if (kind == 1) begin va = {1'b0, {(EA+MA){1'b1}}}; vb = {1'b1, {(EB+MB){1'b1}}}; vb[EB+MB] = 1'b0; end
    if (kind == 2) begin va = {1'b1, {(EA+MA){1'b1}}}; vb = {1'b0, {(EB+MB){1'b1}}}; end
    if (kind == 0 && ($urandom % 16) == 0) va[EA+MA-1 -: EA] = '0;     // subnormal or zero
    if (kind == 0 && ($urandom % 32) == 0) vb[EB+MB-1:0] = '0;         // zero
    while (bubbles && ($urandom % 6) == 0) begin
      @(negedge clk);
      fp_in_valid = 1'b0;
      fp_prev_valid = 1'b0;
      mech[M_BUBBLE]++;
    end
    @(negedge clk);
    fp_in_valid = 1'b1; fp_in_first = first; fp_in_last = last; fp_a = va; fp_b = vb;
    if (fp_prev_valid) mech[M_BACK2BACK]++;
    fp_prev_valid = 1'b1;
    if (first) begin fp_sum = 0.0; mech[M_RESTART]++; end
    if (va[EA+MA] ^ vb[EB+MB] && va[EA+MA-1:0] != 0 && vb[EB+MB-1:0] != 0) mech[M_NEG]++;
    if ((va[EA+MA-1 -: EA] == 0 && va[MA-1:0] != 0) || (vb[EB+MB-1 -: EB] == 0 && vb[MB-1:0] != 0))
      mech[M_SUBNORMAL]++;
    if (va[EA+MA-1:0] == 0 || vb[EB+MB-1:0] == 0) mech[M_ZERO]++;
    if (va[EA+MA-1 -: EA] == '1 && vb[EB+MB-1 -: EB] == '1) mech[M_MAXSHIFT]++;
    fp_sum += mf_value(longint'(va), EA, MA) * mf_value(longint'(vb), EB, MB) / acc_lsb(EA, MA, EB, MB);
    fp_exp_q.push_back(fp_sum);
    fp_cyc_q.push_back(cycle);
    fp_last_q.push_back(last);
  endtask

  task automatic fp_dot(input int len, input int kind, input bit bubbles);
    for (int k = 0; k < len; k++) fp_term(k == 0, k == len - 1, kind, bubbles);
  endtask

  initial begin
    real worst;
    fp_in_valid = 0; fp_in_first = 0; fp_in_last = 0; fp_a = '0; fp_b = '0;
    fp_prev_valid = 0;
    wait (rst_n === 1'b0);
    wait (rst_n === 1'b1);
    fp_dot(N, 1, 0);                 // worst case, positive
    worst = fp_sum;
    fp_dot(N, 2, 0);                 // worst case, negative
    if (worst == -fp_sum && worst == real'(N) * mf_max(EA, MA) * mf_max(EB, MB) / acc_lsb(EA, MA, EB, MB))
      begin mech[M_WORST_POS]++; mech[M_WORST_NEG]++; end
    fp_dot(4608, 0, 1);              // ResNet-18 largest dot product
    fp_dot(3072, 0, 1);              // ViT-B-32 largest dot product
    fp_dot(1280, 0, 1);              // MobileNetV2 largest dot product
    for (int d = 0; d < 20; d++) fp_dot(1 + ($urandom % 300), 0, 1);
    @(negedge clk);
    fp_in_valid = 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (fp_exp_q.size() != 0) begin failures++; $display("FAIL fp results missing"); end
    fp_done = 1;
  end

  always @(posedge clk) begin
    if (rst_n && fp_out_valid) begin
      real e;
      int  c;
      bit  l;
      e = fp_exp_q.pop_front();
      c = fp_cyc_q.pop_front();
      l = fp_last_q.pop_front();
      checks += 3;
      if (real'(fp_acc) != e) begin
        failures++;
        if (failures < 10) $display("FAIL fp acc=%0d expected %f", fp_acc, e);
      end
      if (cycle - c != 2) begin failures++; $display("FAIL fp latency %0d", cycle - c); end
      if (fp_out_done != l) begin failures++; $display("FAIL fp out_done"); end
    end
  end

  // ---------------- integer side ----------------
  longint int_exp_q [$];
  int     int_cyc_q [$];
  bit     int_last_q [$];
  longint int_sum;

  task automatic int_term(input bit first, input bit last, input int kind);
    logic signed [RA-1:0] va;
    logic signed [RB-1:0] vb;
    va = RA'($urandom);
    vb = RB'($urandom);
    if (kind == 1) begin va = {1'b1, {(RA-1){1'b0}}}; vb = {1'b1, {(RB-1){1'b0}}}; end
    while (kind == 0 && ($urandom % 5) == 0) begin
      @(negedge clk);
      int_in_valid = 1'b0;
    end
    @(negedge clk);
    int_in_valid = 1'b1; int_in_first = first; int_in_last = last; int_a = va; int_b = vb;
    if (first) int_sum = 0;
    if ((va < 0) != (vb < 0) && va != 0 && vb != 0) mech[M_INT_NEG]++;
    int_sum += longint'(va) * longint'(vb);
    int_exp_q.push_back(int_sum);
    int_cyc_q.push_back(cycle);
    int_last_q.push_back(last);
  endtask

  initial begin
    int_in_valid = 0; int_in_first = 0; int_in_last = 0; int_a = '0; int_b = '0;
    wait (rst_n === 1'b0);
    wait (rst_n === 1'b1);
    for (int k = 0; k < N; k++) int_term(k == 0, k == N - 1, 1);
    if (int_sum == longint'(N) * 128 * 128) mech[M_INT_WORST]++;
    for (int d = 0; d < 10; d++) begin
      automatic int len = 1 + ($urandom % N);
      for (int k = 0; k < len; k++) int_term(k == 0, k == len - 1, 0);
    end
    @(negedge clk);
    int_in_valid = 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (int_exp_q.size() != 0) begin failures++; $display("FAIL int results missing"); end
    int_done = 1;
  end

  always @(posedge clk) begin
    if (rst_n && int_out_valid) begin
      longint e;
      int     c;
      bit     l;
      e = int_exp_q.pop_front();
      c = int_cyc_q.pop_front();
      l = int_last_q.pop_front();
      checks += 3;
      if (int_out_done != l) begin failures++; $display("FAIL int out_done"); end
      if (longint'(int_acc) != e) begin
        failures++;
        if (failures < 10) $display("FAIL int acc=%0d expected %0d", int_acc, e);
      end
      if (cycle - c != 2) begin failures++; $display("FAIL int latency %0d", cycle - c); end
    end
  end

  // ---------------- control ----------------
  initial begin
    cycle = 0; checks = 0; failures = 0; fp_done = 0; int_done = 0;
    foreach (mech[i]) mech[i] = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    wait (fp_done && int_done);
    foreach (mech[i]) begin
      checks++;
      $display("mechanism %-34s : %0d", mech_name[i], mech[i]);
      if (mech[i] == 0) begin failures++; $display("FAIL mechanism never exercised: %s", mech_name[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
