// tb_mf_accumulator -- checks the long accumulator with merged sign inversion.
//
// Random magnitudes and signs are accumulated with random bubbles and random
// restarts; a 64-bit integer model kept in the testbench must match the
// accumulator after every clock edge.  The widths are the defaults of the
// E3M4 x E3M4 MAC (22-bit magnitude and 36-bit
// accumulator).  Directed cases cover subtracting zero, subtracting the
// largest magnitude and restarting with a negative term.
module tb_mf_accumulator;
  localparam int MAG_W = 22;
  localparam int ACC_W = 36;

  logic clk, rst_n;
  logic add_valid, add_first, add_neg;
  logic [MAG_W-1:0] mag;
  logic signed [ACC_W-1:0] acc;
  int checks, failures;
  longint model;

  initial clk = 0;
  always #5 clk = ~clk;

  mf_accumulator #(.MAG_W(MAG_W), .ACC_W(ACC_W)) dut (
    .clk(clk), .rst_n(rst_n), .add_valid(add_valid), .add_first(add_first),
    .add_neg(add_neg), .mag(mag), .acc(acc));

  task automatic apply(input bit v, input bit f, input bit n, input longint unsigned m);
    add_valid = v; add_first = f; add_neg = n; mag = MAG_W'(m);
    @(posedge clk);
    if (v) begin
      if (f) model = 0;
      model = n ? model - longint'(m) : model + longint'(m);
    end
    #1;
    checks++;
    if (longint'(acc) != model) begin
      failures++;
      if (failures < 10) $display("FAIL acc=%0d model=%0d (v=%b f=%b n=%b m=%0d)", acc, model, v, f, n, m);
    end
  endtask

  initial begin
    checks = 0; failures = 0; model = 0;
    rst_n = 0; add_valid = 0; add_first = 0; add_neg = 0; mag = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (acc != 0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    apply(1, 1, 0, 5);
    apply(1, 0, 1, 0);                        // -0 leaves the sum alone
    apply(1, 0, 1, 7);                        // goes negative
    apply(1, 0, 1, (64'd1 << MAG_W) - 1);     // largest magnitude subtracted
    apply(0, 1, 0, 99);                       // bubble: first is ignored
    apply(1, 1, 1, 3);                        // restart with a negative term
    for (int i = 0; i < 20000; i++)
      apply(($urandom % 4) != 0, ($urandom % 50) == 0, 1'($urandom % 2),
            longint'($urandom) & ((64'd1 << MAG_W) - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
