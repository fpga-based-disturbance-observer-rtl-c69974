// ema_filter_tb: self-checking test of the EMA low-pass filter.
// 1. Bit-exact: random inputs and random shift counts against a model in 64-bit
//    integers (state = output * 2^16, step floored), one clock of latency.
// 2. Shape: a step of height H with n = 4 must follow H * (1 - (1 - 2^-n)^k) within
//    two LSBs, computed in floating point.
// 3. Pass-through: n = 0 gives y = x one clock later.
module ema_filter_tb;
  timeunit 1ns; timeprecision 100ps;
  localparam int W = 14;
  logic clk = 0, rst = 1;
  logic [3:0] shift_n;
  logic signed [W-1:0] x, y;
  int checks = 0, failures = 0;
  longint acc_m;          // model state, FRAC = 16

  ema_filter dut (.*);

  always #4 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint floor_shift(longint v, int n);
    longint p = longint'(1) << n;
    longint q = v / p;                   // truncates toward zero
    if (v < 0 && q * p != v) q = q - 1;  // round down instead
    return q;
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    real h, pred;
    x = '0; shift_n = 4'd4;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    acc_m = 0;
    // 1. random
    for (int k = 0; k < 20000; k++) begin
      if (k % 500 == 0) shift_n = 4'($urandom_range(0, 12));
      x = W'($urandom);
      if (k % 7 == 0) x = 14'sh1fff;
      if (k % 11 == 0) x = 14'sh2000;
      @(posedge clk);
      acc_m = acc_m + floor_shift((longint'(x) <<< 16) - acc_m, int'(shift_n));
      #1;
      check("random", y, acc_m >>> 16);
    end
    // 2. step response
    rst = 1; x = '0; shift_n = 4'd4;
    @(posedge clk); #1 rst = 0;
    x = 14'sd4000; h = 4000.0;
    for (int k = 1; k <= 200; k++) begin
      @(posedge clk); #1;
      pred = h * (1.0 - (1.0 - 1.0/16.0) ** k);
      checks++;
      if ((real'(y) - pred) > 2.0 || (pred - real'(y)) > 2.0) begin
        failures++;
        $display("FAIL step k=%0d y=%0d pred=%f", k, y, pred);
      end
    end
    // 3. pass-through with n = 0
    shift_n = 4'd0;
    for (int k = 0; k < 100; k++) begin
      x = W'($urandom);
      @(posedge clk); #1;
      check("n=0", y, x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
