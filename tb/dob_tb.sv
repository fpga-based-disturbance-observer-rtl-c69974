// dob_tb: self-checking test of the disturbance observer.
// 1. Latency: with Kn = 256 (unit gain), Q-filter off (n = 0) and u_out = 0, a step
//    on y must first appear on d_hat exactly five clocks later (40 ns at 125 MHz),
//    at the step's value.
// 2. Steady state: with the published n = 9 and Kn = 400, constant y and u_out must
//    settle to d_hat = floor(400 * y / 256) - u_out.
// 3. Random y, u_out, Kn (both signs) and n against the cycle-accurate model in
//    servo_ref_pkg, including clipping of d_hat.
// 4. Disable: with en low d_hat must be zero.
module dob_tb;
  timeunit 1ns; timeprecision 100ps;
  import servo_ref_pkg::*;
  logic clk = 0, rst = 1, en;
  logic signed [13:0] y, u_out, kn, d_hat;
  logic [3:0] q_n;
  logic sat_hit;
  int checks = 0, failures = 0, n_sat = 0;
  dob_ref m;

  dob dut (.*);

  always #4 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    int lat;
    m = new();
    en = 1; y = '0; u_out = '0; kn = 14'sd256; q_n = 4'd0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (8) @(posedge clk);
    // 1. latency
    #1 y = 14'sd1000;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (d_hat == 0 && lat < 20);
    check("latency", lat, 5);
    check("step value", d_hat, 1000);

    // 2. steady state, n = 9, Kn = 400
    kn = 14'sd400; q_n = 4'd9; y = 14'sd300; u_out = -14'sd50;
    repeat (20000) @(posedge clk);
    #1 check("steady", d_hat, (400 * 300) / 256 + 50);

    // 3. random against the model
    rst = 1; @(posedge clk); #1 rst = 0;
    m = new();
    for (int blk = 0; blk < 60; blk++) begin
      kn = (blk == 0) ? 14'sd400 : 14'($urandom);
      q_n = (blk == 0) ? 4'd9 : 4'($urandom_range(0, 11));
      en = (blk % 7 != 6);
      for (int k = 0; k < 1000; k++) begin
        if (k % 40 == 0 || blk % 2 == 0) begin
          y = 14'($urandom); u_out = 14'($urandom);
        end
        @(posedge clk);
        m.step(en, y, u_out, kn, int'(q_n));
        #1;
        check("d_hat", d_hat, m.d);
        if (!en) check("disabled", d_hat, 0);
        n_sat += int'(sat_hit);
      end
    end
    checks++;
    if (n_sat == 0) begin
      failures++;
      $display("FAIL clipping of d_hat never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
