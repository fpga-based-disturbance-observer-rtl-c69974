// pid_controller_tb: self-checking test of the PID controller.
// 1. Latency and pass-through: pre-filter off (n = 0), kp = 4096 (unit gain with
//    the 2^-12 scaling), ki = kd = 0: a step on e must reach u_pid exactly three
//    clocks later and equal e.
// 2. Random errors and gains (including the published Kp = Ki = -200, Kd = -20 and
//    the pre-filter n = 6) against the cycle-accurate model in servo_ref_pkg.
// 3. Windup: a large constant error with a large ki must drive the integrator into
//    its clamp and the output into clipping; both flags must be seen.
module pid_controller_tb;
  timeunit 1ns; timeprecision 100ps;
  import servo_ref_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [13:0] e, kp, ki, kd, u_pid;
  logic [3:0] pf_n;
  logic int_rst, sat_hit, int_clamp_hit;
  int checks = 0, failures = 0, n_sat = 0, n_clamp = 0;
  pid_ref m;

  pid_controller dut (.*);

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

  task automatic tick_model();
    @(posedge clk);
    m.step(e, kp, ki, kd, int'(pf_n), int_rst);
    #1;
    check("u_pid", u_pid, m.u);
    check("sat", sat_hit, m.sat);
    check("clamp", int_clamp_hit, m.clamp);
    n_sat += int'(sat_hit);
    n_clamp += int'(int_clamp_hit);
  endtask

  initial begin
    int lat;
    m = new();
    e = '0; kp = 14'sd4096; ki = '0; kd = '0; pf_n = 4'd0; int_rst = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (5) @(posedge clk);
    // 1. latency
    #1 e = 14'sd1234;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (u_pid == 0 && lat < 20);
    check("latency", lat, 3);
    check("unit gain", u_pid, 1234);

    // 2. random against the model
    rst = 1; @(posedge clk); #1 rst = 0;
    m = new();
    for (int blk = 0; blk < 40; blk++) begin
      if (blk == 0) begin
        kp = -14'sd200; ki = -14'sd200; kd = -14'sd20; pf_n = 4'd6;
      end else begin
        kp = 14'($urandom); ki = 14'($urandom_range(0, 400)) - 14'sd200;
        kd = 14'($urandom); pf_n = 4'($urandom_range(0, 9));
      end
      int_rst = (blk % 10 == 9);
      for (int k = 0; k < 1000; k++) begin
        if (k % 50 == 0 || blk % 3 == 0) e = 14'($urandom);
        tick_model();
      end
    end

    // 3. windup into the clamp
    int_rst = 0; kp = 14'sd100; kd = 0; ki = 14'sd8191; pf_n = 4'd0; e = 14'sd8191;
    for (int k = 0; k < 3000; k++) tick_model();
    checks++;
    if (n_clamp == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL windup not seen: clamp=%0d sat=%0d", n_clamp, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
