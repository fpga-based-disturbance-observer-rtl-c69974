// rp2_pid_dob_tb: self-checking test of the PID + DOB board.
// The board is driven with random error samples and with the published settings
// (Kp = Ki = -200, Kd = -20, Kn = 400, pre-filter n = 6, Q-filter n = 9) as well as
// random ones, and RF OUT is compared every clock with a model built here from the
// reference PID and DOB models plus the clipped, registered junction
// u_out = u_pid - d_hat, whose output is fed back into the model DOB. The DOB is
// switched off and on, which must also match. Two latencies are checked: four
// clocks from RF IN to RF OUT through the PID alone, six through the DOB alone.
module rp2_pid_dob_tb;
  timeunit 1ns; timeprecision 100ps;
  import servo_pkg::*;
  import servo_ref_pkg::*;
  logic clk = 0, rst = 1;
  rp2_cfg_t cfg;
  logic signed [13:0] rf_in, rf_out;
  rp2_status_t status;
  int checks = 0, failures = 0;
  pid_ref mp;
  dob_ref md;
  longint u_m;

  rp2_pid_dob dut (.*);

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

  task automatic latency(input string what, input int exp);
    int lat;
    rst = 1; rf_in = '0; @(posedge clk); #1 rst = 0;
    repeat (5) @(posedge clk);
    #1 rf_in = 14'sd2000;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (rf_out == 0 && lat < 20);
    check(what, lat, exp);
  endtask

  initial begin
    cfg = '{kp: 14'sd4096, ki: '0, kd: '0, pf_n: 4'd0, int_rst: 1'b0,
            kn: 14'sd256, q_n: 4'd0, dob_en: 1'b0};
    rf_in = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // PID only: pre-filter, path, sum registers + output register
    latency("PID latency", 4);
    // DOB only: kp = 0, five-stage DOB + output register
    cfg.kp = '0; cfg.dob_en = 1'b1;
    latency("DOB latency", 6);

    // random against the model
    rst = 1; rf_in = '0; @(posedge clk); #1 rst = 0;
    mp = new(); md = new(); u_m = 0;
    for (int blk = 0; blk < 40; blk++) begin
      if (blk < 2) begin
        cfg = '{kp: KP_DEFAULT, ki: KI_DEFAULT, kd: KD_DEFAULT, pf_n: PID_PREFILT_N,
                int_rst: 1'b0, kn: KN_DEFAULT, q_n: DOB_Q_N, dob_en: (blk == 1)};
      end else begin
        cfg.kp = 14'($urandom); cfg.ki = 14'($urandom_range(0, 400)) - 14'sd200;
        cfg.kd = 14'($urandom); cfg.kn = 14'($urandom);
        cfg.pf_n = 4'($urandom_range(0, 8)); cfg.q_n = 4'($urandom_range(0, 11));
        cfg.dob_en = (blk % 4 != 3); cfg.int_rst = (blk % 8 == 7);
      end
      for (int k = 0; k < 1000; k++) begin
        if (k % 30 == 0 || blk % 3 == 2) rf_in = 14'($urandom);
        @(posedge clk);
        begin
          longint j;
          // all registers update from the values before the edge
          j = mp.u - md.d;
          mp.step(rf_in, cfg.kp, cfg.ki, cfg.kd, int'(cfg.pf_n), cfg.int_rst);
          md.step(cfg.dob_en, rf_in, u_m, cfg.kn, int'(cfg.q_n));
          u_m = clip(j, 14);
        end
        #1;
        check("rf_out", rf_out, u_m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
