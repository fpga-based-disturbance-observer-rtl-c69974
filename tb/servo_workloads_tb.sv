// servo_workloads_tb: runs the published operating conditions and parameter
// sweeps on both boards in closed loop with a behavioural plant and reports the
// residual error for each.
//
// Settings run (gains as published, scaling as in this RTL):
//   baseline        integrator only at minimum gain (Ki = -1, Kp = Kd = 0)
//   PID             Kp = -200, Ki = -200, Kd = -20
//   high-gain PID   Kp = -400, Ki = -200, Kd = -40
//   PID + DOB       PID above with Kn = 400, Q-filter n = 9
//   Kn sweep        Kn = 1, 100, 200, 400, 600 at n = 9
//   n sweep         n = 8, 9, 10, 11 at Kn = 400
// Plant (as in mts_servo_top_tb): detuning = 1.28 * u (four clocks late) +
// disturbance; detector = detuning * carrier / 8191; error link two clocks. With
// this plant Kn = 400 is the exact inverse plant gain. The disturbance is a constant
// plus tones at 3, 11 and 23 kHz, all below the n = 9 cutoff of 38.9 kHz.
//
// The error is measured over 1 ms (125000 clocks), a whole number of periods of
// every tone, after 60000 clocks of settling.
//
// Checks: the mean error is removed in every locked setting; the baseline leaves the
// most error; the DOB lowers the rms at least 6 dB below PID and below high-gain PID; rms falls as Kn
// rises from 1 to 400; rms rises as n rises from 8 to 11 (lower cutoff, less of the
// disturbance band inside it); no setting clips the output.
module servo_workloads_tb;
  timeunit 1ns; timeprecision 100ps;
  import servo_pkg::*;
  localparam real KPL = 1.28;
  localparam real PI  = 3.14159265358979;

  logic clk = 0, rst = 1;
  rp1_cfg_t rp1_cfg;
  rp2_cfg_t rp2_cfg;
  logic signed [13:0] rp1_rf_in, rp1_rf_out1, rp1_rf_out2;
  logic signed [13:0] rp2_rf_in, rp2_rf_out;
  rp2_status_t rp2_status;
  int checks = 0, failures = 0, n_out_sat = 0;
  longint cyc = 0;
  real delta;
  logic signed [13:0] u_dly [4];
  logic signed [13:0] e_dly [2];

  mts_servo_top dut (
    .clk1 (clk), .rst1 (rst), .rp1_cfg (rp1_cfg), .rp1_rf_in (rp1_rf_in),
    .rp1_rf_out1 (rp1_rf_out1), .rp1_rf_out2 (rp1_rf_out2),
    .clk2 (clk), .rst2 (rst), .rp2_cfg (rp2_cfg), .rp2_rf_in (rp2_rf_in),
    .rp2_rf_out (rp2_rf_out), .rp2_status (rp2_status)
  );

  always #4 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [13:0] clip14(real v);
    if (v > 8191.0)  return 14'sd8191;
    if (v < -8192.0) return -14'sd8192;
    return 14'($rtoi(v));
  endfunction

  always @(posedge clk) begin
    real t, d;
    cyc <= cyc + 1;
    t = real'(cyc) * 8.0e-9;
    d = 1500.0 + 600.0 * $sin(2.0 * PI * 3.0e3 * t) + 600.0 * $sin(2.0 * PI * 11.0e3 * t)
        + 600.0 * $sin(2.0 * PI * 23.0e3 * t);
    delta = KPL * real'(u_dly[3]) + d;
    u_dly[3] <= u_dly[2]; u_dly[2] <= u_dly[1]; u_dly[1] <= u_dly[0]; u_dly[0] <= rp2_rf_out;
    e_dly[1] <= e_dly[0]; e_dly[0] <= rp1_rf_out2;
    rp1_rf_in <= clip14(delta * real'(rp1_rf_out1) / 8191.0);
    rp2_rf_in <= e_dly[1];
    n_out_sat += int'(rp2_status.out_sat);
  end

  task automatic expect_true(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // reset the loop, apply the settings, settle, measure the error rms
  task automatic run_setting(input string name, input logic signed [13:0] kp, ki, kd, kn,
                             input logic [3:0] q_n, input bit dob, input bit locked,
                             output real rms);
    real s = 0.0, s2 = 0.0, mean;
    int sat0;
    rst = 1;
    rp2_cfg = '{kp: kp, ki: ki, kd: kd, pf_n: PID_PREFILT_N, int_rst: 1'b0,
                kn: kn, q_n: q_n, dob_en: dob};
    repeat (4) @(posedge clk);
    #1 rst = 0;
    repeat (60000) @(posedge clk);
    sat0 = n_out_sat;
    for (int k = 0; k < 125000; k++) begin
      @(posedge clk);
      s += real'(rp2_rf_in);
      s2 += real'(rp2_rf_in) * real'(rp2_rf_in);
    end
    mean = s / 125000.0;
    rms = $sqrt(s2 / 125000.0 - mean * mean);
    $display("%-22s mean %8.2f  rms %8.2f", name, mean, rms);
    if (locked) expect_true({name, ": mean error removed"}, mean < 15.0 && mean > -15.0);
    expect_true({name, ": output never clips"}, n_out_sat == sat0);
  endtask

  initial begin
    real r_base, r_pid, r_hi, r_dob;
    real r_kn [5];
    real r_n [4];
    int kn_list [5] = '{1, 100, 200, 400, 600};
    rp1_cfg = '{ftw: FTW_5MHZ, ref_phase: 32'd0, lpf_n: LOCKIN_LPF_N};
    foreach (u_dly[i]) u_dly[i] = '0;
    foreach (e_dly[i]) e_dly[i] = '0;
    rp1_rf_in = '0; rp2_rf_in = '0;

    run_setting("baseline (Ki=-1)", 14'sd0, -14'sd1, 14'sd0, 14'sd0, DOB_Q_N, 1'b0, 1'b0, r_base);
    run_setting("PID", KP_DEFAULT, KI_DEFAULT, KD_DEFAULT, 14'sd0, DOB_Q_N, 1'b0, 1'b1, r_pid);
    run_setting("high-gain PID", -14'sd400, KI_DEFAULT, -14'sd40, 14'sd0, DOB_Q_N, 1'b0, 1'b1, r_hi);
    run_setting("PID + DOB", KP_DEFAULT, KI_DEFAULT, KD_DEFAULT, KN_DEFAULT, DOB_Q_N, 1'b1, 1'b1, r_dob);
    $display("DOB against PID: %5.1f dB", 20.0 * $log10(r_pid / r_dob));
    expect_true("baseline leaves the most error", r_base > r_pid && r_base > r_hi);
    expect_true("DOB beats PID by at least 6 dB", r_dob * 2.0 < r_pid);
    expect_true("DOB beats high-gain PID", r_dob < r_hi);

    foreach (kn_list[i])
      run_setting($sformatf("Kn = %0d, n = 9", kn_list[i]), KP_DEFAULT, KI_DEFAULT, KD_DEFAULT,
                  14'(kn_list[i]), DOB_Q_N, 1'b1, 1'b1, r_kn[i]);
    for (int i = 0; i < 3; i++)
      expect_true($sformatf("rms falls from Kn=%0d to Kn=%0d", kn_list[i], kn_list[i+1]),
                  r_kn[i+1] < r_kn[i]);

    for (int i = 0; i < 4; i++)
      run_setting($sformatf("Kn = 400, n = %0d", 8 + i), KP_DEFAULT, KI_DEFAULT, KD_DEFAULT,
                  KN_DEFAULT, 4'(8 + i), 1'b1, 1'b1, r_n[i]);
    for (int i = 0; i < 3; i++)
      expect_true($sformatf("rms rises from n=%0d to n=%0d", 8 + i, 9 + i), r_n[i+1] > r_n[i]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
