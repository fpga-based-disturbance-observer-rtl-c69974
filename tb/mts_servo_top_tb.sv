// mts_servo_top_tb: end-to-end closed-loop test of both boards with every
// parameter at its default and the published settings (5 MHz carrier, lock-in
// low-pass n = 4, Kp = Ki = -200, Kd = -20, pre-filter n = 6, Kn = 400, Q-filter n = 9).
//
// Plant model (behavioural, in this testbench):
//   laser detuning   delta[t] = KPL * u[t - 4] + dist[t]   (u = RP#2 DAC code)
//   detector         rp1_rf_in = clip(delta * carrier / 8191)  (MTS signal in phase
//                    with the 5 MHz carrier RP#1 produces, slope 1 near line centre)
//   coax link        rp2_rf_in = rp1_rf_out2 two clocks later
// The demodulated error is about delta / 2, so with KPL = 1.28 the DOB gain
// Kn / 256 = 1.5625 is the exact inverse of the plant gain 0.64.
//
// Phases and what is checked:
//   A  PID only, a constant plus a 5 kHz sinusoidal disturbance: the integrator
//      removes the mean error; the residual rms is measured.
//   B  DOB engaged without touching the PID: rms must fall at least 3x (about 10 dB).
//   C  overload, a disturbance beyond the actuator range: the PID output, the
//      integrator, d_hat and the output junction must all clip.
//   D  back to the normal disturbance: the loop must relock with the DOB's rms.
// Each mechanism (mode switch, lock, the four clip flags) is counted; one that never
// happens is a failure.
module mts_servo_top_tb;
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

  int checks = 0, failures = 0;
  int n_switch = 0, n_pid_sat = 0, n_int_clamp = 0, n_dob_sat = 0, n_out_sat = 0, n_lock = 0;
  longint cyc = 0;
  real d_const = 0.0, d_sin = 0.0;
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
    repeat (2000000) @(posedge clk);
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

  // plant, converters and cable, advanced once per clock
  always @(posedge clk) begin
    real d;
    cyc <= cyc + 1;
    d = d_const + d_sin * $sin(2.0 * PI * 5.0e3 * real'(cyc) * 8.0e-9);
    delta = KPL * real'(u_dly[3]) + d;
    u_dly[3] <= u_dly[2]; u_dly[2] <= u_dly[1]; u_dly[1] <= u_dly[0]; u_dly[0] <= rp2_rf_out;
    e_dly[1] <= e_dly[0]; e_dly[0] <= rp1_rf_out2;
    rp1_rf_in <= clip14(delta * real'(rp1_rf_out1) / 8191.0);
    rp2_rf_in <= e_dly[1];
    n_pid_sat   += int'(rp2_status.pid_sat);
    n_int_clamp += int'(rp2_status.int_clamp);
    n_dob_sat   += int'(rp2_status.dob_sat);
    n_out_sat   += int'(rp2_status.out_sat);
  end

  task automatic run(input int n); repeat (n) @(posedge clk); endtask

  // mean and rms of the error seen by RP#2 over n clocks
  task automatic stats(input int n, output real mean, output real rms);
    real s = 0.0, s2 = 0.0;
    for (int k = 0; k < n; k++) begin
      @(posedge clk);
      s += real'(rp2_rf_in);
      s2 += real'(rp2_rf_in) * real'(rp2_rf_in);
    end
    mean = s / n;
    rms = $sqrt(s2 / n);
  endtask

  task automatic expect_true(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    real m_pid, r_pid, m_dob, r_dob, m_rec, r_rec, m_ovl, r_ovl;
    rp1_cfg = '{ftw: FTW_5MHZ, ref_phase: 32'd0, lpf_n: LOCKIN_LPF_N};
    rp2_cfg = '{kp: KP_DEFAULT, ki: KI_DEFAULT, kd: KD_DEFAULT, pf_n: PID_PREFILT_N,
                int_rst: 1'b0, kn: KN_DEFAULT, q_n: DOB_Q_N, dob_en: 1'b0};
    foreach (u_dly[i]) u_dly[i] = '0;
    foreach (e_dly[i]) e_dly[i] = '0;
    rp1_rf_in = '0; rp2_rf_in = '0;
    repeat (4) @(posedge clk);
    #1 rst = 0;

    // A: PID only
    d_const = 1500.0; d_sin = 1500.0;
    run(60000);
    stats(50000, m_pid, r_pid);
    $display("PID only:  mean error %7.2f  rms %7.2f", m_pid, r_pid);
    expect_true("PID removes the mean error", m_pid < 15.0 && m_pid > -15.0);
    expect_true("disturbance visible with PID only", r_pid > 50.0);
    if (m_pid < 15.0 && m_pid > -15.0) n_lock++;

    // B: DOB engaged
    rp2_cfg.dob_en = 1'b1; n_switch++;
    run(60000);
    stats(50000, m_dob, r_dob);
    $display("PID + DOB: mean error %7.2f  rms %7.2f  (%5.1f dB)", m_dob, r_dob,
             20.0 * $log10(r_pid / r_dob));
    expect_true("DOB lowers rms error at least 3x", r_dob * 3.0 < r_pid);
    expect_true("mean error stays small with DOB", m_dob < 15.0 && m_dob > -15.0);

    // C: overload
    d_const = 40000.0;
    stats(30000, m_ovl, r_ovl);
    $display("overload:  mean error %7.2f", m_ovl);
    expect_true("overload drives the error to its limit", m_ovl > 1000.0);

    // D: recovery
    d_const = 1500.0;
    run(100000);
    stats(50000, m_rec, r_rec);
    $display("recovered: mean error %7.2f  rms %7.2f", m_rec, r_rec);
    expect_true("loop relocks after overload", m_rec < 15.0 && m_rec > -15.0 && r_rec < 1.5 * r_dob + 5.0);
    if (m_rec < 15.0 && m_rec > -15.0) n_lock++;

    // back to PID only once more
    rp2_cfg.dob_en = 1'b0; n_switch++;
    run(60000);
    stats(50000, m_pid, r_pid);
    expect_true("PID-only rms returns when the DOB is switched off", r_pid > 3.0 * r_dob);

    $display("events: mode switches %0d, locks %0d, pid_sat %0d, int_clamp %0d, dob_sat %0d, out_sat %0d",
             n_switch, n_lock, n_pid_sat, n_int_clamp, n_dob_sat, n_out_sat);
    expect_true("mode switch happened", n_switch > 0);
    expect_true("lock happened", n_lock > 0);
    expect_true("PID output clipping happened", n_pid_sat > 0);
    expect_true("integrator clamp happened", n_int_clamp > 0);
    expect_true("d_hat clipping happened", n_dob_sat > 0);
    expect_true("output junction clipping happened", n_out_sat > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
