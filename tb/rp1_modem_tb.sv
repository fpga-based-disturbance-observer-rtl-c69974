// rp1_modem_tb: self-checking test of the modulation/demodulation board.
// The photodetector input is modelled as the board's own 5 MHz carrier scaled by a
// signed amplitude A (a modulation-transfer signal in phase with the carrier, as
// near a line centre with detuning proportional to A). With the reference phase at
// zero the demodulated error settles to about A/2 (mean of A sin^2) and flips sign
// with A; with a quarter-turn reference it settles near zero, and over a sweep of
// the reference phase phi it follows (A/2) cos(phi). The mean of RF OUT2
// over 50 clocks (ten carrier periods) is checked, and the carrier on RF OUT1 is
// checked to have 5 MHz (two sign changes per 25 clocks).
module rp1_modem_tb;
  timeunit 1ns; timeprecision 100ps;
  import servo_pkg::*;
  logic clk = 0, rst = 1;
  rp1_cfg_t cfg;
  logic signed [13:0] rf_in, rf_out1, rf_out2;
  int checks = 0, failures = 0;
  int amp;

  rp1_modem dut (.*);

  always #4 clk = ~clk;

  // detector model: A * carrier / 8191, applied combinationally
  always_comb rf_in = 14'((amp * int'(rf_out1)) / 8191);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input string what, input real expect_mean, input real tol);
    real acc;
    repeat (400) @(posedge clk);          // settle (EMA time constant is 16 clocks)
    acc = 0.0;
    for (int k = 0; k < 50; k++) begin @(posedge clk); #1 acc += real'(rf_out2); end
    acc = acc / 50.0;
    checks++;
    if (acc > expect_mean + tol || acc < expect_mean - tol) begin
      failures++;
      $display("FAIL %s: mean %f expected %f +- %f", what, acc, expect_mean, tol);
    end
  endtask

  initial begin
    int ncross;
    logic signed [13:0] prev;
    cfg = '{ftw: FTW_5MHZ, ref_phase: 32'd0, lpf_n: LOCKIN_LPF_N};
    amp = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    measure("zero input", 0.0, 2.0);
    amp = 4000;  measure("A=+4000", 2000.0, 60.0);
    amp = -4000; measure("A=-4000", -2000.0, 60.0);
    amp = 8000;  measure("A=+8000", 4000.0, 120.0);
    cfg.ref_phase = 32'h4000_0000;
    measure("quadrature", 0.0, 60.0);
    // reference phase sweep: error = (A/2) cos(phi)
    amp = 6000;
    for (int k = 0; k < 16; k++) begin
      cfg.ref_phase = 32'(k) << 28;
      measure($sformatf("phase %0d/16", k), 3000.0 * $cos(2.0 * 3.14159265358979 * real'(k) / 16.0), 100.0);
    end
    // carrier frequency
    ncross = 0; prev = rf_out1;
    for (int k = 0; k < 2500; k++) begin
      @(posedge clk); #1;
      if ((prev < 0) != (rf_out1 < 0)) ncross++;
      prev = rf_out1;
    end
    checks++;
    if (ncross < 199 || ncross > 201) begin
      failures++;
      $display("FAIL carrier sign changes %0d in 2500 clocks", ncross);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
