// mts_servo_top: the two FPGA designs of the laser-frequency lock side by side.
// RP#1 (rp1_modem) makes the 5 MHz phase-modulation carrier and demodulates the
// modulation-transfer spectroscopy signal into an error signal; RP#2 (rp2_pid_dob)
// turns that error into the laser current correction with a PID controller and a
// disturbance observer in parallel.
//
// How it fits together: the boards are separate FPGAs with their own 125 MHz clocks,
// joined and closed into a loop only through analog paths outside the logic:
//   rp1_rf_out1 -> DAC -> RF amplifier -> EOM (pump phase modulation)
//   photodetector -> bias tee -> LNA -> ADC -> rp1_rf_in
//   rp1_rf_out2 -> DAC -> coax -> ADC -> rp2_rf_in          (the error signal)
//   rp2_rf_out  -> DAC -> laser controller current-modulation input
// so every converter code is a port of this module and no signal crosses between
// the two clock domains inside it.
//
// Interface: 14-bit two's-complement converter codes; rp1_cfg and rp2_cfg are the
// run-time settings (see servo_pkg); rp2_status carries one-cycle clipping flags.
// Timing: see rp1_modem and rp2_pid_dob. Resets are synchronous, active high.
module mts_servo_top
  import servo_pkg::*;
#(
  parameter int unsigned W = 14
) (
  input  logic                 clk1,
  input  logic                 rst1,
  input  rp1_cfg_t             rp1_cfg,
  input  logic signed [W-1:0]  rp1_rf_in,
  output logic signed [W-1:0]  rp1_rf_out1,
  output logic signed [W-1:0]  rp1_rf_out2,

  input  logic                 clk2,
  input  logic                 rst2,
  input  rp2_cfg_t             rp2_cfg,
  input  logic signed [W-1:0]  rp2_rf_in,
  output logic signed [W-1:0]  rp2_rf_out,
  output rp2_status_t          rp2_status
);

  rp1_modem #(.W(W), .PHASE_W(PHASE_W)) u_rp1 (
    .clk     (clk1),
    .rst     (rst1),
    .cfg     (rp1_cfg),
    .rf_in   (rp1_rf_in),
    .rf_out1 (rp1_rf_out1),
    .rf_out2 (rp1_rf_out2)
  );

  rp2_pid_dob #(.W(W)) u_rp2 (
    .clk    (clk2),
    .rst    (rst2),
    .cfg    (rp2_cfg),
    .rf_in  (rp2_rf_in),
    .rf_out (rp2_rf_out),
    .status (rp2_status)
  );

endmodule
