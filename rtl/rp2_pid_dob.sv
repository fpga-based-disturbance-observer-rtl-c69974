// rp2_pid_dob: logic of the second board (RP#2), the laser-frequency servo: a PID
// controller with a disturbance observer (DOB) in parallel,
//   u_out = u_pid - d_hat,   d_hat = Q [ Kn * y - u_out ].
//
// How it works: the error sample from RF IN feeds both the PID and, as the measured
// output y, the DOB gain Kn (the error and y are the same signal here). The output
// junction subtracts the DOB's disturbance estimate from the PID output, clips the
// result to the 14-bit DAC range and registers it; that register drives RF OUT
// (the laser controller's current-modulation input) and is fed back into the DOB
// as u_out, closing the inner disturbance-rejection loop. With cfg.dob_en low the
// DOB is held cleared and the board is a plain PID servo.
//
// Interface: cfg holds the gains Kp, Ki, Kd, Kn, the pre-filter and Q-filter shifts,
// an integrator reset and the DOB enable; rf_in and rf_out are 14-bit two's-
// complement converter codes at 125 MHz; status carries one-cycle flags for
// clipping in the PID, the integrator, the DOB and the output junction.
// Timing: rf_in -> rf_out is four clocks through the PID and six through the DOB
// (its five-clock pipeline plus the output register). rst is synchronous, active
// high.
//
// The structure (PID and DOB in parallel, u_out = u_pid - d_hat fed back into the
// DOB) follows the published servo; clipping, the enable and the status flags are
// this design's own choices.
module rp2_pid_dob
  import servo_pkg::*;
#(
  parameter int unsigned W = 14
) (
  input  logic                 clk,
  input  logic                 rst,
  input  rp2_cfg_t             cfg,
  input  logic signed [W-1:0]  rf_in,
  output logic signed [W-1:0]  rf_out,
  output rp2_status_t          status
);

  logic signed [W-1:0] u_pid, d_hat, u_out;
  logic signed [W+1:0] junction;
  logic                pid_sat, int_clamp, dob_sat;

  pid_controller #(.W(W), .GAIN_W(GAIN_W)) u_pid_ctl (
    .clk           (clk),
    .rst           (rst),
    .e             (rf_in),
    .kp            (cfg.kp),
    .ki            (cfg.ki),
    .kd            (cfg.kd),
    .pf_n          (cfg.pf_n),
    .int_rst       (cfg.int_rst),
    .u_pid         (u_pid),
    .sat_hit       (pid_sat),
    .int_clamp_hit (int_clamp)
  );

  dob #(.W(W), .KN_W(GAIN_W), .KN_SHIFT(8)) u_dob (
    .clk     (clk),
    .rst     (rst),
    .en      (cfg.dob_en),
    .y       (rf_in),
    .u_out   (u_out),
    .kn      (cfg.kn),
    .q_n     (cfg.q_n),
    .d_hat   (d_hat),
    .sat_hit (dob_sat)
  );

  always_comb junction = (W+2)'(u_pid) - (W+2)'(d_hat);

  always_ff @(posedge clk) begin
    if (rst) begin
      u_out  <= '0;
      status <= '0;
    end else begin
      u_out            <= W'(sat_s(64'(junction), W));
      status.out_sat   <= (sat_s(64'(junction), W) != 64'(junction));
      status.pid_sat   <= pid_sat;
      status.int_clamp <= int_clamp;
      status.dob_sat   <= dob_sat;
    end
  end

  assign rf_out = u_out;

endmodule
