// servo_pkg: widths, run-time setting records and the default settings shared by
// the two FPGA designs of the laser-lock servo (the modulation/demodulation board
// RP#1 and the PID + disturbance-observer board RP#2).
//
// The converter width (14 bits), the 125 MHz sample clock, the 5 MHz carrier and the
// filter shift counts n = 4 (lock-in low-pass, about 1.24 MHz), n = 6 (PID pre-filter,
// about 310 kHz) and n = 9 (DOB Q-filter, about 39 kHz) follow the published design,
// as do the example gains Kp = Ki = -200, Kd = -20 and Kn = 400. The scaling of the
// gains (fixed right shifts) and the record layouts are this design's own choices.
package servo_pkg;

  localparam int unsigned CONV_W  = 14;  // ADC and DAC word width
  localparam int unsigned GAIN_W  = 14;  // signed gain words
  localparam int unsigned PHASE_W = 32;  // DDS phase accumulator
  localparam int unsigned SHIFT_W = 4;   // EMA shift counts 0..15

  // f = FTW * 125 MHz / 2^32; round(5/125 * 2^32) gives 5.000000 MHz
  localparam logic [PHASE_W-1:0] FTW_5MHZ = 32'd171798692;

  localparam logic [SHIFT_W-1:0] LOCKIN_LPF_N  = 4'd4;  // 125e6*2^-4/2pi = 1.243 MHz
  localparam logic [SHIFT_W-1:0] PID_PREFILT_N = 4'd6;  // 125e6*2^-6/2pi = 310.8 kHz
  localparam logic [SHIFT_W-1:0] DOB_Q_N       = 4'd9;  // 125e6*2^-9/2pi = 38.9 kHz

  localparam logic signed [GAIN_W-1:0] KP_DEFAULT = -14'sd200;
  localparam logic signed [GAIN_W-1:0] KI_DEFAULT = -14'sd200;
  localparam logic signed [GAIN_W-1:0] KD_DEFAULT = -14'sd20;
  localparam logic signed [GAIN_W-1:0] KN_DEFAULT = 14'sd400;

  typedef logic signed [CONV_W-1:0] sample_t;

  // Settings of RP#1 (modulation and demodulation)
  typedef struct packed {
    logic [PHASE_W-1:0] ftw;        // carrier frequency tuning word
    logic [PHASE_W-1:0] ref_phase;  // lock-in reference phase offset
    logic [SHIFT_W-1:0] lpf_n;      // lock-in EMA low-pass shift
  } rp1_cfg_t;

  // Settings of RP#2 (PID + DOB)
  typedef struct packed {
    logic signed [GAIN_W-1:0] kp;
    logic signed [GAIN_W-1:0] ki;
    logic signed [GAIN_W-1:0] kd;
    logic [SHIFT_W-1:0]       pf_n;     // PID EMA pre-filter shift
    logic                     int_rst;  // hold the integrator at zero
    logic signed [GAIN_W-1:0] kn;       // DOB inverse-plant gain
    logic [SHIFT_W-1:0]       q_n;      // DOB Q-filter shift
    logic                     dob_en;   // DOB engaged
  } rp2_cfg_t;

  // Status flags of RP#2, each high for the cycle in which the event happened
  typedef struct packed {
    logic pid_sat;    // PID sum clipped to the DAC range
    logic int_clamp;  // integrator held at its limit
    logic dob_sat;    // d_hat clipped
    logic out_sat;    // u_out = u_pid - d_hat clipped
  } rp2_status_t;

  // Clip a wide signed value to an n-bit signed range (n <= 63)
  function automatic logic signed [63:0] sat_s(input logic signed [63:0] v, input int unsigned n);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (n - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (n - 1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

endpackage
