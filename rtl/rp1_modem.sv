// rp1_modem: logic of the first board (RP#1), which modulates the spectroscopy
// and demodulates the photodetector signal into the laser-frequency error signal.
//
// How it works: a DDS produces the 5 MHz carrier, sent to RF OUT1 where it drives
// the electro-optic phase modulator on the pump beam. The probe photodetector,
// sampled on RF IN, carries the modulation-transfer signal at the same 5 MHz; the
// lock-in mixer multiplies it by a phase-shifted copy of the carrier and an EMA
// low-pass (shift n = 4 by default, cutoff 1.24 MHz at 125 MHz) removes the 10 MHz
// product and leaves the dispersive error signal, which is clipped to 14 bits and
// sent to RF OUT2 for the second board.
//
// Interface: cfg carries the carrier tuning word, the reference phase offset and
// the low-pass shift; rf_in, rf_out1 and rf_out2 are 14-bit two's-complement
// converter codes at the 125 MHz clock. Timing: rf_out1 lags the phase accumulator
// by two clocks; the path rf_in -> rf_out2 has three register stages (mixer, EMA
// state, output register). rst is synchronous, active high.
//
// The chain DDS -> demodulator -> EMA LPF and the 1.24 MHz cutoff follow the
// published servo; the phase offset, widths and clipping are this design's own.
module rp1_modem
  import servo_pkg::rp1_cfg_t, servo_pkg::SHIFT_W, servo_pkg::sat_s;
#(
  parameter int unsigned W       = 14,
  parameter int unsigned PHASE_W = 32
) (
  input  logic                 clk,
  input  logic                 rst,
  input  rp1_cfg_t             cfg,
  input  logic signed [W-1:0]  rf_in,
  output logic signed [W-1:0]  rf_out1,
  output logic signed [W-1:0]  rf_out2
);

  logic signed [W-1:0] ref_sin;
  logic signed [W:0]   mix;
  logic signed [W:0]   lpf;

  dds #(.PHASE_W(PHASE_W), .LUT_AW(10), .OUT_W(W)) u_dds (
    .clk       (clk),
    .rst       (rst),
    .ftw       (PHASE_W'(cfg.ftw)),
    .ref_phase (PHASE_W'(cfg.ref_phase)),
    .carrier   (rf_out1),
    .ref_sin   (ref_sin)
  );

  lockin_demod #(.IN_W(W), .REF_W(W), .OUT_W(W+1)) u_demod (
    .clk     (clk),
    .rst     (rst),
    .sig     (rf_in),
    .ref_sin (ref_sin),
    .mix     (mix)
  );

  ema_filter #(.W(W+1), .FRAC(16), .SHIFT_W(SHIFT_W)) u_lpf (
    .clk     (clk),
    .rst     (rst),
    .shift_n (cfg.lpf_n),
    .x       (mix),
    .y       (lpf)
  );

  always_ff @(posedge clk) begin
    if (rst) rf_out2 <= '0;
    else     rf_out2 <= W'(sat_s(64'(lpf), W));
  end

endmodule
