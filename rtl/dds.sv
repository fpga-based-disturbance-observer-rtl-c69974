// dds: direct digital synthesiser for the 5 MHz phase-modulation carrier of the
// modulation-transfer spectroscopy and for the lock-in reference.
//
// How it works: a PHASE_W-bit phase accumulator advances by the tuning word ftw
// every clock, so f = ftw * fclk / 2^PHASE_W (ftw = 171798692 gives 5.000000 MHz at
// 125 MHz). Its top LUT_AW bits address a full-wave sine table of 2^LUT_AW signed
// OUT_W-bit samples, entry k = round((2^(OUT_W-1) - 1) * sin(2 pi k / 2^LUT_AW)),
// i.e. round(8191 * sin(2 pi k / 1024)) at the default size. The table is a constant
// computed at elaboration, so it becomes a ROM in synthesis with no data file.
// The table is read twice per clock: at the accumulator phase for the carrier,
// and at the phase plus ref_phase for the lock-in reference, so the demodulation
// phase can be trimmed to the delay of the optical and analog path.
//
// Interface: carrier goes to the DAC that drives the EOM (RF OUT1); ref_sin goes to the
// demodulator. Timing: the table read is registered, so each output sample shows the
// accumulator value of the clock before; after reset (synchronous, active high) the
// accumulator starts at zero.
//
// The 5 MHz frequency and the two outputs follow the published servo; the
// accumulator width, the table size and amplitude and the phase offset input are
// this design's own choices.
module dds #(
  parameter int unsigned PHASE_W = 32,
  parameter int unsigned LUT_AW  = 10,
  parameter int unsigned OUT_W   = 14
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [PHASE_W-1:0]       ftw,
  input  logic [PHASE_W-1:0]       ref_phase,
  output logic signed [OUT_W-1:0]  carrier,
  output logic signed [OUT_W-1:0]  ref_sin
);

  typedef logic signed [OUT_W-1:0] table_t [2**LUT_AW];

  function automatic table_t make_sine_table();
    table_t t;
    for (int k = 0; k < 2**LUT_AW; k++)
      t[k] = OUT_W'($rtoi($floor(real'(2**(OUT_W-1) - 1)
                     * $sin(2.0 * 3.14159265358979323846 * real'(k) / real'(2**LUT_AW))
                     + 0.5)));
    return t;
  endfunction

  localparam table_t SINE_ROM = make_sine_table();

  logic [PHASE_W-1:0] phase;
  logic [PHASE_W-1:0] ref_ph;

  always_comb ref_ph = phase + ref_phase;

  always_ff @(posedge clk) begin
    if (rst) phase <= '0;
    else     phase <= phase + ftw;
  end

  always_ff @(posedge clk) begin
    carrier <= SINE_ROM[phase[PHASE_W-1 -: LUT_AW]];
    ref_sin <= SINE_ROM[ref_ph[PHASE_W-1 -: LUT_AW]];
  end

endmodule
