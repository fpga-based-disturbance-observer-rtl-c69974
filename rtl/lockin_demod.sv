// lockin_demod: mixer of the digital lock-in that turns the 5 MHz detector signal
// of the modulation-transfer spectroscopy into the dispersive error signal.
//
// How it works: the detector sample is multiplied by the reference sine from the
// DDS and the product is scaled by 2^-(REF_W-1), so a full-scale reference has unit
// gain. A component of the input at the reference frequency and in phase with it,
// of amplitude A, gives a DC term A*Aref/2 (about A/2 at full scale) plus a term at
// twice the carrier, which the following EMA low-pass removes.
//
// Interface: sig (IN_W bits) and ref_sin (REF_W bits) are signed samples each clock;
// mix is the signed OUT_W-bit product. Timing: mix is registered, one clock after
// its inputs. rst is synchronous, active high.
//
// Demodulation against the DDS reference follows the published servo; the scaling
// and the single register stage are this design's own choices.
module lockin_demod #(
  parameter int unsigned IN_W  = 14,
  parameter int unsigned REF_W = 14,
  parameter int unsigned OUT_W = 15
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [IN_W-1:0]   sig,
  input  logic signed [REF_W-1:0]  ref_sin,
  output logic signed [OUT_W-1:0]  mix
);

  logic signed [IN_W+REF_W-1:0] prod;

  always_comb prod = sig * ref_sin;

  always_ff @(posedge clk) begin
    if (rst) mix <= '0;
    else     mix <= OUT_W'(prod >>> (REF_W - 1));
  end

endmodule
