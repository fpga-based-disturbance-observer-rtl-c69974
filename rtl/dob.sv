// dob: digital disturbance observer with a scalar inverse plant model and a
// first-order EMA Q-filter,
//   d_hat = Q [ Kn * y - u_out ],   Q: q[n] = (1 - 2^-n) q[n-1] + 2^-n x[n].
// Subtracting d_hat from the PID output cancels the lumped disturbance on the loop
// below the Q-filter cutoff fc = 2^-n fclk / (2 pi) (n = 9 gives 38.9 kHz at 125 MHz)
// and leaves the loop unchanged above it.
//
// How it works: the loop uses no hardware multiplier. Kn * y is formed by adding a
// copy of y shifted left by i for every set bit i of Kn (the top bit, the sign of a
// two's-complement Kn, subtracts). The partial products are summed in two halves in
// one stage and the halves added in the next, where the sum is scaled by 2^-KN_SHIFT
// (Kn = 2^KN_SHIFT = 256 is unit gain) and u_out, delayed to the same sample time as
// y, is subtracted. The raw estimate x goes through the EMA Q-filter, whose output is
// clipped to W bits and registered as d_hat.
//
// Pipeline (LATENCY = 5 clocks = 40 ns at 125 MHz, from y to d_hat):
//   1 input registers y, u_out      2 half sums of the partial products
//   3 x = (Kn*y >>> KN_SHIFT) - u_out   4 Q-filter state   5 clipped d_hat
//
// Interface: y and u_out are signed W-bit samples each clock; kn is a signed KN_W-
// bit gain (400 in the published setting); q_n is the Q-filter shift. en low clears
// every stage and forces d_hat to zero (PID-only operation); raising it engages the
// observer from an empty state. sat_hit is high in a cycle where d_hat was clipped.
// rst is synchronous, active high.
//
// The estimate, the scalar Kn, the EMA Q-filter with shift-for-multiply, the
// multiplier-free arithmetic and the five-clock latency follow the published servo;
// the Kn scaling, the split of the stages and the enable are this design's own.
module dob
  import servo_pkg::*;
#(
  parameter int unsigned W        = 14,
  parameter int unsigned KN_W     = 14,
  parameter int unsigned KN_SHIFT = 8,
  parameter int unsigned FRAC     = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     en,
  input  logic signed [W-1:0]      y,
  input  logic signed [W-1:0]      u_out,
  input  logic signed [KN_W-1:0]   kn,
  input  logic [SHIFT_W-1:0]       q_n,
  output logic signed [W-1:0]      d_hat,
  output logic                     sat_hit
);

  localparam int unsigned PW      = W + KN_W;            // full product Kn*y
  localparam int unsigned XW      = PW - KN_SHIFT + 1;   // x = scaled product - u_out
  localparam int unsigned SPLIT   = KN_W / 2;            // bits [SPLIT-1:0] in the low half

  logic                  clr;
  logic signed [W-1:0]   y1, u1, u2;
  logic signed [PW-1:0]  pp_lo_c, pp_hi_c, pp_lo, pp_hi;
  logic signed [PW-1:0]  prod;
  logic signed [XW-1:0]  x3, q4;

  assign clr = rst || !en;

  // Shift-and-add partial products of Kn * y1
  always_comb begin
    pp_lo_c = '0;
    pp_hi_c = '0;
    for (int i = 0; i < KN_W; i++) begin
      if (kn[i]) begin
        if (i == KN_W - 1)  pp_hi_c = pp_hi_c - (PW'(y1) <<< i);
        else if (i < SPLIT) pp_lo_c = pp_lo_c + (PW'(y1) <<< i);
        else                pp_hi_c = pp_hi_c + (PW'(y1) <<< i);
      end
    end
    prod = pp_lo + pp_hi;
  end

  always_ff @(posedge clk) begin
    if (clr) begin
      y1    <= '0;
      u1    <= '0;
      pp_lo <= '0;
      pp_hi <= '0;
      u2    <= '0;
      x3    <= '0;
    end else begin
      y1    <= y;                                         // stage 1
      u1    <= u_out;
      pp_lo <= pp_lo_c;                                   // stage 2
      pp_hi <= pp_hi_c;
      u2    <= u1;
      x3    <= XW'(prod >>> KN_SHIFT) - XW'(u2);          // stage 3
    end
  end

  // Stage 4: Q-filter
  ema_filter #(.W(XW), .FRAC(FRAC), .SHIFT_W(SHIFT_W)) u_qfilt (
    .clk     (clk),
    .rst     (clr),
    .shift_n (q_n),
    .x       (x3),
    .y       (q4)
  );

  // Stage 5: clipped estimate
  always_ff @(posedge clk) begin
    if (clr) begin
      d_hat   <= '0;
      sat_hit <= 1'b0;
    end else begin
      d_hat   <= W'(sat_s(64'(q4), W));
      sat_hit <= (sat_s(64'(q4), W) != 64'(q4));
    end
  end

endmodule
