// ema_filter: first-order exponential moving average low-pass filter,
//   q[n] = (1 - 2^-n) q[n-1] + 2^-n x[n],
// with the multiplication by alpha = 2^-n done as an arithmetic right shift, so the
// filter needs one adder, one subtractor and a barrel shifter and no multiplier. Its
// cutoff in the small-alpha limit is fc = 2^-n * fclk / (2 pi); at 125 MHz n = 4, 6 and
// 9 give 1.24 MHz, 311 kHz and 38.9 kHz, the three places the servo uses it.
//
// How it works: the state acc holds the output with FRAC extra fractional bits, and
// is updated as acc += ((x << FRAC) - acc) >>> n, which is the recursion above
// rearranged. The guard bits keep small inputs from being lost to truncation when n
// is large. The shift floors toward minus infinity, so acc always stays between its
// old value and the new input and cannot overflow.
//
// Interface: x is a signed W-bit sample every clock; y = acc >>> FRAC is the signed
// W-bit output. shift_n may change at any time (n = 0 passes x straight through).
// Timing: y reflects x one clock after x is presented. rst is synchronous, active
// high, and clears the state.
//
// The EMA form and the shift-for-multiply follow the published servo; the guard
// bits, the rounding (floor) and the reset are this design's own choices.
module ema_filter #(
  parameter int unsigned W       = 14,
  parameter int unsigned FRAC    = 16,
  parameter int unsigned SHIFT_W = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [SHIFT_W-1:0]   shift_n,
  input  logic signed [W-1:0]  x,
  output logic signed [W-1:0]  y
);

  localparam int unsigned AW = W + FRAC;

  logic signed [AW-1:0] acc;
  logic signed [AW:0]   diff;    // one bit wider than acc: x - acc may span 2x range
  logic signed [AW:0]   step;

  always_comb begin
    diff = (AW+1)'(x) <<< FRAC;
    diff = diff - (AW+1)'(acc);
    step = diff >>> shift_n;
  end

  always_ff @(posedge clk) begin
    if (rst) acc <= '0;
    else     acc <= AW'((AW+1)'(acc) + step);
  end

  assign y = W'(acc >>> FRAC);

endmodule
