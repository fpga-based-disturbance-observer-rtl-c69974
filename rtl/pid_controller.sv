// pid_controller: the conventional servo of the second board (RP#2), a parallel
// proportional + integral + derivative controller, C(s) = Kp + Ki/s + Kd s, in
// sampled form.
//
// How it works: the error is first smoothed by an EMA pre-filter (shift pf_n, 6 by
// default, cutoff 311 kHz at 125 MHz). Then, in one register stage,
//   P = (kp * e) >>> KP_SHIFT,
//   I accumulates ki * e in an INT_W-bit register that is clamped at its range
//     (anti-windup) and is read as acc >>> KI_SHIFT,
//   D = (kd * (e[n] - e[n-1])) >>> KD_SHIFT, a first difference.
// A second stage adds the three paths and clips the sum to the W-bit DAC range.
//
// Interface: e is the signed W-bit error each clock; kp, ki, kd are signed GAIN_W-
// bit gains (the published settings are Kp = Ki = -200, Kd = -20); int_rst holds the
// integrator at zero; u_pid is the signed W-bit control output. sat_hit and
// int_clamp_hit are high in a cycle where the output was clipped or the integrator
// held at its limit. Timing: three clocks from e to u_pid (pre-filter state, path
// registers, sum register). rst is synchronous, active high.
//
// The parallel P/I/D structure, the accumulator integrator, the first-difference
// derivative and the EMA pre-filter follow the published servo; the gain scaling
// shifts, the widths, the clamping and the reset are this design's own choices.
module pid_controller
  import servo_pkg::SHIFT_W, servo_pkg::sat_s;
#(
  parameter int unsigned W        = 14,
  parameter int unsigned GAIN_W   = 14,
  parameter int unsigned KP_SHIFT = 12,
  parameter int unsigned KI_SHIFT = 18,
  parameter int unsigned KD_SHIFT = 10,
  parameter int unsigned INT_W    = 32
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic signed [W-1:0]       e,
  input  logic signed [GAIN_W-1:0]  kp,
  input  logic signed [GAIN_W-1:0]  ki,
  input  logic signed [GAIN_W-1:0]  kd,
  input  logic [SHIFT_W-1:0]        pf_n,
  input  logic                      int_rst,
  output logic signed [W-1:0]       u_pid,
  output logic                      sat_hit,
  output logic                      int_clamp_hit
);

  localparam int unsigned PW = W + GAIN_W + 1;   // product of a gain and a difference

  logic signed [W-1:0]     e_f;       // pre-filtered error
  logic signed [W-1:0]     e_prev;
  logic signed [PW-1:0]    p_r, d_r;
  logic signed [INT_W-1:0] int_acc;
  logic signed [PW-1:0]    p_full, d_full, i_prod;
  logic signed [63:0]      int_next, sum;

  ema_filter #(.W(W), .FRAC(16), .SHIFT_W(SHIFT_W)) u_prefilt (
    .clk     (clk),
    .rst     (rst),
    .shift_n (pf_n),
    .x       (e),
    .y       (e_f)
  );

  always_comb begin
    p_full   = PW'(kp) * PW'(e_f);
    d_full   = PW'(kd) * (PW'(e_f) - PW'(e_prev));
    i_prod   = PW'(ki) * PW'(e_f);
    int_next = 64'(int_acc) + 64'(i_prod);
    sum      = 64'(p_r) + 64'(int_acc >>> KI_SHIFT) + 64'(d_r);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      e_prev        <= '0;
      p_r           <= '0;
      d_r           <= '0;
      int_acc       <= '0;
      int_clamp_hit <= 1'b0;
      u_pid         <= '0;
      sat_hit       <= 1'b0;
    end else begin
      e_prev <= e_f;
      p_r    <= p_full >>> KP_SHIFT;
      d_r    <= d_full >>> KD_SHIFT;
      if (int_rst) begin
        int_acc       <= '0;
        int_clamp_hit <= 1'b0;
      end else begin
        int_acc       <= INT_W'(sat_s(int_next, INT_W));
        int_clamp_hit <= (sat_s(int_next, INT_W) != int_next);
      end
      u_pid   <= W'(sat_s(sum, W));
      sat_hit <= (sat_s(sum, W) != sum);
    end
  end

endmodule
