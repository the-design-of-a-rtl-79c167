// afe_tdl_model -- behavioural model of one analogue front end of the
// converter together with its carry-chain delay line, for simulation only.
//
// It stands for: the 25 MHz clock filtered into a ramp, the LVDS comparator
// and the carry chain with its capture flip-flops. The ramp is an ideal
// triangle of period T_RAMP_PS with its minimum in the middle of each period;
// the comparator output is high for width_ps around that minimum, so a
// pulse covers [start + T/2 - w/2, start + T/2 + w/2) of period
// [PHASE_PS + n*T, PHASE_PS + (n+1)*T). The width of a period is taken from
// width_ps on the first clock that reaches it (announced on new_period /
// period_w). The chain has TAPS taps of random, unequal delay (0.5x to 1.5x
// of a mean chosen so the chain covers 1.2 clock periods); on every clock
// edge taps[i] <= comparator output at (t_clk - delay_to_tap_i). Time is kept
// in integer picoseconds and advances T_CLK_PS per clock, so the model needs
// no simulator delays.
module afe_tdl_model #(
  parameter int unsigned TAPS      = 320,
  parameter int unsigned PHASE_PS  = 0,
  parameter int unsigned SEED      = 1,
  parameter int unsigned T_CLK_PS  = 4000,
  parameter int unsigned T_RAMP_PS = 40000
) (
  input  logic              clk,
  input  int unsigned       width_ps,
  output logic [TAPS-1:0]   taps,
  output logic              new_period,
  output int unsigned       period_w
);

  longint     dly [TAPS];
  longint     t_now;
  longint     n_cur;
  int unsigned w_cur, w_prev;

  function automatic longint floor_div(input longint a, input longint b);
    longint q;
    q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q = q - 1;
    return q;
  endfunction

  function automatic logic level_at(input longint tt);
    longint n, pos, lo, hi;
    int unsigned w;
    n   = floor_div(tt - longint'(PHASE_PS), longint'(T_RAMP_PS));
    pos = tt - longint'(PHASE_PS) - n * longint'(T_RAMP_PS);
    if (n == n_cur)          w = w_cur;
    else if (n == n_cur - 1) w = w_prev;
    else                     w = 0;
    lo = longint'(T_RAMP_PS / 2) - longint'(w / 2);
    hi = lo + longint'(w);
    return (pos >= lo) && (pos < hi);
  endfunction

  initial begin
    int unsigned x, mean, d;
    x    = SEED * 2654435761 + 1;
    mean = (T_CLK_PS * 6) / (5 * TAPS);
    dly[0] = 20;
    for (int i = 1; i < TAPS; i++) begin
      x = x * 1103515245 + 12345;
      d = mean / 2 + ((x >> 8) % (mean + 1));
      dly[i] = dly[i-1] + longint'(d);
    end
    if (dly[TAPS-1] < longint'(T_CLK_PS) + dly[0] + 10)
      $fatal(1, "afe_tdl_model: delay line shorter than a clock period");
    t_now      = 0;
    n_cur      = -2;
    w_cur      = 0;
    w_prev     = 0;
    taps       = '0;
    new_period = 1'b0;
    period_w   = 0;
  end

  always @(posedge clk) begin
    longint n_now;
    logic [TAPS-1:0] snap;
    n_now = floor_div(t_now - longint'(PHASE_PS), longint'(T_RAMP_PS));
    new_period <= 1'b0;
    if (n_now != n_cur) begin
      w_prev = (n_now == n_cur + 1) ? w_cur : 0;
      w_cur  = width_ps;
      n_cur  = n_now;
      new_period <= 1'b1;
      period_w   <= width_ps;
    end
    for (int i = 0; i < TAPS; i++) snap[i] = level_at(t_now - dly[i]);
    taps  <= snap;
    t_now = t_now + longint'(T_CLK_PS);
  end

endmodule
