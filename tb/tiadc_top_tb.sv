// tiadc_top_tb -- end-to-end test of the time-interleaved converter at its
// default size (320 taps, 2**16-edge calibration, 4096-entry table, 16-sample
// integration window).
//
// Two behavioural front ends (afe_tdl_model) stand for the ramps, comparators
// and carry chains of the two channels; channel 1 is 20 ns + 3 ns behind
// channel 0 (a routing skew). The analogue input v (mV) is turned into a
// pulse width per ramp period by a quasi-triangular conversion curve
//     w = 40 ns * h(u),  h(u) = u + 0.15 u (1 - u)
// with u = v / 3300 on channel 0 and u = 1.03 v / 3300 - 0.02 on channel 1
// (a gain and offset mismatch). The table is built here from the inverse of
// channel 0's curve, 0.5 mV per code: lut[x] = 6600 * h^-1(x / 5120), and
// channel 1 gets gain 16384 / 1.03 and offset 132 / 1.03. Every output
// sample must then equal 2 * v (v being the input level of its ramp period,
// recovered from the width the model used)
// within 16 codes (8 mV), whichever channel took it.
//
// Phases: (1) random widths, uniform over 8..32 ns, while both TDCs
// calibrate: the half-width then spans exactly three clock periods, so the
// edges are spread evenly over the clock period as a code density test
// needs, and pulses and gaps stay longer than one clock; (2) a 1 MHz sine of
// 1.6 V peak to peak (as in a dynamic test); (3) out-of-range widths that make
// the two channels finish pulses in the same clock and overflow the table
// range; (4) negative scintillation-like pulses on a 2.4 V baseline,
// integrated with the pedestal at 2.4 V, each energy compared with the same
// integration of the ideal codes within 16 x 16 codes. The test counts the
// mechanisms: calibration runs, samples of each channel, strict alternation,
// same-clock ordering, table clipping, events; any that never happened is a
// failure.
`timescale 1ns/1ps
module tiadc_top_tb;
  import tiadc_pkg::*;

  localparam int unsigned TAPS   = 320;
  localparam int unsigned WINDOW = 16;
  localparam real K_NL = 0.15;
  localparam int  TOL  = 16;

  logic clk = 1'b0, rst = 1'b1;
  logic [TAPS-1:0] taps0, taps1;
  logic cal_start = 1'b0;
  logic lut_we = 1'b0;
  logic [LUT_ADDR_BITS-1:0] lut_waddr = '0;
  logic [LUT_DATA_BITS-1:0] lut_wdata = '0;
  logic [1:0][GAIN_BITS-1:0] gain;
  logic [1:0][SAMPLE_BITS-1:0] offset;
  logic [SAMPLE_BITS-1:0] pedestal = 16'd4800, threshold = 16'hFFFF;
  logic neg_polarity = 1'b1;
  logic [1:0] cal_busy, cal_ready;
  width_smp_t width_out;
  sample_t sample_out;
  logic energy_valid, integ_busy;
  logic signed [ENERGY_BITS-1:0] energy;
  logic [31:0] events;

  int unsigned wps0 = 20000, wps1 = 20000;
  logic np0, np1;
  int unsigned pw0, pw1;

  int checks = 0, failures = 0;
  always #2 clk = ~clk;

  afe_tdl_model #(.TAPS(TAPS), .PHASE_PS(0),     .SEED(11)) u_afe0 (
    .clk, .width_ps(wps0), .taps(taps0), .new_period(np0), .period_w(pw0));
  afe_tdl_model #(.TAPS(TAPS), .PHASE_PS(23000), .SEED(23)) u_afe1 (
    .clk, .width_ps(wps1), .taps(taps1), .new_period(np1), .period_w(pw1));

  tiadc_top u_dut (
    .clk, .rst, .tdl_taps0(taps0), .tdl_taps1(taps1),
    .cal_start, .cal_continuous(1'b0),
    .lut_we, .lut_waddr, .lut_wdata, .gain, .offset,
    .pedestal, .threshold, .neg_polarity,
    .cal_busy, .cal_ready, .width_out, .sample_out,
    .energy_valid, .energy, .events, .integ_busy
  );

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL %s", what);
    end
  endtask

  // Conversion curves of the two channels (ps) and the table formula.
  function automatic real h(input real u);
    return u + K_NL * u * (1.0 - u);
  endfunction
  function automatic real h_inv(input real y);
    return ((1.0 + K_NL) - $sqrt((1.0 + K_NL) * (1.0 + K_NL) - 4.0 * K_NL * y)) / (2.0 * K_NL);
  endfunction
  function automatic int unsigned width_of(input int c, input real v_mv);
    real u;
    u = (c == 0) ? v_mv / 3300.0 : 1.03 * v_mv / 3300.0 - 0.02;
    if (u < 0.0) u = 0.0;
    if (u > 1.0) u = 1.0;
    return int'(40000.0 * h(u));
  endfunction

  // Input waveform, selected by phase.
  typedef enum int {PH_CAL, PH_SINE, PH_EXTREME, PH_PULSE} phase_e;
  phase_e phase = PH_CAL;
  longint cyc = 0;
  real    v_now = 1650.0;
  real    pulse_amp = 0.0;
  int     next_pulse = 0;

  always @(posedge clk) begin
    real t_ns;
    cyc <= cyc + 1;
    t_ns = real'(cyc) * 4.0;
    unique case (phase)
      PH_CAL:     v_now = 1650.0;
      PH_SINE:    v_now = 1650.0 + 800.0 * $sin(2.0 * 3.14159265358979 * t_ns / 1000.0);
      PH_PULSE: begin
        if (cyc >= next_pulse) begin
          pulse_amp  = 200.0 + real'($urandom % 1300);
          next_pulse = int'(cyc) + 250;
        end else pulse_amp = pulse_amp * 0.935;   // 60 ns decay per 4 ns step
        v_now = 2400.0 - pulse_amp;
      end
      default: v_now = 1650.0;
    endcase
    if (phase == PH_CAL) begin
      wps0 <= 8000 + ($urandom % 24000);
      wps1 <= 8000 + ($urandom % 24000);
    end else if (phase == PH_EXTREME) begin
      wps0 <= 5000;
      wps1 <= 35000;
    end else begin
      wps0 <= width_of(0, v_now);
      wps1 <= width_of(1, v_now);
    end
  end

  // Expected codes per channel, pushed when a ramp period latches its width.
  typedef struct { int code; bit check; } exp_t;
  exp_t q [2][$];
  bit   checking = 1'b0;
  longint phase_cyc = 0;

  // Each channel is synchronised on its first ramp period after checking
  // starts; outputs of that channel in the next 10 clocks still belong to
  // the period before and are skipped.
  bit     synced [2] = '{0, 0};
  longint sync_cyc [2];
  always @(posedge clk) begin
    if (checking) begin
      for (int c = 0; c < 2; c++) begin
        if ((c == 0) ? np0 : np1) begin
          if (!synced[c]) begin
            q[c].delete();
            synced[c]   = 1'b1;
            sync_cyc[c] = cyc;
          end
          q[c].push_back('{code: int'(2.0 * v_of_width(c, (c == 0) ? pw0 : pw1)), check: phase != PH_EXTREME});
        end
      end
    end
  end

  // The input level of a ramp period, recovered from the width the model
  // latched for it by inverting that channel's conversion curve.
  function automatic real v_of_width(input int c, input int unsigned w_ps);
    real u;
    u = h_inv(real'(w_ps) / 40000.0);
    return (c == 0) ? 3300.0 * u : (u + 0.02) * 3300.0 / 1.03;
  endfunction

  // Output checks.
  int n_chan [2] = '{0, 0};
  int n_alt = 0, n_noalt = 0;
  int n_hold = 0, n_clip = 0, n_cal = 0, n_ev = 0;
  int last_chan = -1;
  int max_err = 0;
  // Reference integration of the ideal codes.
  bit     r_busy = 0;
  int     r_n = 0;
  longint r_acc = 0;
  longint r_q[$];

  always @(posedge clk) begin
    if (u_dut.u_width.hold_valid) n_hold++;
    if (width_out.valid && width_out.width > 13'd4095) n_clip++;
    if (checking && sample_out.valid && synced[sample_out.chan]
        && cyc > sync_cyc[sample_out.chan] + 10) begin
      int c;
      exp_t e;
      c = int'(sample_out.chan);
      n_chan[c]++;
      if (last_chan >= 0 && phase != PH_EXTREME && cyc > phase_cyc + 40) begin
        if (c != last_chan) n_alt++; else n_noalt++;
      end
      last_chan = c;
      if (q[c].size() == 0) check(1'b0, $sformatf("sample on ch%0d without a period", c));
      else begin
        int err;
        e = q[c].pop_front();
        if (e.check) begin
          err = int'(sample_out.value) - e.code;
          if (err < 0) err = -err;
          if (err > max_err) max_err = err;
          check(err <= TOL, $sformatf("ch%0d sample %0d expected %0d", c, sample_out.value, e.code));
        end
        if (phase == PH_PULSE) begin
          longint amp;
          amp = longint'(pedestal) - longint'(e.code);
          if (!r_busy && amp > longint'(threshold)) begin
            r_busy = 1; r_n = 0; r_acc = 0;
          end
          if (r_busy) begin
            r_acc += amp;
            r_n++;
            if (r_n == WINDOW) begin
              r_q.push_back(r_acc);
              r_busy = 0;
            end
          end
        end
      end
    end
    if (!rst && energy_valid) begin
      n_ev++;
      if (r_q.size() == 0) check(1'b0, "energy without reference event");
      else begin
        longint r, d;
        r = r_q.pop_front();
        d = longint'(energy) - r;
        if (d < 0) d = -d;
        check(d <= WINDOW * TOL, $sformatf("energy %0d reference %0d", energy, r));
      end
    end
  end

  initial begin
    real u;
    gain[0] = 16'd16384;
    gain[1] = 16'(int'(16384.0 / 1.03));
    offset[0] = 16'd0;
    offset[1] = 16'(int'(132.0 / 1.03));
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    repeat (TAPS + 4) @(posedge clk);
    @(negedge clk) cal_start = 1'b1;
    @(negedge clk) cal_start = 1'b0;
    // Load the table while the TDCs calibrate.
    for (int x = 0; x < 4096; x++) begin
      int code;
      @(negedge clk);
      u = h_inv(real'(x) / 5120.0);
      code = int'(6600.0 * u);
      if (code > 8191) code = 8191;
      lut_we = 1'b1;
      lut_waddr = LUT_ADDR_BITS'(x);
      lut_wdata = LUT_DATA_BITS'(code);
    end
    @(negedge clk) lut_we = 1'b0;
    while (cal_ready != 2'b11) @(posedge clk);
    n_cal = 2;
    $display("calibration done at cycle %0d", cyc);

    phase = PH_SINE;
    repeat (20) @(posedge clk);
    phase_cyc = cyc;
    checking = 1'b1;
    repeat (10000) @(posedge clk);
    $display("sine: samples ch0 %0d ch1 %0d, max error %0d codes", n_chan[0], n_chan[1], max_err);

    phase = PH_EXTREME;
    phase_cyc = cyc;
    repeat (2000) @(posedge clk);

    phase = PH_PULSE;
    phase_cyc = cyc;
    repeat (100) @(posedge clk);
    threshold = 16'd100;
    repeat (20000) @(posedge clk);
    threshold = 16'hFFFF;
    repeat (200) @(posedge clk);

    $display("samples ch0 %0d ch1 %0d alt %0d non-alt %0d hold %0d clip %0d events %0d max err %0d",
             n_chan[0], n_chan[1], n_alt, n_noalt, n_hold, n_clip, n_ev, max_err);
    check(n_cal == 2, "both TDCs calibrated");
    check(n_chan[0] > 1000 && n_chan[1] > 1000, "both channels delivered samples");
    check(n_noalt == 0 && n_alt > 2000, "channels alternate in the 50 MS/s stream");
    check(n_hold > 0, "same-clock ordering happened");
    check(n_clip > 0, "table clipping happened");
    check(n_ev > 50, "energy events happened");
    check(events == 32'(n_ev), "event counter");
    check(r_q.size() == 0, "reference events all matched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (450000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
