// tiadc_linearity_tb -- energy linearity of the converter for SiPM-like
// pulses over a large dynamic range.
//
// The converter at its default size digitises positive pulses that sit on a
// 0.7 V DC offset: an instantaneous rise to 0.7 V + A and an exponential decay
// with a 60 ns time constant, one pulse per microsecond. The amplitude A steps
// from 100 mV to 1.8 V in 100 mV steps, with 16 pulses per amplitude. White
// noise of 2 mV rms is added to the input; that level is an assumption, chosen
// so that the spread is not zero. The energy integrator runs with positive
// polarity, the pedestal at the code of 0.7 V and a threshold of 100 codes
// (50 mV). The front-end model and the
// correction settings are those of tiadc_sine_tb: the table maps widths to
// 0.5 mV per code, and channel 1's gain and offset mismatch is corrected.
//
// For each amplitude the test takes the mean and the spread of the 16
// energies. It fits a straight line to the means and reports the integral
// non-linearity of each point in percent of the fitted full-scale energy, and
// the resolution as FWHM / mean (2.355 sigma / mean). It checks that every
// pulse gave exactly one energy, that all energies are positive and grow with
// A, that the INL stays within +-1 %, and that the resolution is better than
// 6 % from 200 mV up. The spread comes from the added noise and the TDC
// quantisation; the model has no other analogue noise, so the resolution
// check is a loose bound and says little about real hardware.
`timescale 1ns/1ps
module tiadc_linearity_tb;
  import tiadc_pkg::*;

  localparam int unsigned TAPS = 320;
  localparam real K_NL = 0.15;
  localparam int NA = 18;            // amplitudes 100 .. 1800 mV
  localparam int NREP = 16;          // pulses per amplitude
  localparam real NOISE_MV = 2.0;    // rms input noise
  localparam int PERIOD = 250;       // clocks between pulses (1 us)
  localparam real V_OFS = 700.0;     // DC offset, mV

  logic clk = 1'b0, rst = 1'b1;
  logic [TAPS-1:0] taps0, taps1;
  logic cal_start = 1'b0;
  logic lut_we = 1'b0;
  logic [LUT_ADDR_BITS-1:0] lut_waddr = '0;
  logic [LUT_DATA_BITS-1:0] lut_wdata = '0;
  logic [1:0][GAIN_BITS-1:0] gain;
  logic [1:0][SAMPLE_BITS-1:0] offset;
  logic [SAMPLE_BITS-1:0] threshold = 16'hFFFF;
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

  afe_tdl_model #(.TAPS(TAPS), .PHASE_PS(0),     .SEED(5))  u_afe0 (
    .clk, .width_ps(wps0), .taps(taps0), .new_period(np0), .period_w(pw0));
  afe_tdl_model #(.TAPS(TAPS), .PHASE_PS(20000), .SEED(17)) u_afe1 (
    .clk, .width_ps(wps1), .taps(taps1), .new_period(np1), .period_w(pw1));

  tiadc_top u_dut (
    .clk, .rst, .tdl_taps0(taps0), .tdl_taps1(taps1),
    .cal_start, .cal_continuous(1'b0),
    .lut_we, .lut_waddr, .lut_wdata, .gain, .offset,
    .pedestal(16'(int'(2.0 * V_OFS))), .threshold, .neg_polarity(1'b0),
    .cal_busy, .cal_ready, .width_out, .sample_out,
    .energy_valid, .energy, .events, .integ_busy
  );

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

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

  // Roughly Gaussian noise: the sum of 12 uniform variables, minus 6.
  function automatic real noise_mv();
    real acc = 0.0;
    for (int i = 0; i < 12; i++) acc += real'($urandom % 10000) / 10000.0;
    return NOISE_MV * (acc - 6.0);
  endfunction

  // Stimulus: random widths while calibrating, then the pulse train.
  bit     calibrating = 1'b1;
  bit     pulsing = 1'b0;
  real    v_pulse = 0.0;         // pulse part of the input, mV
  int     pulses_sent = 0;
  longint cyc = 0, next_pulse = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (calibrating) begin
      wps0 <= 8000 + ($urandom % 24000);
      wps1 <= 8000 + ($urandom % 24000);
    end else begin
      if (pulsing && cyc >= next_pulse) begin
        v_pulse = 100.0 * real'(pulses_sent / NREP + 1);
        next_pulse = cyc + PERIOD;
        pulses_sent++;
      end else v_pulse = v_pulse * 0.935;   // exp(-4 ns / 60 ns)
      wps0 <= width_of(0, V_OFS + v_pulse + noise_mv());
      wps1 <= width_of(1, V_OFS + v_pulse + noise_mv());
    end
  end

  // Energies in arrival order.
  real e_got [$];
  always @(posedge clk) begin
    if (!rst && energy_valid) e_got.push_back(real'(energy));
  end

  initial begin
    real mean [NA], sd [NA], ampl [NA];
    real sx, sy, sxx, sxy, slope, icpt, fs, inl, inl_max, res, d;
    int  n0;
    gain[0] = 16'd16384;
    gain[1] = 16'(int'(16384.0 / 1.03));
    offset[0] = 16'd0;
    offset[1] = 16'(int'(132.0 / 1.03));
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    repeat (TAPS + 4) @(posedge clk);
    @(negedge clk) cal_start = 1'b1;
    @(negedge clk) cal_start = 1'b0;
    for (int x = 0; x < 4096; x++) begin
      int code;
      @(negedge clk);
      code = int'(6600.0 * h_inv(real'(x) / 5120.0));
      if (code > 8191) code = 8191;
      lut_we = 1'b1;
      lut_waddr = LUT_ADDR_BITS'(x);
      lut_wdata = LUT_DATA_BITS'(code);
    end
    @(negedge clk) lut_we = 1'b0;
    while (cal_ready != 2'b11) @(posedge clk);
    calibrating = 1'b0;
    repeat (100) @(posedge clk);
    threshold = 16'd100;
    n0 = int'(events);

    // One continuous train: PERIOD is a whole number of sampling periods, so
    // every pulse meets the same sampling phase.
    for (int a = 0; a < NA; a++) ampl[a] = 100.0 * real'(a + 1);
    next_pulse = cyc + 5;
    pulsing = 1'b1;
    while (pulses_sent < NA * NREP) @(posedge clk);
    pulsing = 1'b0;
    repeat (PERIOD) @(posedge clk);

    check(e_got.size() == NA * NREP,
          $sformatf("%0d energies for %0d pulses", e_got.size(), NA * NREP));
    check(int'(events) - n0 == NA * NREP,
          $sformatf("event counter advanced by %0d", int'(events) - n0));
    if (e_got.size() == NA * NREP) begin
      for (int a = 0; a < NA; a++) begin
        mean[a] = 0.0;
        for (int k = 0; k < NREP; k++) begin
          check(e_got[a * NREP + k] > 0.0, "energy positive");
          mean[a] += e_got[a * NREP + k];
        end
        mean[a] /= real'(NREP);
        sd[a] = 0.0;
        for (int k = 0; k < NREP; k++) begin
          d = e_got[a * NREP + k] - mean[a];
          sd[a] += d * d;
        end
        sd[a] = $sqrt(sd[a] / real'(NREP - 1));
        if (a > 0) check(mean[a] > mean[a-1], $sformatf("energy grows at %0.0f mV", ampl[a]));
      end
      sx = 0.0; sy = 0.0; sxx = 0.0; sxy = 0.0;
      for (int a = 0; a < NA; a++) begin
        sx += ampl[a]; sy += mean[a];
        sxx += ampl[a] * ampl[a]; sxy += ampl[a] * mean[a];
      end
      slope = (real'(NA) * sxy - sx * sy) / (real'(NA) * sxx - sx * sx);
      icpt  = (sy - slope * sx) / real'(NA);
      fs = slope * ampl[NA-1] + icpt;
      inl_max = 0.0;
      for (int a = 0; a < NA; a++) begin
        inl = 100.0 * (mean[a] - (slope * ampl[a] + icpt)) / fs;
        res = 100.0 * 2.355 * sd[a] / mean[a];
        $display("%5.0f mV: mean %8.1f  INL %6.3f %%  resolution %5.2f %%",
                 ampl[a], mean[a], inl, res);
        if (inl < 0.0) inl = -inl;
        if (inl > inl_max) inl_max = inl;
        check(inl <= 1.0, $sformatf("INL within 1 %% at %0.0f mV", ampl[a]));
        if (ampl[a] >= 200.0)
          check(res < 6.0, $sformatf("resolution better than 6 %% at %0.0f mV", ampl[a]));
      end
      $display("slope %0.3f counts/mV, max |INL| %0.3f %%", slope, inl_max);
    end

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
