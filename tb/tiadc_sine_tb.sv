// tiadc_sine_tb -- dynamic test of the converter with sine inputs.
//
// The converter at its default size samples a 1.6 V peak-to-peak sine at
// 1 MHz and at 5 MHz (the two input frequencies of the dynamic measurements
// this design is meant for). The front-end model is the one of tiadc_top_tb:
// quasi-triangular curve w = 40 ns * h(u), h(u) = u + 0.15 u (1 - u), with a
// 3 % gain and 0.02 offset mismatch on channel 1, but here without timing
// skew (no phase correction exists in the design). After calibration and
// table loading, 2048 consecutive samples of the merged stream are fitted with
// a sine of the known frequency (least squares on sin, cos and a constant).
// The test reports SINAD and ENOB = (SINAD_dB - 1.76) / 6.02 and checks:
// the samples alternate between the channels; the stream runs at 50 MS/s
// (2048 samples in 10240 clocks, +-2); ENOB is at least 6 bits at 1 MHz and
// 4.5 bits at 5 MHz (the ideal model has no analogue noise, so it should
// do much better); and switching off channel 1's gain/offset correction costs
// more than one bit, i.e. the correction is what matches the two channels.
`timescale 1ns/1ps
module tiadc_sine_tb;
  import tiadc_pkg::*;

  localparam int unsigned TAPS = 320;
  localparam real K_NL = 0.15;
  localparam int NS = 2048;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0, rst = 1'b1;
  logic [TAPS-1:0] taps0, taps1;
  logic cal_start = 1'b0;
  logic lut_we = 1'b0;
  logic [LUT_ADDR_BITS-1:0] lut_waddr = '0;
  logic [LUT_DATA_BITS-1:0] lut_wdata = '0;
  logic [1:0][GAIN_BITS-1:0] gain;
  logic [1:0][SAMPLE_BITS-1:0] offset;
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
    .pedestal(16'd0), .threshold(16'hFFFF), .neg_polarity(1'b0),
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

  // Stimulus: random widths for calibration, then a sine of freq_mhz.
  bit     calibrating = 1'b1;
  real    freq_mhz = 1.0;
  longint cyc = 0;
  always @(posedge clk) begin
    real v;
    cyc <= cyc + 1;
    if (calibrating) begin
      wps0 <= 8000 + ($urandom % 24000);
      wps1 <= 8000 + ($urandom % 24000);
    end else begin
      v = 1650.0 + 800.0 * $sin(2.0 * PI * freq_mhz * real'(cyc) * 4.0e-3);
      wps0 <= width_of(0, v);
      wps1 <= width_of(1, v);
    end
  end

  // Sample capture.
  bit     capturing = 1'b0;
  real    xs [NS];
  int     chs [NS];
  int     ncap = 0;
  longint cap_first = 0, cap_last = 0;
  always @(posedge clk) begin
    if (capturing && !rst && sample_out.valid && ncap < NS) begin
      if (ncap == 0) cap_first = cyc;
      cap_last = cyc;
      xs[ncap]  = real'(sample_out.value);
      chs[ncap] = int'(sample_out.chan);
      ncap++;
    end
  end

  // Least-squares fit of a*sin + b*cos + c at the known frequency; sample k
  // is taken 20 ns after sample k-1. Returns ENOB.
  function automatic real enob_of(input real f_mhz, output real sinad_db);
    real s[3][3], r[3], p[3], det, m[3][3], ph, res, sig, e, basis[3];
    for (int i = 0; i < 3; i++) begin
      r[i] = 0.0;
      for (int j = 0; j < 3; j++) s[i][j] = 0.0;
    end
    for (int k = 0; k < NS; k++) begin
      ph = 2.0 * PI * f_mhz * real'(k) * 0.02;
      basis[0] = $sin(ph); basis[1] = $cos(ph); basis[2] = 1.0;
      for (int i = 0; i < 3; i++) begin
        r[i] += basis[i] * xs[k];
        for (int j = 0; j < 3; j++) s[i][j] += basis[i] * basis[j];
      end
    end
    det = s[0][0] * (s[1][1] * s[2][2] - s[1][2] * s[2][1])
        - s[0][1] * (s[1][0] * s[2][2] - s[1][2] * s[2][0])
        + s[0][2] * (s[1][0] * s[2][1] - s[1][1] * s[2][0]);
    for (int c = 0; c < 3; c++) begin
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 3; j++) m[i][j] = (j == c) ? r[i] : s[i][j];
      p[c] = (m[0][0] * (m[1][1] * m[2][2] - m[1][2] * m[2][1])
            - m[0][1] * (m[1][0] * m[2][2] - m[1][2] * m[2][0])
            + m[0][2] * (m[1][0] * m[2][1] - m[1][1] * m[2][0])) / det;
    end
    res = 0.0;
    for (int k = 0; k < NS; k++) begin
      ph = 2.0 * PI * f_mhz * real'(k) * 0.02;
      e = xs[k] - (p[0] * $sin(ph) + p[1] * $cos(ph) + p[2]);
      res += e * e;
    end
    sig = (p[0] * p[0] + p[1] * p[1]) / 2.0;
    sinad_db = 10.0 * $log10(sig / (res / real'(NS)));
    return (sinad_db - 1.76) / 6.02;
  endfunction

  task automatic capture_and_measure(input real f_mhz, input string tag, output real enob);
    real sinad;
    int alt_bad;
    freq_mhz = f_mhz;
    repeat (200) @(posedge clk);
    ncap = 0;
    capturing = 1'b1;
    while (ncap < NS) @(posedge clk);
    capturing = 1'b0;
    alt_bad = 0;
    for (int k = 1; k < NS; k++) if (chs[k] == chs[k-1]) alt_bad++;
    check(alt_bad == 0, $sformatf("%s: %0d non-alternating samples", tag, alt_bad));
    // 2048 samples span 2047 intervals of 5 clocks.
    check((cap_last - cap_first) >= 10233 && (cap_last - cap_first) <= 10237,
          $sformatf("%s: %0d samples took %0d clocks", tag, NS, cap_last - cap_first));
    enob = enob_of(f_mhz, sinad);
    $display("%s: SINAD %0.1f dB, ENOB %0.2f bits", tag, sinad, enob);
  endtask

  initial begin
    real enob1, enob5, enob_nc;
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

    capture_and_measure(1.0, "1 MHz", enob1);
    check(enob1 >= 6.0, "ENOB at 1 MHz at least 6 bits");
    capture_and_measure(5.0, "5 MHz", enob5);
    check(enob5 >= 4.5, "ENOB at 5 MHz at least 4.5 bits");

    // Channel 1 left uncorrected.
    gain[1] = 16'd16384;
    offset[1] = 16'd0;
    capture_and_measure(1.0, "1 MHz, channel 1 uncorrected", enob_nc);
    check(enob1 - enob_nc > 1.0, "gain/offset correction improves ENOB by more than 1 bit");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
