// tdc_tb -- self-checking test of the carry-chain TDC with its calibration.
//
// A behavioural front end (afe_tdl_model) produces comparator pulses of
// random width (8..32 ns) once per 40 ns and a delay line of 320 unequal
// taps. The test runs one code-density calibration (2**16 edges), then pairs
// every rising and falling timestamp and compares ts_fall - ts_rise with the
// true width converted to 7.8125 ps units (w * 512 / 4000), allowing 6 LSB (half a tap at each edge plus the statistical error of the calibration).
// It also checks the polarity of every edge, that each edge gives exactly one
// hit two clocks after the snapshot that shows it, that cal_busy covers the
// calibration run, and that the mean width error is below one LSB.
`timescale 1ns/1ps
module tdc_tb;
  import tiadc_pkg::*;

  localparam int unsigned TAPS = 320;
  localparam int unsigned LOG2 = 16;
  localparam int unsigned NMEAS = 400;

  logic clk = 1'b0, rst = 1'b1;
  logic [TAPS-1:0] taps;
  logic cal_start = 1'b0;
  tdc_hit_t hit;
  logic cal_busy, cal_ready;
  int unsigned width_ps = 20000;
  logic new_period;
  int unsigned period_w;

  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  afe_tdl_model #(.TAPS(TAPS), .PHASE_PS(0), .SEED(7)) u_afe (
    .clk, .width_ps, .taps, .new_period, .period_w
  );

  tdc #(.TAPS(TAPS), .CAL_LOG2_HITS(LOG2)) u_dut (
    .clk, .rst, .taps, .cal_start, .cal_continuous(1'b0),
    .hit, .cal_busy, .cal_ready
  );

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Random width for each new period.
  always @(posedge clk) if (new_period) width_ps <= 8000 + ($urandom % 24001);

  // Expected hit timing: an edge is visible when taps[0] changes.
  logic       prev0 = 1'b0;
  logic [1:0] exp_pipe = '0;
  logic [1:0] pol_pipe = '0;
  int         cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst) begin
      exp_pipe <= '0;
      prev0    <= taps[0];
    end else begin
      prev0    <= taps[0];
      exp_pipe <= {exp_pipe[0], (taps[0] != prev0) && cyc > 8};
      pol_pipe <= {pol_pipe[0], taps[0]};
      if (cyc > 12) begin
        check(hit.valid == exp_pipe[1], $sformatf("hit timing at cycle %0d", cyc));
        if (hit.valid) check(hit.pol == edge_e'(pol_pipe[1]), "hit polarity");
      end
    end
  end

  // Width measurement after calibration.
  logic       measuring = 1'b0, armed = 1'b0, have_rise = 1'b0;
  timestamp_t rise_ts;
  int unsigned wq[$];
  int         nmeas = 0;
  real        err_sum = 0.0;
  logic start_meas = 1'b0;
  always @(posedge clk) begin
    if (start_meas && !measuring && new_period) begin
      measuring <= 1'b1;
      wq.delete();
      wq.push_back(period_w);
    end
    if (measuring) begin
      if (new_period) wq.push_back(period_w);
      if (hit.valid && hit.pol == EDGE_RISE) begin
        rise_ts   <= hit.ts;
        have_rise <= 1'b1;
      end else if (hit.valid && have_rise) begin
        timestamp_t meas;
        real expect_lsb, err;
        int unsigned w;
        have_rise <= 1'b0;
        meas = hit.ts - rise_ts;
        if (wq.size() == 0) check(1'b0, "width without a period");
        else begin
          w = wq.pop_front();
          expect_lsb = real'(w) * 512.0 / 4000.0;
          err = real'(meas) - expect_lsb;
          err_sum += err;
          nmeas++;
          check(err < 6.0 && err > -6.0,
                $sformatf("width %0d ps measured %0d LSB expected %0.1f", w, meas, expect_lsb));
        end
      end
    end
  end

  int busy_cycles = 0;
  initial begin
    repeat (5) @(posedge clk);
    rst <= 1'b0;
    repeat (TAPS + 5) @(posedge clk);
    check(cal_busy == 1'b0 && cal_ready == 1'b0, "idle after init sweep");
    cal_start <= 1'b1;
    @(posedge clk);
    cal_start <= 1'b0;
    @(posedge clk);
    while (!cal_ready) begin
      @(posedge clk);
      if (cal_busy) busy_cycles++;
    end
    // 65536 edges arrive at two per 10 clocks, then a 320-clock sweep.
    check(busy_cycles > 327000 && busy_cycles < 329500,
          $sformatf("calibration run length %0d clocks", busy_cycles));
    start_meas = 1'b1;
    while (nmeas < NMEAS) @(posedge clk);
    check((err_sum / nmeas) < 1.0 && (err_sum / nmeas) > -1.0,
          $sformatf("mean width error %0.2f LSB", err_sum / nmeas));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
