// tdc_calib_tb -- self-checking test of the bin-by-bin TDC calibration.
//
// With 40 raw bins and runs of 2**10 edges the test: reads the uniform table
// loaded after reset; feeds edges drawn from an uneven bin distribution (the
// last bins empty, as for taps beyond one clock period), keeps its own
// histogram, and compares every table entry with the bin-centre formula
// (cum + n/2) >> (LOG2 - 9); checks that cal_ready is seen TAPS + 1 clocks (a TAPS-clock sweep, then the flag register)
// after the last counted edge; that edges arriving during the sweep are not
// counted; and that continuous mode starts the next run by itself with a
// cleared histogram.
`timescale 1ns/1ps
module tdc_calib_tb;
  import tiadc_pkg::*;

  localparam int unsigned TAPS = 40;
  localparam int unsigned LOG2 = 10;
  localparam int unsigned BW   = $clog2(TAPS);

  logic clk = 1'b0, rst = 1'b1;
  logic hit_valid = 1'b0;
  logic [BW-1:0] hit_bin = '0, rd_bin = '0;
  logic cal_start = 1'b0, cal_continuous = 1'b0;
  logic [FINE_BITS-1:0] rd_fine;
  logic cal_busy, cal_ready;
  int checks = 0, failures = 0;
  int hist [TAPS];

  always #2 clk = ~clk;

  tdc_calib #(.TAPS(TAPS), .LOG2_HITS(LOG2)) u_dut (
    .clk, .rst, .hit_valid, .hit_bin, .cal_start, .cal_continuous,
    .rd_bin, .rd_fine, .cal_busy, .cal_ready
  );

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic int pick_bin(input int variant);
    int total, r, acc;
    total = 0;
    for (int b = 0; b < TAPS - 6; b++) total += 1 + ((b * (3 + variant)) % 7);
    r = $urandom % total;
    acc = 0;
    for (int b = 0; b < TAPS - 6; b++) begin
      acc += 1 + ((b * (3 + variant)) % 7);
      if (r < acc) return b;
    end
    return 0;
  endfunction

  task automatic read_table_and_check(input string tag);
    int cum, e;
    cum = 0;
    for (int b = 0; b < TAPS; b++) begin
      @(negedge clk);
      rd_bin = BW'(b);
      #1;
      e = (cum + hist[b] / 2) >> (LOG2 - FINE_BITS);
      check(rd_fine == FINE_BITS'(e), $sformatf("%s bin %0d: got %0d expected %0d", tag, b, rd_fine, e));
      cum += hist[b];
    end
  endtask

  // Feed exactly 2**LOG2 counted edges; returns the clock of the last one.
  task automatic feed_run(input int variant, output int last_cycle);
    int n;
    for (int b = 0; b < TAPS; b++) hist[b] = 0;
    n = 0;
    while (n < (1 << LOG2)) begin
      @(negedge clk);
      if ($urandom % 3 != 0) begin
        hit_valid = 1'b1;
        hit_bin   = BW'(pick_bin(variant));
        hist[hit_bin]++;
        n++;
      end else hit_valid = 1'b0;
    end
    @(posedge clk);
    last_cycle = cyc;
    @(negedge clk);
    hit_valid = 1'b0;
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    int last, e;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (TAPS + 3) @(posedge clk);
    check(!cal_busy && !cal_ready, "idle after init");
    for (int b = 0; b < TAPS; b++) begin
      @(negedge clk);
      rd_bin = BW'(b);
      #1;
      e = ((2 * b + 1) * 256) / TAPS;
      check(rd_fine == FINE_BITS'(e), $sformatf("uniform bin %0d: got %0d expected %0d", b, rd_fine, e));
    end

    // First run, started by a pulse.
    @(negedge clk) cal_start = 1'b1;
    @(negedge clk) cal_start = 1'b0;
    check(cal_busy, "busy after start");
    feed_run(0, last);
    // Edges during the sweep must be ignored.
    for (int i = 0; i < TAPS / 2; i++) begin
      @(negedge clk);
      hit_valid = 1'b1;
      hit_bin   = BW'(0);
    end
    @(negedge clk) hit_valid = 1'b0;
    while (!cal_ready) @(posedge clk);
    check(cyc - last == TAPS + 1, $sformatf("sweep length %0d clocks", cyc - last));
    check(!cal_busy, "not busy after run");
    read_table_and_check("run1");

    // Second run in continuous mode, different distribution.
    @(negedge clk) cal_continuous = 1'b1;
    @(posedge clk);
    @(posedge clk);
    check(cal_busy, "continuous mode starts a run");
    feed_run(1, last);
    @(negedge clk) cal_continuous = 1'b0;
    repeat (TAPS + 3) @(posedge clk);
    check(!cal_busy, "idle after continuous mode is left");
    read_table_and_check("run2");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
