// width_calc_tb -- self-checking test of the width calculation and the
// interleaving of the two channels.
//
// The test drives the TDC hit ports directly. Edge times are generated in
// 7.8125 ps units: channel 0 has a pulse centred every 5120 LSB (40 ns),
// channel 1 the same shifted by 2560 LSB (20 ns); widths are random, with
// some pairs chosen so that both channels finish a pulse in the same clock
// (both orders of pulse centres). An edge at time t is presented with ts = t
// in clock ceil(t / 512). The expected stream is worked out from the edge
// list: width = fall - rise, in order of finishing clock, same-clock pairs
// ordered by centre, leaving 2 clocks after the fall (3 for the held one).
// It also checks saturation of an over-long pulse to 8191, the wrap of the
// timestamp counter, and that a falling edge without a rising edge is
// dropped.
`timescale 1ns/1ps
module width_calc_tb;
  import tiadc_pkg::*;

  localparam int NPER = 1500;

  logic clk = 1'b0, rst = 1'b1;
  tdc_hit_t hit0 = '0, hit1 = '0;
  width_smp_t smp;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  width_calc u_dut (.clk, .rst, .hit0, .hit1, .smp);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  typedef struct {
    longint fall_cyc;
    longint centre;
    int     chan;
    int     width;
    longint out_cyc;
  } exp_t;

  tdc_hit_t ev [2][longint];
  exp_t     expq[$];
  int       ties_ch0_first = 0, ties_ch1_first = 0;

  function automatic longint cyc_of(input longint t);
    return (t + 511) / 512;
  endfunction

  task automatic add_pulse(input int c, input longint rise, input longint w);
    exp_t e;
    longint fall;
    fall = rise + w;
    ev[c][cyc_of(rise)] = '{valid: 1'b1, pol: EDGE_RISE, ts: TS_BITS'(rise)};
    ev[c][cyc_of(fall)] = '{valid: 1'b1, pol: EDGE_FALL, ts: TS_BITS'(fall)};
    e.fall_cyc = cyc_of(fall);
    e.centre   = rise + w / 2;
    e.chan     = c;
    e.width    = (w > 8191) ? 8191 : int'(w);
    expq.push_back(e);
  endtask

  int cyc = 0;
  exp_t got_order[$];

  initial begin
    longint base, t0, w0, w1;
    exp_t tmp;
    // Lone falling edge on channel 1 right after reset: must be dropped.
    ev[1][longint'(12)] = '{valid: 1'b1, pol: EDGE_FALL, ts: TS_BITS'(12 * 512 - 100)};
    // Start near the top of the 25-bit timestamp range to cross the wrap.
    base = (longint'(1) << TS_BITS) - 5120 * 300 + ($urandom % 512);
    for (int n = 0; n < NPER; n++) begin
      t0 = base + longint'(n) * 5120;
      if (n % 10 == 3) begin       // ch0 long, ch1 short: ch0 centre first
        w0 = 4600 + ($urandom % 600); w1 = 600 + ($urandom % 64);
      end else if (n % 10 == 6) begin // ch1 long, next ch0 short
        w0 = 1000 + ($urandom % 2000); w1 = 4600 + ($urandom % 600);
      end else if (n % 10 == 7) begin
        w0 = 600 + ($urandom % 64); w1 = 1000 + ($urandom % 2000);
      end else begin
        w0 = 600 + ($urandom % 3400); w1 = 600 + ($urandom % 3400);
      end
      add_pulse(0, t0 + 2560 - w0 / 2, w0);
      add_pulse(1, t0 + 5120 - w1 / 2, w1);
    end
    // Over-long pulse on channel 0 after the periodic part.
    t0 = base + longint'(NPER) * 5120 + 5120;
    add_pulse(0, t0, 9000);
    // Expected order: by fall clock, then by centre; second of a pair is held.
    expq.sort() with (item.fall_cyc * 64'd1000000000 + (item.centre - base));
    for (int i = 0; i < expq.size(); i++) begin
      expq[i].out_cyc = expq[i].fall_cyc + 2;
      if (i > 0 && expq[i].fall_cyc == expq[i-1].fall_cyc) begin
        expq[i].out_cyc = expq[i].fall_cyc + 3;
        if (expq[i-1].chan == 0) ties_ch0_first++; else ties_ch1_first++;
      end
    end
    check(ties_ch0_first > 0 && ties_ch1_first > 0,
          $sformatf("stimulus has same-clock pairs (%0d, %0d)", ties_ch0_first, ties_ch1_first));
  end

  // Drive: simulation clock k presents the events of edge clock k - offset.
  longint offset;
  initial offset = 0;
  always @(posedge clk) begin
    longint k;
    cyc <= cyc + 1;
    if (cyc == 4) rst <= 1'b0;
    k = longint'(cyc) + cyc_of((longint'(1) << TS_BITS) - 5120 * 300) - 20;
    if (cyc == 12) begin
      hit1 <= ev[1][longint'(12)];
      hit0 <= '0;
    end else if (cyc > 12 && cyc >= 20) begin
      hit0 <= ev[0].exists(k) ? ev[0][k] : '0;
      hit1 <= ev[1].exists(k) ? ev[1][k] : '0;
    end else begin
      hit0 <= '0;
      hit1 <= '0;
    end
  end

  // Monitor.
  int nout = 0;
  always @(posedge clk) begin
    if (!rst && smp.valid) begin
      longint k;
      k = longint'(cyc) + cyc_of((longint'(1) << TS_BITS) - 5120 * 300) - 20 - 1;
      if (expq.size() == 0) check(1'b0, "unexpected width");
      else begin
        exp_t e;
        e = expq.pop_front();
        check(smp.chan == e.chan[0] && smp.width == width_t'(e.width),
              $sformatf("sample %0d: got ch%0d w%0d expected ch%0d w%0d", nout, smp.chan, smp.width, e.chan, e.width));
        check(k == e.out_cyc, $sformatf("sample %0d leaves at %0d expected %0d", nout, k, e.out_cyc));
      end
      nout++;
    end
  end

  initial begin
    repeat (16000) @(posedge clk);
    check(expq.size() == 0, $sformatf("%0d widths missing", expq.size()));
    check(nout == 2 * NPER + 1, $sformatf("got %0d widths", nout));
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
