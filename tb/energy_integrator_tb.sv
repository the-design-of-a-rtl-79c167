// energy_integrator_tb -- self-checking test of the energy integration.
//
// A sample stream with a noisy baseline near the pedestal and scintillation-
// like pulses (fast rise, exponential decay, random amplitude) is fed with
// random gaps between valid samples. A reference model here applies the same
// rule as the design: trigger when the pedestal-subtracted amplitude exceeds
// the threshold, sum that sample and the next WINDOW-1 valid samples, ignore
// triggers meanwhile. Every energy is compared with the reference and must
// appear on the clock after the last sample of its window. Both polarities
// are run, pulses are sometimes piled up inside a window, and the event
// counter is checked at the end.
`timescale 1ns/1ps
module energy_integrator_tb;
  import tiadc_pkg::*;

  localparam int unsigned WINDOW = 8;

  logic clk = 1'b0, rst = 1'b1;
  sample_t in = '0;
  logic [SAMPLE_BITS-1:0] pedestal = 16'd1000, threshold = 16'd60;
  logic neg_polarity = 1'b0;
  logic energy_valid, busy;
  logic signed [ENERGY_BITS-1:0] energy;
  logic [31:0] events;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  energy_integrator #(.WINDOW(WINDOW)) u_dut (
    .clk, .rst, .in, .pedestal, .threshold, .neg_polarity,
    .energy_valid, .energy, .events, .busy
  );

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  typedef struct { int cyc; longint e; } exp_t;
  exp_t expq[$];
  int cyc = 0;
  int n_events = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Reference state.
  bit     r_busy = 0;
  int     r_n = 0;
  longint r_acc = 0;

  task automatic push_sample(input int v);
    longint amp;
    in = '{valid: 1'b1, chan: cyc[0], value: SAMPLE_BITS'(v)};
    amp = neg_polarity ? longint'(pedestal) - v : longint'(v) - longint'(pedestal);
    if (!r_busy && amp > longint'(threshold)) begin
      r_busy = 1; r_n = 0; r_acc = 0;
    end
    if (r_busy) begin
      r_acc += amp;
      r_n++;
      if (r_n == WINDOW) begin
        expq.push_back('{cyc: cyc, e: r_acc});
        r_busy = 0;
        n_events++;
      end
    end
  endtask

  always @(posedge clk) begin
    if (!rst && energy_valid) begin
      if (expq.size() == 0) check(1'b0, "unexpected energy");
      else begin
        exp_t x;
        x = expq.pop_front();
        check(longint'(energy) == x.e, $sformatf("energy %0d expected %0d", energy, x.e));
        check(cyc - x.cyc == 1, $sformatf("energy delay %0d", cyc - x.cyc));
      end
    end
  end

  task automatic run(input int nsamples);
    real pulse;
    pulse = 0.0;
    for (int i = 0; i < nsamples; i++) begin
      int v, noise;
      @(negedge clk);
      if ($urandom % 3 == 0) begin
        in.valid = 1'b0;
        continue;
      end
      if ($urandom % 40 == 0) pulse += 200.0 + real'($urandom % 3000);
      noise = int'($urandom % 21) - 10;
      v = neg_polarity ? 30000 - int'(pulse) + noise : 1000 + int'(pulse) + noise;
      if (v < 0) v = 0;
      push_sample(v);
      pulse = pulse * 0.8;
    end
    @(negedge clk) in = '0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    run(4000);
    // Negative pulses below a high baseline.
    @(negedge clk);
    pedestal = 16'd30000;
    threshold = 16'd80;
    neg_polarity = 1'b1;
    run(4000);
    check(expq.size() == 0, "energies missing");
    check(n_events > 50, $sformatf("%0d events", n_events));
    check(events == 32'(n_events), $sformatf("event counter %0d expected %0d", events, n_events));
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
