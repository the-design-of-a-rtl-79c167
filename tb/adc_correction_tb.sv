// adc_correction_tb -- self-checking test of the non-linearity LUT and the
// per-channel gain/offset correction.
//
// The test loads all 4096 table entries with random 13-bit values, then
// streams random widths (including widths beyond the table, which must use
// the last entry) on both channels with random valid gaps. Each output is
// compared with max(0, ((lut[min(w,4095)] * gain[ch]) >> 14) + offset[ch])
// computed here (the sum cannot exceed 16 bits), and must come out of the three pipeline registers (table read, multiply, offset) without stalls or extra delay. Three
// coefficient sets are used: near-unity, one whose offset drives results
// below zero (clamped to 0), and full-scale gain and offset, which reach
// the top of the 16-bit range. A table entry is rewritten in the middle
// of the stream to check the host write port.
`timescale 1ns/1ps
module adc_correction_tb;
  import tiadc_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  width_smp_t in = '0;
  logic lut_we = 1'b0;
  logic [LUT_ADDR_BITS-1:0] lut_waddr = '0;
  logic [LUT_DATA_BITS-1:0] lut_wdata = '0;
  logic [1:0][GAIN_BITS-1:0] gain;
  logic [1:0][SAMPLE_BITS-1:0] offset;
  sample_t out;
  int checks = 0, failures = 0;
  int lut_m [4096];
  int sat_lo = 0, sat_hi = 0, beyond = 0;

  always #2 clk = ~clk;

  adc_correction u_dut (.clk, .rst, .in, .lut_we, .lut_waddr, .lut_wdata, .gain, .offset, .out);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  typedef struct { int cyc; int chan; int value; } exp_t;
  exp_t expq[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int reference(input int w, input int ch);
    longint lin, v;
    lin = lut_m[(w > 4095) ? 4095 : w];
    v = ((lin * longint'(gain[ch])) >>> 14) + longint'($signed(offset[ch]));
    if (v < 0) return -1;
    if (v > 65535) return 65536;
    return int'(v);
  endfunction

  always @(posedge clk) begin
    if (!rst && out.valid) begin
      if (expq.size() == 0) check(1'b0, "unexpected output");
      else begin
        exp_t e;
        int ev;
        e = expq.pop_front();
        ev = (e.value < 0) ? 0 : (e.value > 65535) ? 65535 : e.value;
        check(out.chan == e.chan[0] && out.value == SAMPLE_BITS'(ev),
              $sformatf("got ch%0d %0d expected ch%0d %0d", out.chan, out.value, e.chan, ev));
        check(cyc - e.cyc == 3, $sformatf("latency %0d", cyc - e.cyc));
      end
    end
  end

  task automatic stream(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      if ($urandom % 4 != 0) begin
        int w, ch, r;
        w  = ($urandom % 8 == 0) ? 4096 + ($urandom % 4096) : ($urandom % 4096);
        ch = $urandom % 2;
        in = '{valid: 1'b1, chan: ch[0], width: width_t'(w)};
        r  = reference(w, ch);
        if (w > 4095) beyond++;
        if (r < 0) sat_lo++;
        if (r > 65535) sat_hi++;
        expq.push_back('{cyc: cyc, chan: ch, value: r});
      end else in = '0;
    end
    @(negedge clk) in = '0;
    repeat (5) @(posedge clk);
  endtask

  initial begin
    gain[0] = 16'd16384; gain[1] = 16'd16000;
    offset[0] = 16'd0;   offset[1] = 16'd37;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk);
      lut_we = 1'b1; lut_waddr = LUT_ADDR_BITS'(a);
      lut_m[a] = $urandom % 8192;
      lut_wdata = LUT_DATA_BITS'(lut_m[a]);
    end
    @(negedge clk) lut_we = 1'b0;
    stream(2000);
    // Rewrite one entry, then read it.
    @(negedge clk);
    lut_we = 1'b1; lut_waddr = 12'd100; lut_wdata = 13'd4321; lut_m[100] = 4321;
    @(negedge clk) lut_we = 1'b0;
    @(negedge clk);
    in = '{valid: 1'b1, chan: 1'b0, width: width_t'(100)};
    expq.push_back('{cyc: cyc, chan: 0, value: reference(100, 0)});
    @(negedge clk) in = '0;
    repeat (5) @(posedge clk);
    // Offset pulls small values below zero.
    gain[0] = 16'd8000; gain[1] = 16'd20000;
    offset[0] = -16'sd2000; offset[1] = -16'sd3000;
    stream(1500);
    // Gain and offset push large values above full scale.
    gain[0] = 16'd65535; gain[1] = 16'd60000;
    offset[0] = 16'd30000; offset[1] = 16'd20000;
    stream(1500);
    check(expq.size() == 0, "outputs missing");
    check(sat_lo > 0 && sat_hi == 0 && beyond > 0, "clamping and table clipping exercised");
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
