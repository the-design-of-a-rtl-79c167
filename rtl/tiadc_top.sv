// tiadc_top -- one channel of the 50 MS/s time-interleaved FPGA-ADC.
//
// Outside the logic, two 25 MHz clocks 180 degrees apart are low-pass
// filtered by a series resistor and the pad capacitance into two
// quasi-triangular ramps, and two LVDS inputs compare the analogue signal
// with them. Each comparator output is a pulse per 40 ns ramp period whose
// width encodes the input level. Two carry chains sample those pulses; their
// registered tap snapshots enter here. Inside:
//   tdc x2            edge detection, tap encoding, online bin-by-bin
//                     calibration, 250 MHz coarse count -> edge timestamps
//   width_calc        rise/fall pairing -> widths, the two 25 MS/s channels
//                     merged into one 50 MS/s stream
//   adc_correction    4096-entry non-linearity LUT, per-channel gain/offset
//   energy_integrator threshold-triggered, pedestal-subtracted integration
// The chain of blocks follows the structure figure of the paper; the PLL,
// the resistors, the comparators and the carry chains themselves are
// analogue or FPGA primitives and stay outside, as do the host link and the
// registers that hold the configuration (plain input ports here).
//
// Timing: all logic runs on the 250 MHz clock. A sample is on sample_out six
// clock edges after the edge that registers the snapshot showing its falling
// edge (seven if width_calc had to hold it); an energy follows one clock
// after the last sample of its window. Nothing stalls: the stream carries at
// most one sample per clock and on average one per 5 clocks (50 MS/s).
module tiadc_top
  import tiadc_pkg::*;
#(
  parameter int unsigned TAPS          = 320,
  parameter int unsigned CAL_LOG2_HITS = 16,
  parameter int unsigned LUT_DEPTH     = 4096,
  parameter int unsigned WINDOW        = 16
) (
  input  logic                          clk,            // 250 MHz
  input  logic                          rst,
  // Registered carry-chain snapshots, channel 0 (0 deg) and 1 (180 deg).
  input  logic [TAPS-1:0]               tdl_taps0,
  input  logic [TAPS-1:0]               tdl_taps1,
  // Configuration from the host.
  input  logic                          cal_start,
  input  logic                          cal_continuous,
  input  logic                          lut_we,
  input  logic [LUT_ADDR_BITS-1:0]      lut_waddr,
  input  logic [LUT_DATA_BITS-1:0]      lut_wdata,
  input  logic [1:0][GAIN_BITS-1:0]     gain,
  input  logic [1:0][SAMPLE_BITS-1:0]   offset,
  input  logic [SAMPLE_BITS-1:0]        pedestal,
  input  logic [SAMPLE_BITS-1:0]        threshold,
  input  logic                          neg_polarity,
  // Status and data to the host.
  output logic [1:0]                    cal_busy,
  output logic [1:0]                    cal_ready,
  output width_smp_t                    width_out,      // raw widths (calibration scans)
  output sample_t                       sample_out,     // 50 MS/s corrected waveform
  output logic                          energy_valid,
  output logic signed [ENERGY_BITS-1:0] energy,
  output logic [31:0]                   events,
  output logic                          integ_busy
);

  tdc_hit_t   hit0, hit1;

  tdc #(.TAPS(TAPS), .CAL_LOG2_HITS(CAL_LOG2_HITS)) u_tdc0 (
    .clk, .rst, .taps(tdl_taps0), .cal_start, .cal_continuous,
    .hit(hit0), .cal_busy(cal_busy[0]), .cal_ready(cal_ready[0])
  );

  tdc #(.TAPS(TAPS), .CAL_LOG2_HITS(CAL_LOG2_HITS)) u_tdc1 (
    .clk, .rst, .taps(tdl_taps1), .cal_start, .cal_continuous,
    .hit(hit1), .cal_busy(cal_busy[1]), .cal_ready(cal_ready[1])
  );

  width_calc u_width (
    .clk, .rst, .hit0, .hit1, .smp(width_out)
  );

  adc_correction #(.LUT_DEPTH(LUT_DEPTH)) u_corr (
    .clk, .rst, .in(width_out), .lut_we, .lut_waddr, .lut_wdata,
    .gain, .offset, .out(sample_out)
  );

  energy_integrator #(.WINDOW(WINDOW)) u_integ (
    .clk, .rst, .in(sample_out), .pedestal, .threshold, .neg_polarity,
    .energy_valid, .energy, .events, .busy(integ_busy)
  );

endmodule
