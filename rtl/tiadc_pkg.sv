// tiadc_pkg -- types and constants shared by the time-interleaved FPGA-ADC.
//
// The converter measures, with two carry-chain TDCs clocked at 250 MHz, the
// width of the pulses that two LVDS comparators produce when the analogue
// input is compared with two triangular ramps 180 degrees apart. A timestamp
// is a 250 MHz coarse count followed by a 9-bit calibrated fine time, so one
// LSB is 4 ns / 512 = 7.8125 ps (the 9-bit, ~7.8 ps figure follows the paper).
// A pulse width therefore spans up to 40 ns / 7.8125 ps = 5120 LSB, held in
// 13 bits. The non-linearity table has 4096 entries (the paper's size). The
// remaining widths (coarse counter, sample, gain, energy) are this design's
// own choices.
package tiadc_pkg;

  localparam int unsigned FINE_BITS      = 9;   // calibrated fine time per 4 ns clock
  localparam int unsigned COARSE_BITS    = 16;  // 250 MHz coarse counter
  localparam int unsigned TS_BITS        = COARSE_BITS + FINE_BITS;
  localparam int unsigned WIDTH_BITS     = 13;  // pulse width, 7.8125 ps LSB
  localparam int unsigned LUT_ADDR_BITS  = 12;  // 4096-entry non-linearity table
  localparam int unsigned LUT_DATA_BITS  = 13;
  localparam int unsigned SAMPLE_BITS    = 16;  // corrected ADC sample
  localparam int unsigned GAIN_BITS      = 16;  // unsigned, GAIN_FRAC_BITS fraction
  localparam int unsigned GAIN_FRAC_BITS = 14;  // 1.0 = 16384
  localparam int unsigned ENERGY_BITS    = 24;  // signed integral

  typedef logic [TS_BITS-1:0]       timestamp_t;
  typedef logic [WIDTH_BITS-1:0]    width_t;
  typedef logic [SAMPLE_BITS-1:0]   sample_value_t;

  // Polarity of a comparator edge: the level the comparator output moved to.
  typedef enum logic {EDGE_FALL = 1'b0, EDGE_RISE = 1'b1} edge_e;

  // One edge measured by a TDC.
  typedef struct packed {
    logic       valid;
    edge_e      pol;
    timestamp_t ts;     // coarse * 512 - calibrated fine time
  } tdc_hit_t;

  // One pulse width, tagged with the interleaved channel that produced it.
  typedef struct packed {
    logic   valid;
    logic   chan;       // 0: ramp at 0 degrees, 1: ramp at 180 degrees
    width_t width;
  } width_smp_t;

  // One corrected ADC sample of the 50 MS/s interleaved stream.
  typedef struct packed {
    logic          valid;
    logic          chan;
    sample_value_t value;
  } sample_t;

endpackage
