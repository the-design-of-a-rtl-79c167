// adc_correction -- non-linearity correction and gain/offset matching.
//
// The ramps are RC-filtered clocks, not true triangles, so the pulse width is
// a non-linear function of the input voltage. The host scans DC levels over
// the input range and loads a 4096-entry look-up table that maps a width to a
// linear code; this block reads it for every sample (widths beyond the last
// entry use the last entry). The two interleaved channels still differ in
// gain and offset, so each linearised value is then scaled and shifted with
// the coefficients of its own channel:
//     value = max(0, (lut[width] * gain[chan]) >> 14 + offset[chan])
// gain is unsigned with 14 fraction bits (16384 = 1.0), offset is signed.
// The 14 fraction bits of the product are dropped (truncation), so they are
// never read.
// The scaled value is below 2**15 and the offset below 2**15, so the sum
// never exceeds 16 bits; only negative results need clamping (to 0).
// One multiplier serves both channels because the 50 MS/s stream carries at
// most one sample per 250 MHz clock.
//
// From the paper: the LUT correction of the conversion curve, its 4096
// entries, correcting only gain and offset between the two channels, and the
// single DSP of Table 1. The order (LUT first, then gain/offset, as the block
// is named in the structure figure), the 13-bit table word, the coefficient
// formats and the clamping are this design's choices.
//
// Interface: in/out are width and sample streams (valid per clock). The LUT
// write port (lut_we, lut_waddr, lut_wdata) is for the host and may be used
// at any time. Timing: three registers (table read, multiply, offset and
// clamp). An input present at clock edge k is on out after edge k+2. The block
// takes one sample per clock.
module adc_correction
  import tiadc_pkg::*;
#(
  parameter int unsigned LUT_DEPTH = 4096
) (
  input  logic                         clk,
  input  logic                         rst,
  input  width_smp_t                   in,
  input  logic                         lut_we,
  input  logic [LUT_ADDR_BITS-1:0]     lut_waddr,
  input  logic [LUT_DATA_BITS-1:0]     lut_wdata,
  input  logic [1:0][GAIN_BITS-1:0]    gain,
  input  logic [1:0][SAMPLE_BITS-1:0]  offset,
  output sample_t                      out
);

  localparam int unsigned PROD_BITS = LUT_DATA_BITS + GAIN_BITS;

  logic [LUT_DATA_BITS-1:0] lut [LUT_DEPTH];

  logic [LUT_ADDR_BITS-1:0] rd_addr;
  assign rd_addr = (in.width > WIDTH_BITS'(LUT_DEPTH - 1)) ? LUT_ADDR_BITS'(LUT_DEPTH - 1)
                                                           : LUT_ADDR_BITS'(in.width);

  // Stage 1: table read.
  logic                     s1_valid, s1_chan;
  logic [LUT_DATA_BITS-1:0] s1_lin;
  // Stage 2: multiply.
  logic                     s2_valid, s2_chan;
  logic [PROD_BITS-1:0]     s2_prod;
  // Stage 3: offset and saturation.
  logic signed [PROD_BITS-GAIN_FRAC_BITS+1:0] sum;

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_waddr] <= lut_wdata;
    s1_lin <= lut[rd_addr];
  end

  assign sum = $signed({2'b00, s2_prod[PROD_BITS-1:GAIN_FRAC_BITS]})
             + $signed(offset[s2_chan]);

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0;
      s1_chan  <= 1'b0;
      s2_valid <= 1'b0;
      s2_chan  <= 1'b0;
      s2_prod  <= '0;
      out      <= '0;
    end else begin
      s1_valid  <= in.valid;
      s1_chan   <= in.chan;
      s2_valid  <= s1_valid;
      s2_chan   <= s1_chan;
      s2_prod   <= PROD_BITS'(s1_lin) * PROD_BITS'(gain[s1_chan]);
      out.valid <= s2_valid;
      out.chan  <= s2_chan;
      out.value <= (sum < 0) ? '0 : SAMPLE_BITS'(sum);
    end
  end

endmodule
