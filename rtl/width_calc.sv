// width_calc -- pulse width calculation and interleaving of the two channels.
//
// Each comparator output is high for a time that grows with the input level,
// once per 40 ns ramp period. For each channel this block keeps the timestamp
// of the last rising edge and, on the next falling edge, outputs
//     width = ts_fall - ts_rise        (7.8125 ps LSB, saturated to 13 bits)
// together with the pulse centre ts_rise + width/2. The two channels sample
// 20 ns apart (ramps at 0 and 180 degrees), so their widths arrive in
// alternation and together form the 50 MS/s stream. Because a pulse never
// lasts longer than a ramp period, a channel's falling edge comes at most
// 20 ns after its sampling instant, and widths leave the TDCs in sampling
// order; only when both channels finish a pulse in the same clock does this
// block order them, by pulse centre, and hold the later one for one clock.
//
// The paper names the width calculation and the 2-channel interleaving; the
// edge pairing, the centre-based ordering and the saturation are this
// design's choices. A falling edge without a preceding rising edge (after
// reset) is dropped.
//
// Interface: hit0/hit1 from the TDCs of channel 0 (0 degrees) and 1 (180
// degrees). smp carries one width per clock at most. Timing: a width leaves
// 2 clocks after its falling-edge hit (one more if it was held).
module width_calc
  import tiadc_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  tdc_hit_t   hit0,
  input  tdc_hit_t   hit1,
  output width_smp_t smp
);

  localparam int unsigned MAX_WIDTH = (1 << WIDTH_BITS) - 1;

  tdc_hit_t   hit [2];
  timestamp_t rise_ts [2];
  logic       have_rise [2];

  // Per-channel width results (stage A).
  logic       a_valid  [2];
  width_t     a_width  [2];
  timestamp_t a_centre [2];

  // One-entry hold for the later of two simultaneous widths.
  logic       hold_valid;
  logic       hold_chan;
  width_t     hold_width;

  assign hit[0] = hit0;
  assign hit[1] = hit1;

  for (genvar c = 0; c < 2; c++) begin : g_chan
    timestamp_t diff;
    width_t     w_sat;
    assign diff  = hit[c].ts - rise_ts[c];
    assign w_sat = (diff > TS_BITS'(MAX_WIDTH)) ? width_t'(MAX_WIDTH) : width_t'(diff);

    always_ff @(posedge clk) begin
      if (rst) begin
        have_rise[c] <= 1'b0;
        rise_ts[c]   <= '0;
        a_valid[c]   <= 1'b0;
        a_width[c]   <= '0;
        a_centre[c]  <= '0;
      end else begin
        a_valid[c] <= 1'b0;
        if (hit[c].valid) begin
          if (hit[c].pol == EDGE_RISE) begin
            rise_ts[c]   <= hit[c].ts;
            have_rise[c] <= 1'b1;
          end else if (have_rise[c]) begin
            a_valid[c]   <= 1'b1;
            a_width[c]   <= w_sat;
            a_centre[c]  <= rise_ts[c] + (diff >> 1);
            have_rise[c] <= 1'b0;
          end
        end
      end
    end
  end

  // Centre of channel 1 earlier than centre of channel 0 (modulo wrap).
  timestamp_t centre_diff;
  logic       ch1_first;
  assign centre_diff = a_centre[1] - a_centre[0];
  assign ch1_first   = centre_diff[TS_BITS-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      smp        <= '0;
      hold_valid <= 1'b0;
      hold_chan  <= 1'b0;
      hold_width <= '0;
    end else begin
      smp.valid  <= 1'b0;
      hold_valid <= 1'b0;
      if (hold_valid) begin
        smp <= '{valid: 1'b1, chan: hold_chan, width: hold_width};
      end else if (a_valid[0] && a_valid[1]) begin
        smp        <= '{valid: 1'b1, chan: ch1_first, width: a_width[ch1_first]};
        hold_valid <= 1'b1;
        hold_chan  <= !ch1_first;
        hold_width <= a_width[!ch1_first];
      end else if (a_valid[0]) begin
        smp <= '{valid: 1'b1, chan: 1'b0, width: a_width[0]};
      end else if (a_valid[1]) begin
        smp <= '{valid: 1'b1, chan: 1'b1, width: a_width[1]};
      end
    end
  end

  // A channel cannot finish two pulses in consecutive clocks, so nothing new
  // arrives while a held width is being sent.
  a_no_overrun: assert property (@(posedge clk) disable iff (rst)
    hold_valid |-> !(a_valid[0] || a_valid[1]))
    else $error("width_calc: width arrived while a held width was pending");

endmodule
