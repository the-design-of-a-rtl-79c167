// tdc -- carry-chain time-to-digital converter for one comparator output.
//
// The comparator output runs down a carry-chain delay line whose TAPS taps are
// captured by the 250 MHz clock; taps[0] is the tap nearest the input, so the
// snapshot shows the signal at successively earlier times. An edge occurred
// in the last clock period when taps[0] differs from its value one clock
// earlier. The edge then sits where the snapshot first differs from taps[0]:
// the raw bin is (index of the first tap unlike taps[0]) - 1, i.e. the number
// of taps the new level has passed beyond tap 0. The bin-by-bin calibration
// (tdc_calib) maps the raw bin to a 9-bit fine time t_f (how long before the
// clock edge the edge happened, 4 ns = 512) and the timestamp is
//     ts = coarse * 512 - t_f
// with a free-running 250 MHz coarse counter. Both edge polarities are
// measured, so one TDC gives the leading and trailing edges of each pulse.
//
// The paper gives the carry-chain TDC, the 250 MHz clock and the 9-bit
// calibrated fine time. The first-difference encoder (which assumes a
// bubble-free snapshot and at most one edge per 4 ns clock period) and the
// pipeline are this design's choices.
//
// Interface: taps must already be registered by the capture flip-flops of the
// delay line (clk domain). hit is valid for one clock per edge, 2 clocks
// after the snapshot that shows the edge. Raw bins are also passed to the
// calibration block, which owns the fine-time table.
module tdc
  import tiadc_pkg::*;
#(
  parameter int unsigned TAPS          = 320,
  parameter int unsigned CAL_LOG2_HITS = 16,
  localparam int unsigned BIN_W        = $clog2(TAPS)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [TAPS-1:0]  taps,
  input  logic             cal_start,
  input  logic             cal_continuous,
  output tdc_hit_t         hit,
  output logic             cal_busy,
  output logic             cal_ready
);

  logic [COARSE_BITS-1:0] coarse;
  logic                   prev_lvl, primed;

  // Stage 1: edge detection and first-difference encoding.
  logic                   edge_now;
  logic [BIN_W-1:0]       bin_now;
  logic                   s1_valid;
  edge_e                  s1_pol;
  logic [BIN_W-1:0]       s1_bin;
  logic [COARSE_BITS-1:0] s1_coarse;

  // Stage 2: calibrated fine time.
  logic [FINE_BITS-1:0]   fine;

  assign edge_now = primed && (taps[0] != prev_lvl);

  always_comb begin
    bin_now = BIN_W'(TAPS - 1);
    for (int i = TAPS - 1; i >= 1; i--) begin
      if (taps[i] != taps[0]) bin_now = BIN_W'(i - 1);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      coarse   <= '0;
      prev_lvl <= 1'b0;
      primed   <= 1'b0;
      s1_valid <= 1'b0;
      s1_pol   <= EDGE_FALL;
      s1_bin   <= '0;
      s1_coarse <= '0;
      hit      <= '0;
    end else begin
      coarse    <= coarse + 1'b1;
      prev_lvl  <= taps[0];
      primed    <= 1'b1;
      s1_valid  <= edge_now;
      s1_pol    <= edge_e'(taps[0]);
      s1_bin    <= bin_now;
      s1_coarse <= coarse;
      hit.valid <= s1_valid;
      hit.pol   <= s1_pol;
      hit.ts    <= {s1_coarse, {FINE_BITS{1'b0}}} - TS_BITS'(fine);
    end
  end

  tdc_calib #(
    .TAPS      (TAPS),
    .LOG2_HITS (CAL_LOG2_HITS)
  ) u_calib (
    .clk            (clk),
    .rst            (rst),
    .hit_valid      (s1_valid),
    .hit_bin        (s1_bin),
    .cal_start      (cal_start),
    .cal_continuous (cal_continuous),
    .rd_bin         (s1_bin),
    .rd_fine        (fine),
    .cal_busy       (cal_busy),
    .cal_ready      (cal_ready)
  );

endmodule
