// tdc_calib -- bin-by-bin (code density) calibration of one carry-chain TDC.
//
// The taps of a carry chain have unequal delays, so the raw tap position of
// an edge is not a linear time. Edges that arrive at random with respect to
// the 250 MHz clock fall into each raw bin with a probability proportional to
// that bin's delay. This block counts 2**LOG2_HITS such edges in a histogram
// (one counter per raw bin), then sweeps the histogram once and writes, for
// every bin b, the calibrated fine time of the bin centre
//     cal[b] = (sum_{j<b} N_j + N_b/2) >> (LOG2_HITS - 9)
// i.e. the position of the bin centre inside the 4 ns clock period in units
// of 4 ns / 512. The sweep clears the histogram for the next run. Because the
// hit total is a power of two, the normalisation is a shift.
//
// The paper states that the TDC is "normalized to 9 bits after online delay
// tap calibration (bin-by-bin)"; the histogram/cumulative-sum method, the
// hit count, the start/continuous control and the uniform table loaded after
// reset are this design's choices.
//
// Interface: hit_valid/hit_bin come from the TDC encoder (at most one edge
// per clock). cal_start (pulse) starts one run; with cal_continuous high a new
// run starts after each sweep, so the table follows temperature drift while
// the converter runs. rd_bin -> rd_fine is a combinational table read
// (distributed RAM). cal_ready goes high after the first completed run.
// Timing: after reset an init sweep of TAPS clocks loads a table that assumes
// equal taps; a run takes 2**LOG2_HITS hits plus a TAPS-clock sweep, during
// which the table is rewritten bin by bin in place.
module tdc_calib
  import tiadc_pkg::*;
#(
  parameter int unsigned TAPS      = 320,
  parameter int unsigned LOG2_HITS = 16,
  localparam int unsigned BIN_W    = $clog2(TAPS),
  localparam int unsigned CNT_W    = LOG2_HITS + 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 hit_valid,
  input  logic [BIN_W-1:0]     hit_bin,
  input  logic                 cal_start,
  input  logic                 cal_continuous,
  input  logic [BIN_W-1:0]     rd_bin,
  output logic [FINE_BITS-1:0] rd_fine,
  output logic                 cal_busy,
  output logic                 cal_ready
);

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_COLLECT, S_SWEEP} state_e;

  state_e                 state;
  logic [CNT_W-1:0]       hist [TAPS];
  logic [FINE_BITS-1:0]   cal  [TAPS];
  logic [LOG2_HITS-1:0]   hits;       // hits counted in this run
  logic [BIN_W-1:0]       idx;        // sweep index
  logic [CNT_W-1:0]       cum;        // cumulative count below idx
  logic [CNT_W-1:0]       n_cur;
  logic [CNT_W:0]         centre;
  logic                   last_idx;

  assign n_cur    = hist[idx];
  assign centre   = {1'b0, cum} + {1'b0, n_cur >> 1};
  assign last_idx = (idx == BIN_W'(TAPS - 1));
  assign rd_fine  = cal[rd_bin];
  assign cal_busy = (state == S_COLLECT) || (state == S_SWEEP);

  // Table that assumes TAPS equal bins spread over the period.
  function automatic logic [FINE_BITS-1:0] uniform_fine(input logic [BIN_W-1:0] b);
    logic [31:0] v;
    v = ((32'(b) * 2 + 1) * (32'(1) << (FINE_BITS - 1))) / TAPS;
    return (v > 32'((1 << FINE_BITS) - 1)) ? FINE_BITS'((1 << FINE_BITS) - 1) : v[FINE_BITS-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_INIT;
      idx       <= '0;
      cum       <= '0;
      hits      <= '0;
      cal_ready <= 1'b0;
    end else begin
      unique case (state)
        S_INIT: begin
          hist[idx] <= '0;
          cal[idx]  <= uniform_fine(idx);
          idx       <= last_idx ? '0 : idx + 1'b1;
          if (last_idx) state <= S_IDLE;
        end
        S_IDLE: begin
          hits <= '0;
          if (cal_start || cal_continuous) state <= S_COLLECT;
        end
        S_COLLECT: begin
          if (hit_valid) begin
            hist[hit_bin] <= hist[hit_bin] + 1'b1;
            hits          <= hits + 1'b1;
            if (&hits) begin
              state <= S_SWEEP;
              idx   <= '0;
              cum   <= '0;
            end
          end
        end
        S_SWEEP: begin
          cal[idx]  <= FINE_BITS'(centre >> (LOG2_HITS - FINE_BITS));
          hist[idx] <= '0;
          cum       <= cum + n_cur;
          idx       <= last_idx ? '0 : idx + 1'b1;
          if (last_idx) begin
            state     <= S_IDLE;
            cal_ready <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (LOG2_HITS >= FINE_BITS) else $error("LOG2_HITS must be at least FINE_BITS");
    assert (TAPS >= 2) else $error("TAPS must be at least 2");
  end

endmodule
