// energy_integrator -- energy of a scintillation pulse from the sample stream.
//
// The corrected 50 MS/s waveform is compared with a pedestal (baseline) set by
// the host. Each sample gives an amplitude, value - pedestal, or
// pedestal - value when neg_polarity is set (the detector pulse goes below
// the baseline). When the amplitude exceeds threshold the block starts an
// event and sums the amplitudes of that sample and the next WINDOW-1 samples;
// the sum is the event energy. Further triggers are ignored until the window
// ends, so the block has a dead time of WINDOW samples.
//
// The paper only names the integration stage that turns the waveform into an
// energy; the pedestal subtraction, the threshold trigger, the fixed window
// (default 16 samples = 320 ns at 50 MS/s) and the polarity switch are this
// design's choices.
//
// Interface: in is the sample stream (valid per clock). Its channel field is
// not used, because the merged stream is already in time order. energy_valid pulses
// for one clock with the signed energy, on the clock after the last sample
// of the window. events counts the energies produced since reset.
module energy_integrator
  import tiadc_pkg::*;
#(
  parameter int unsigned WINDOW = 16
) (
  input  logic                          clk,
  input  logic                          rst,
  input  sample_t                       in,
  input  logic [SAMPLE_BITS-1:0]        pedestal,
  input  logic [SAMPLE_BITS-1:0]        threshold,
  input  logic                          neg_polarity,
  output logic                          energy_valid,
  output logic signed [ENERGY_BITS-1:0] energy,
  output logic [31:0]                   events,
  output logic                          busy
);

  localparam int unsigned NW = $clog2(WINDOW + 1);

  logic signed [SAMPLE_BITS:0]      amp;
  logic signed [ENERGY_BITS-1:0]    acc, acc_next;
  logic [NW-1:0]                    n;        // samples summed so far
  logic                             trig;

  assign amp = neg_polarity ? ($signed({1'b0, pedestal}) - $signed({1'b0, in.value}))
                            : ($signed({1'b0, in.value}) - $signed({1'b0, pedestal}));
  assign trig     = in.valid && !busy && (amp > $signed({1'b0, threshold}));
  assign acc_next = (busy ? acc : '0) + ENERGY_BITS'(amp);

  always_ff @(posedge clk) begin
    if (rst) begin
      busy         <= 1'b0;
      acc          <= '0;
      n            <= '0;
      energy_valid <= 1'b0;
      energy       <= '0;
      events       <= '0;
    end else begin
      energy_valid <= 1'b0;
      if (trig || (busy && in.valid)) begin
        if ((busy ? n : '0) == NW'(WINDOW - 1)) begin
          busy         <= 1'b0;
          energy_valid <= 1'b1;
          energy       <= acc_next;
          events       <= events + 1'b1;
        end else begin
          busy <= 1'b1;
          acc  <= acc_next;
          n    <= (busy ? n : '0) + 1'b1;
        end
      end
    end
  end

  initial assert (WINDOW >= 1) else $error("WINDOW must be at least 1");

endmodule
