// channel_discriminator -- baseline tracking and threshold test for one ADC channel.
//
// The self-trigger of a channel fires when an incoming sample departs from
// the channel's baseline by more than a configurable threshold. PMT pulses
// are negative-going after the front end, so the deviation tested is
// baseline - sample. How the baseline is obtained is this design's choice:
// an exponential moving average over 2^AVG_SHIFT samples, loaded with the
// first sample after reset and frozen while the channel is over threshold
// so that pulses do not pull it. Samples are two's complement.
//
// Timing: one cycle after each sample_valid, out_valid pulses with the
// same sample on sample_q and its over and hit flags (all registered); hit
// is high on the first over-threshold sample of a pulse (rising edge of
// over). baseline is the current estimate.
module channel_discriminator
  import trident_pkg::*;
#(
  parameter int unsigned AVG_SHIFT = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       sample_valid,
  input  logic signed [SAMPLE_W-1:0] sample,
  input  logic        [SAMPLE_W-1:0] threshold,   // positive deviation, ADC counts
  output logic signed [SAMPLE_W-1:0] baseline,
  output logic                       out_valid,
  output logic signed [SAMPLE_W-1:0] sample_q,
  output logic                       over,
  output logic                       hit
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned AW = SAMPLE_W + AVG_SHIFT + 1;

  logic signed [AW-1:0]      acc;        // baseline * 2^AVG_SHIFT
  logic                      primed;
  logic signed [SAMPLE_W+1:0] dev;
  logic                      over_now;

  assign baseline = SAMPLE_W'(acc >>> AVG_SHIFT);
  assign dev      = (SAMPLE_W+2)'(baseline) - (SAMPLE_W+2)'(sample);
  assign over_now = primed && (dev > $signed({2'b00, threshold}));

  always_ff @(posedge clk) begin
    if (rst) begin
      acc    <= '0;
      primed <= 1'b0;
      over   <= 1'b0;
      hit    <= 1'b0;
      out_valid <= 1'b0;
      sample_q  <= '0;
    end else begin
      hit       <= 1'b0;
      out_valid <= sample_valid;
      if (sample_valid) begin
        sample_q <= sample;
        over <= over_now;
        hit  <= over_now && !over;
        if (!primed) begin
          acc    <= AW'(sample) <<< AVG_SHIFT;
          primed <= 1'b1;
        end else if (!over_now) begin
          acc <= acc + AW'(sample) - AW'(baseline);
        end
      end
    end
  end
endmodule
