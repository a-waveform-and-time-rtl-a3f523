// tdc_encoder -- turns delay-line snapshots into coarse + fine time stamps.
//
// A TDC measurement has two parts: a coarse count of 4 ns system clock
// periods and a fine count, the number of delay taps the ToT rising edge has
// travelled along the delay line by the next rising clock edge (about 12 ps
// per tap on average). In a snapshot taps [0 .. fine-1] are high and the
// rest still low, because tap 0 holds the newest ToT value. The fine count
// is taken as the number of ones in the snapshot, which tolerates the
// bubbles (isolated wrong bits) that uneven taps produce near the edge.
// A new rising edge is recognised when tap 0 is high and was low in the
// previous snapshot, so ToT pulses and the gaps between them must be longer
// than one clock period. An edge that has not reached tap 0 by a clock edge
// is seen one clock later with a count near the end of the line, so fine
// is never 0 and its codes span one clock period starting at tap 0's delay.
// Decoding by ones count and the edge rule are this design's choices.
//
// Timing: the snapshot from the delay line is registered once more (second
// capture stage), then decoded; hit_valid pulses two cycles after the
// sampling clock edge. coarse is the value the time-stamp counter held right
// after that sampling edge, so the ToT edge happened fine taps before the
// clock edge numbered coarse.
module tdc_encoder
  import trident_pkg::*;
#(
  parameter int unsigned N_TAPS = 4 * N_CARRY4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N_TAPS-1:0] taps,
  input  logic [TS_W-1:0]   ts,          // free-running 4 ns counter
  output logic              hit_valid,
  output tdc_hit_t          hit
);
  timeunit 1ns; timeprecision 1ps;

  logic [N_TAPS-1:0] snap;
  logic [TS_W-1:0]   snap_ts;
  logic              prev_tap0;
  logic [8:0]        ones;

  always_comb begin
    ones = '0;
    for (int i = 0; i < int'(N_TAPS); i++) ones = ones + 9'(snap[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      snap      <= '0;
      snap_ts   <= '0;
      prev_tap0 <= 1'b0;
      hit_valid <= 1'b0;
      hit       <= '0;
    end else begin
      snap      <= taps;
      snap_ts   <= ts;
      prev_tap0 <= snap[0];
      hit_valid <= snap[0] && !prev_tap0;
      if (snap[0] && !prev_tap0) hit <= '{coarse: snap_ts, fine: ones};
    end
  end

  // The fine count must fit its 9-bit field.
  initial assert (N_TAPS < 512);
endmodule
