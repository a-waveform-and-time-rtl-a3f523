// carry4_delay_line -- behavioural model of an FPGA tapped delay line.
//
// Behavioural model, not synthesizable: in the FPGA this is a chain of
// N_CARRY4 CARRY4 carry cells (4 taps each) fed by the ToT signal, with the
// flip-flop behind every tap clocked by the TDC system clock. The model
// reproduces what those flip-flops hold after each rising clock edge: tap i
// shows the ToT level as it was (sum of delays of taps 0..i) before the
// edge. Tap 0 is therefore the newest value and higher taps are older.
//
// The tap delays average TAP_PS picoseconds. Real taps differ from each
// other, which is what the code-density calibration measures; the model
// spreads them deterministically between about 0.5 and 1.5 times the mean.
// The line of the real design spans two FPGA clock regions, and the
// measured non-linearity shows a feature around fine code 180 where it
// crosses their boundaries. The model marks this by making the 2*BND_HALF
// taps centred on tap BND_TAP 0.4 times as long as elsewhere (a run of
// narrow codes). Where the feature sits follows the measurement; its width,
// its depth and the spread pattern are this model's own (the line is about
// 4.4 ns long at the defaults).
//
// The ToT level at any past instant is reconstructed from its last rising
// and last falling edge, which is exact as long as edges are more than one
// chain length apart.
//
// Interface: tot is the asynchronous ToT input, clk the 4 ns TDC clock,
// taps the captured snapshot (updated at each rising clk edge).
module carry4_delay_line #(
  parameter int unsigned N_CARRY4 = 96,
  parameter int unsigned TAP_PS   = 12,
  parameter int unsigned SEED     = 1,    // varies the delay pattern per channel
  parameter int unsigned BND_TAP  = 180,  // centre of the clock-region crossing
  parameter int unsigned BND_HALF = 12
) (
  input  logic                    clk,
  input  logic                    tot,
  output logic [4*N_CARRY4-1:0]   taps
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned N_TAPS = 4 * N_CARRY4;

  realtime cum_ns [N_TAPS];   // delay from the chain input to tap i
  realtime t_rise, t_fall;

  initial begin
    automatic realtime acc = 0.0;
    automatic logic [31:0] h;
    automatic logic [7:0] frac;
    automatic real f;
    for (int i = 0; i < int'(N_TAPS); i++) begin
      h    = (32'(i) + 32'(SEED) * 32'd7919) * 32'd2654435761;
      frac = h[31:24];
      // delay factor 0.5 .. 1.5 of the mean, from bits of a hash of the tap index
      f = 0.5 + real'(frac) / 255.0;
      if (i >= int'(BND_TAP) - int'(BND_HALF) && i < int'(BND_TAP) + int'(BND_HALF))
        f = 0.4 * f;
      acc = acc + (real'(TAP_PS) / 1000.0) * f;
      cum_ns[i] = acc;
    end
    t_rise = -1.0e9;
    t_fall = -1.0e9;
    taps   = '0;
  end

  always @(posedge tot) t_rise <= $realtime;
  always @(negedge tot) t_fall <= $realtime;

  function automatic logic level_at(realtime t);
    if (t >= t_rise && t >= t_fall) return t_rise > t_fall;
    if (t >= t_rise)                return 1'b1;
    if (t >= t_fall)                return 1'b0;
    return t_fall < t_rise;
  endfunction

  // When both edges are older than the whole line, every tap shows the
  // present level and the per-tap evaluation can be skipped.
  always @(posedge clk) begin
    if ($realtime - cum_ns[N_TAPS-1] > t_rise && $realtime - cum_ns[N_TAPS-1] > t_fall)
      taps <= {N_TAPS{level_at($realtime)}};
    else
      for (int i = 0; i < int'(N_TAPS); i++)
        taps[i] <= level_at($realtime - cum_ns[i]);
  end
endmodule
