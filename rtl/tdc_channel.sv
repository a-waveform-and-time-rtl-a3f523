// tdc_channel -- one time-to-digital converter channel.
//
// The ToT signal of a PMT comparator or SiPM discriminator runs into a
// tapped delay line of N_CARRY4 carry cells (4 taps each) whose taps are
// captured by the 4 ns TDC clock; the encoder turns each rising edge into a
// coarse count plus a fine tap count. Whether a measurement is kept depends
// on the trigger mode: the keep input (from trigger_control) is high in
// self-trigger mode and, in the other modes, for a gate after each global
// trigger. Kept hits enter a hit FIFO read by the event builder; a hit that
// finds the FIFO full is dropped and counted.
//
// Timing: a hit is in the FIFO three cycles after the clock edge that
// captured it. keep is sampled when the encoder reports the hit.
module tdc_channel
  import trident_pkg::*;
#(
  parameter int unsigned N_CARRY4_P = N_CARRY4,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned SEED       = 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            tot,         // asynchronous ToT input
  input  logic [TS_W-1:0] ts,
  input  logic            keep,
  output logic            fifo_empty,
  output tdc_hit_t        fifo_data,
  input  logic            fifo_pop,
  output logic            hit_seen,    // an edge was measured (kept or not)
  output logic [8:0]      hit_fine,    // its fine count, valid with hit_seen
  output logic [15:0]     n_drop
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned N_TAPS = 4 * N_CARRY4_P;

  logic [N_TAPS-1:0] taps;
  logic              enc_valid;
  tdc_hit_t          enc_hit;
  logic              fifo_full;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;
  logic              push;

  carry4_delay_line #(.N_CARRY4(N_CARRY4_P), .SEED(SEED)) u_line (
    .clk, .tot, .taps);

  tdc_encoder #(.N_TAPS(N_TAPS)) u_enc (
    .clk, .rst, .taps, .ts, .hit_valid(enc_valid), .hit(enc_hit));

  assign push     = enc_valid && keep && !fifo_full;
  assign hit_seen = enc_valid;
  assign hit_fine = enc_hit.fine;

  always_ff @(posedge clk) begin
    if (rst) n_drop <= '0;
    else if (enc_valid && keep && fifo_full) n_drop <= n_drop + 1'b1;
  end

  sync_fifo #(.WIDTH($bits(tdc_hit_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .push, .wr_data(enc_hit), .pop(fifo_pop),
    .rd_data(fifo_data), .empty(fifo_empty), .full(fifo_full), .count(fifo_count));
endmodule
