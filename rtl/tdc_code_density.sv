// tdc_code_density -- fine-code histogram for the TDC code-density calibration.
//
// The delay taps of a TDC line are unequal. If many hits arrive at times
// unrelated to the TDC clock, each fine code is hit in proportion to the
// delay of its tap, so the histogram of fine codes gives every tap's width:
// width(i) = 4 ns * count(i) / total. Differential non-linearity is
// count(i) / mean count - 1, and integral non-linearity its running sum.
// This block fills that histogram inside the FPGA from one TDC channel's
// hits; dividing and summing is left to the readout software. Filling it in
// the FPGA rather than offline is this design's choice.
//
// Interface: clear zeroes all bins, one bin per cycle (busy while it runs;
// hits are ignored meanwhile). enable gates counting. Bins saturate at
// their maximum. rd_addr selects a bin; rd_data shows it one cycle later.
// total counts all hits counted since the last clear.
module tdc_code_density #(
  parameter int unsigned N_BINS = 384,
  parameter int unsigned CNT_W  = 24
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       clear,
  input  logic                       enable,
  input  logic                       hit_valid,
  input  logic [8:0]                 fine,
  input  logic [$clog2(N_BINS)-1:0]  rd_addr,
  output logic [CNT_W-1:0]           rd_data,
  output logic [31:0]                total,
  output logic                       busy
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned AW = $clog2(N_BINS);

  logic [CNT_W-1:0] hist [N_BINS];
  logic [AW-1:0]    clr_addr;
  logic             count_it;
  logic [AW-1:0]    bin;

  assign bin      = AW'(fine);
  assign count_it = enable && !busy && hit_valid && (fine < 9'(N_BINS));

  always_ff @(posedge clk) begin
    if (busy)
      hist[clr_addr] <= '0;
    else if (count_it && hist[bin] != '1)
      hist[bin] <= hist[bin] + 1'b1;
    rd_data <= hist[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      busy     <= 1'b1;
      clr_addr <= '0;
      total    <= '0;
    end else begin
      if (busy) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == AW'(N_BINS - 1)) busy <= 1'b0;
      end
      if (count_it) total <= total + 1'b1;
    end
  end
endmodule
