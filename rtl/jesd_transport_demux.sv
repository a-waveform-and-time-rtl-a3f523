// jesd_transport_demux -- splits the JESD204B stream of one ADC into channels.
//
// One 16-channel ADC sends each frame (one 16-bit sample of every converter)
// over LANES serial lanes. The JESD204B receiver core hands over one 32-bit
// word (4 octets) per lane per core-clock cycle, the first received octet in
// bits [7:0], and marks the first word of each frame with sof. With the link
// settings assumed here (L=4, M=16, N'=16, S=1, F=8) a frame takes two words
// per lane, so at a 250 MHz core clock one frame, i.e. 125 MS/s per channel,
// completes every other cycle. Following the JESD204B transport layer, lane l
// carries converters 4l..4l+3 in order, most significant octet first.
//
// Timing: when the second word of a frame is accepted, all N_CONV samples
// appear on sample[] one cycle later with sample_valid high for one cycle.
// A word without sof that does not follow a first word is discarded, so the
// demultiplexer re-aligns on the next sof.
module jesd_transport_demux
  import trident_pkg::*;
#(
  parameter int unsigned N_CONV = ADC_CH,      // converters in the link
  parameter int unsigned LANES  = 4            // JESD204B lanes
) (
  input  logic                                clk,
  input  logic                                rst,
  input  logic                                rx_valid,
  input  logic                                rx_sof,
  input  logic [LANES-1:0][31:0]              rx_data,
  output logic                                sample_valid,
  output logic [N_CONV-1:0][SAMPLE_W-1:0]     sample
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned CPL = N_CONV / LANES;   // converters per lane
  localparam int unsigned WPF = CPL / 2;          // 32-bit words per frame per lane

  logic [LANES-1:0][WPF-1:0][31:0] frame_q;
  logic [$clog2(WPF+1)-1:0]        word_idx;
  logic                            in_frame;

  // Octet o (0 = first received) of a 32-bit word sits in bits [8o+7:8o].
  function automatic logic [SAMPLE_W-1:0] conv_sample(
      input logic [WPF-1:0][31:0] words, input int unsigned k);
    logic [31:0] w;
    w = words[k / 2];
    if (k % 2 == 0) return {w[7:0],   w[15:8]};
    else            return {w[23:16], w[31:24]};
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      word_idx     <= '0;
      in_frame     <= 1'b0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      if (rx_valid) begin
        if (rx_sof || in_frame) begin
          automatic int unsigned idx = rx_sof ? 0 : int'(word_idx);
          for (int l = 0; l < int'(LANES); l++) frame_q[l][idx] <= rx_data[l];
          if (idx == WPF - 1) begin
            in_frame     <= 1'b0;
            word_idx     <= '0;
            sample_valid <= 1'b1;
          end else begin
            in_frame <= 1'b1;
            word_idx <= ($bits(word_idx))'(idx + 1);
          end
        end
      end
    end
  end

  // Output register view: the frame is complete once sample_valid rises.
  always_comb begin
    for (int l = 0; l < int'(LANES); l++)
      for (int k = 0; k < int'(CPL); k++)
        sample[l*CPL + k] = conv_sample(frame_q[l], k);
  end
endmodule
