// waveform_recorder -- pre-trigger buffer and record FIFOs for one ADC channel.
//
// Every ADC sample first passes a circular delay buffer of PRE samples, so
// the stream leaving it lags the input by PRE samples. When a readout
// request is accepted the recorder copies LEN consecutive samples of that
// delayed stream into the data FIFO, packed two per 32-bit word (earlier
// sample in the upper half). The record therefore starts PRE samples before
// the sample that was on the input when the request arrived, which keeps the
// waveform ahead of the trigger. When the last pair is written, the trigger
// time stamp, the baseline, the trigger mode and the sample count go into a
// separate information FIFO, so a reader that sees an information entry
// always finds the complete waveform behind it.
//
// A request is accepted only when the recorder is idle, the delay buffer has
// been filled once, and both FIFOs have room for a whole record; a request
// that fails the room test is dropped and counted in n_drop. Requests that
// arrive while a record is being written are ignored (the record already
// covers them). PRE, LEN and the FIFO depths are choices of this design;
// LEN must be even.
//
// Timing: trig may come on any cycle; it is sampled with the sample on the
// input in that cycle. Samples arrive with sample_valid, at most one per cycle.
module waveform_recorder
  import trident_pkg::*;
#(
  parameter int unsigned PRE        = 128,  // pre-trigger samples
  parameter int unsigned LEN        = 256,  // samples per record
  parameter int unsigned DATA_DEPTH = 512,  // 32-bit words in the data FIFO
  parameter int unsigned INFO_DEPTH = 4     // records in the information FIFO
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 sample_valid,
  input  logic [SAMPLE_W-1:0]  sample,
  input  logic [SAMPLE_W-1:0]  baseline,
  input  trig_mode_e           mode,
  input  logic [TS_W-1:0]      ts,
  input  logic                 trig,
  // information FIFO read side
  output logic                 info_empty,
  output adc_info_t            info_data,
  input  logic                 info_pop,
  // data FIFO read side
  output logic                 data_empty,
  output logic [31:0]          data_rdata,
  input  logic                 data_pop,
  // status
  output logic                 busy,
  output logic                 drop,
  output logic [15:0]          n_drop
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned PW = (PRE > 1) ? $clog2(PRE) : 1;
  localparam int unsigned DW = $clog2(DATA_DEPTH);
  localparam int unsigned LW = $clog2(LEN + 1);

  // ---- pre-trigger delay buffer -------------------------------------------
  logic [SAMPLE_W-1:0] dly_mem [PRE];
  logic [PW-1:0]       dly_ptr;
  logic [SAMPLE_W-1:0] dly_sample;
  logic                dly_valid;
  logic                primed;

  always_ff @(posedge clk) begin
    if (sample_valid) begin
      dly_sample       <= dly_mem[dly_ptr];
      dly_mem[dly_ptr] <= sample;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      dly_ptr   <= '0;
      dly_valid <= 1'b0;
      primed    <= 1'b0;
    end else begin
      dly_valid <= sample_valid && primed;
      if (sample_valid) begin
        if (dly_ptr == PW'(PRE - 1)) begin
          dly_ptr <= '0;
          primed  <= 1'b1;
        end else begin
          dly_ptr <= dly_ptr + 1'b1;
        end
      end
    end
  end

  // ---- record control -----------------------------------------------------
  logic                data_push, info_push, info_full, data_full;
  logic [31:0]         data_wdata;
  logic [DW:0]         data_count;
  logic [$clog2(INFO_DEPTH):0] info_count;
  adc_info_t           info_q;
  logic [LW-1:0]       remain;
  logic                half;
  logic [SAMPLE_W-1:0] hold;
  logic                room;

  assign room = primed && !info_full && (data_count <= (DW+1)'(DATA_DEPTH - LEN/2));

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      drop      <= 1'b0;
      n_drop    <= '0;
      remain    <= '0;
      half      <= 1'b0;
      hold      <= '0;
      data_push <= 1'b0;
      info_push <= 1'b0;
      info_q    <= '0;
    end else begin
      drop      <= 1'b0;
      data_push <= 1'b0;
      info_push <= 1'b0;
      if (!busy && trig) begin
        if (room) begin
          busy   <= 1'b1;
          remain <= LW'(LEN);
          half   <= 1'b0;
          info_q <= '{mode: mode, ts: ts, baseline: baseline, nsamples: 16'(LEN)};
        end else begin
          drop   <= 1'b1;
          n_drop <= n_drop + 1'b1;
        end
      end
      if (busy && dly_valid) begin
        half   <= !half;
        remain <= remain - 1'b1;
        if (!half) hold <= dly_sample;
        else begin
          data_push  <= 1'b1;
          data_wdata <= {hold, dly_sample};
        end
        if (remain == LW'(1)) begin
          busy      <= 1'b0;
          info_push <= 1'b1;
        end
      end
    end
  end

  sync_fifo #(.WIDTH(32), .DEPTH(DATA_DEPTH)) u_data_fifo (
    .clk, .rst, .push(data_push), .wr_data(data_wdata), .pop(data_pop),
    .rd_data(data_rdata), .empty(data_empty), .full(data_full), .count(data_count));

  sync_fifo #(.WIDTH($bits(adc_info_t)), .DEPTH(INFO_DEPTH)) u_info_fifo (
    .clk, .rst, .push(info_push), .wr_data(info_q), .pop(info_pop),
    .rd_data(info_data), .empty(info_empty), .full(info_full), .count(info_count));

  a_len_even: assert property (@(posedge clk) (LEN % 2) == 0);
endmodule
