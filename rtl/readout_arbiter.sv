// readout_arbiter -- event builder draining the record FIFOs into one stream.
//
// Every ADC channel offers complete waveform records (an information FIFO
// entry plus its samples in a data FIFO) and every TDC channel offers single
// hits. The arbiter serves these N_ADC_CH + N_TDC sources in round-robin
// order, one whole record at a time, and writes the records as 32-bit words
// (formats in trident_pkg) to a valid/ready stream that feeds the DDR3
// buffer. Round-robin service and the word formats are this design's own.
//
// ADC record: 4 header words (tag/mode/channel/length, time stamp high and
// low, baseline) then nsamples/2 sample words, each popped from the data FIFO
// as it is sent; the information entry is popped with the last word.
// TDC record: 3 words (tag/channel/fine, coarse high, coarse low).
//
// Timing: out_data/out_valid are combinational from the state; a word moves
// when out_valid and out_ready are both high. One cycle is spent choosing
// the next source between records.
module readout_arbiter
  import trident_pkg::*;
#(
  parameter int unsigned N_ADC_CH = N_PMT,
  parameter int unsigned N_TDC_CH = N_TDC
) (
  input  logic                               clk,
  input  logic                               rst,
  // ADC channels
  input  logic      [N_ADC_CH-1:0]           info_empty,
  input  adc_info_t [N_ADC_CH-1:0]           info_data,
  output logic      [N_ADC_CH-1:0]           info_pop,
  input  logic      [N_ADC_CH-1:0]           data_empty,
  input  logic      [N_ADC_CH-1:0][31:0]     data_rdata,
  output logic      [N_ADC_CH-1:0]           data_pop,
  // TDC channels
  input  logic      [N_TDC_CH-1:0]           tdc_empty,
  input  tdc_hit_t  [N_TDC_CH-1:0]           tdc_data,
  output logic      [N_TDC_CH-1:0]           tdc_pop,
  // record stream
  output logic                               out_valid,
  output logic      [31:0]                   out_data,
  input  logic                               out_ready,
  output logic      [31:0]                   n_records
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned N_SRC = N_ADC_CH + N_TDC_CH;
  localparam int unsigned SW    = $clog2(N_SRC);
  localparam int unsigned AIW   = (N_ADC_CH > 1) ? $clog2(N_ADC_CH) : 1;
  localparam int unsigned TIW   = (N_TDC_CH > 1) ? $clog2(N_TDC_CH) : 1;

  typedef enum logic [2:0] {S_IDLE, S_HDR, S_DATA, S_TDC} state_e;

  state_e         state;
  logic [SW-1:0]  cur, rr_next;
  logic [1:0]     word;          // header / TDC word index
  logic [15:0]    left;          // sample words still to send
  logic [N_SRC-1:0] req;
  logic           found;
  logic [SW-1:0]  pick;
  adc_info_t      ci;
  tdc_hit_t       th;
  logic [CH_W-1:0] adc_ch, tdc_ch;
  logic           fire;
  logic [AIW-1:0] ai;            // ADC channel index of cur
  logic [TIW-1:0] ti;            // TDC channel index of cur

  assign req = {~tdc_empty, ~info_empty};

  // Round-robin choice: first requesting source at or after rr_next.
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 0; k < int'(N_SRC); k++) begin
      automatic logic [SW-1:0] idx = SW'((int'(rr_next) + k) % N_SRC);
      if (!found && req[idx]) begin
        found = 1'b1;
        pick  = SW'(idx);
      end
    end
  end

  assign ai     = (cur < SW'(N_ADC_CH)) ? AIW'(cur) : '0;
  assign ti     = (cur >= SW'(N_ADC_CH)) ? TIW'(cur - SW'(N_ADC_CH)) : '0;
  assign ci     = info_data[ai];
  assign th     = tdc_data[ti];
  assign adc_ch = CH_W'(cur);
  assign tdc_ch = CH_W'(cur - SW'(N_ADC_CH));

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    unique case (state)
      S_HDR: begin
        out_valid = 1'b1;
        unique case (word)
          2'd0: out_data = {TAG_ADC, ci.mode, adc_ch, 4'h0, ci.nsamples};
          2'd1: out_data = {16'h0, ci.ts[47:32]};
          2'd2: out_data = ci.ts[31:0];
          default: out_data = {16'h0, ci.baseline};
        endcase
      end
      S_DATA: begin
        out_valid = !data_empty[ai];
        out_data  = data_rdata[ai];
      end
      S_TDC: begin
        out_valid = 1'b1;
        unique case (word)
          2'd0: out_data = {TAG_TDC, 2'b00, tdc_ch, 11'h0, th.fine};
          2'd1: out_data = {16'h0, th.coarse[47:32]};
          default: out_data = th.coarse[31:0];
        endcase
      end
      default: ;
    endcase
  end

  assign fire = out_valid && out_ready;

  always_comb begin
    info_pop = '0;
    data_pop = '0;
    tdc_pop  = '0;
    if (fire && state == S_DATA) begin
      data_pop[ai] = 1'b1;
      if (left == 16'd1) info_pop[ai] = 1'b1;
    end
    if (fire && state == S_TDC && word == 2'd2)
      tdc_pop[ti] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      cur       <= '0;
      rr_next   <= '0;
      word      <= '0;
      left      <= '0;
      n_records <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (found) begin
          cur     <= pick;
          rr_next <= (pick == SW'(N_SRC - 1)) ? '0 : pick + 1'b1;
          word    <= '0;
          state   <= (pick < SW'(N_ADC_CH)) ? S_HDR : S_TDC;
        end
        S_HDR: if (fire) begin
          word <= word + 1'b1;
          if (word == 2'd3) begin
            left  <= ci.nsamples >> 1;
            state <= ((ci.nsamples >> 1) == 16'd0) ? S_IDLE : S_DATA;
            if ((ci.nsamples >> 1) == 16'd0) n_records <= n_records + 1'b1;
          end
        end
        S_DATA: if (fire) begin
          left <= left - 1'b1;
          if (left == 16'd1) begin
            state     <= S_IDLE;
            n_records <= n_records + 1'b1;
          end
        end
        S_TDC: if (fire) begin
          word <= word + 1'b1;
          if (word == 2'd2) begin
            state     <= S_IDLE;
            n_records <= n_records + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
