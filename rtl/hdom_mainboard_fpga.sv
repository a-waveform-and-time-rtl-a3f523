// hdom_mainboard_fpga -- FPGA firmware of the hDOM waveform and time digitizer.
//
// The mainboard digitises up to 32 PMT signals twice: a shaped copy is
// sampled at 125 MS/s with 16 bits by two 16-channel ADCs that reach the
// FPGA over JESD204B, and a comparator turns each raw pulse into a
// time-over-threshold (ToT) signal whose rising edge is time-stamped by a
// delay-line TDC inside the FPGA. 24 more ToT signals from SiPMs use the
// same TDCs, for 56 TDC channels in all. This top wires the firmware:
//
//   JESD204B transport data -> jesd_transport_demux (x2) -> 32 channels
//   each channel -> channel_discriminator (baseline, threshold, hit)
//   hits -> coincidence_trigger, trigger_control (self / coincidence /
//           external mode) -> per-channel readout requests
//   each channel -> waveform_recorder (pre-trigger buffer, data FIFO and
//           information FIFO with time stamp)
//   56 ToT inputs -> tdc_channel (CARRY4 delay line, encoder, hit FIFO)
//   one TDC channel, selectable -> tdc_code_density (calibration histogram)
//   all FIFOs -> readout_arbiter -> ddr3_buffer_ctrl -> DDR3 port, SiTCP port
//
// The ADC, the JESD204B link layer and transceivers, the DDR3 controller,
// SiTCP, the White Rabbit module and the clock chip are outside this RTL;
// their signals are ports. Everything runs on one 250 MHz clock: the 4 ns TDC
// system clock, taken here to be the JESD204B core clock as well. The time
// stamp counts these 4 ns ticks and can be loaded (ts_load) with the White
// Rabbit time. The clocking arrangement, record formats, buffer sizes and
// the TDC gate in non-self modes are this design's choices; channel counts,
// sample rate and width, trigger modes, pre-trigger FIFOs, separate data and
// information FIFOs, DDR3 buffering, SiTCP readout, 96-CARRY4 delay lines,
// 4 ns coarse clock and code-density calibration follow the mainboard
// description.
//
// TDC channels 0..31 are the PMT ToT inputs (tot_pmt), 32..55 the SiPM ones.
module hdom_mainboard_fpga
  import trident_pkg::*;
#(
  parameter int unsigned N_PMT_P        = N_PMT,
  parameter int unsigned N_SIPM_P       = N_SIPM,
  parameter int unsigned LANES          = 4,
  parameter int unsigned PRE            = 128,
  parameter int unsigned LEN            = 256,
  parameter int unsigned DATA_DEPTH     = 512,
  parameter int unsigned INFO_DEPTH     = 4,
  parameter int unsigned TDC_FIFO_DEPTH = 16,
  parameter int unsigned N_CARRY4_P     = N_CARRY4,
  parameter int unsigned MEM_ADDR_W     = 24,
  parameter int unsigned AVG_SHIFT      = 4
) (
  input  logic                                     clk,
  input  logic                                     rst,
  // JESD204B receiver transport-layer output, one set per ADC
  input  logic [N_PMT_P/ADC_CH-1:0]                jesd_rx_valid,
  input  logic [N_PMT_P/ADC_CH-1:0]                jesd_rx_sof,
  input  logic [N_PMT_P/ADC_CH-1:0][LANES-1:0][31:0] jesd_rx_data,
  // ToT signals (asynchronous)
  input  logic [N_PMT_P-1:0]                       tot_pmt,
  input  logic [N_SIPM_P-1:0]                      tot_sipm,
  input  logic                                     ext_trig_in,
  // White Rabbit time
  input  logic                                     ts_load,
  input  logic [TS_W-1:0]                          ts_load_value,
  output logic [TS_W-1:0]                          ts,
  // configuration
  input  trig_mode_e                               trig_mode,
  input  logic [N_PMT_P-1:0][SAMPLE_W-1:0]         threshold,
  input  logic [7:0]                               coinc_window,
  input  logic [$clog2(N_PMT_P+1)-1:0]             coinc_mult,
  input  logic [15:0]                              tdc_gate_len,
  // code-density calibration
  input  logic [CH_W-1:0]                          cd_channel,
  input  logic                                     cd_clear,
  input  logic                                     cd_enable,
  input  logic [$clog2(4*N_CARRY4_P)-1:0]          cd_rd_addr,
  output logic [23:0]                              cd_rd_data,
  output logic [31:0]                              cd_total,
  output logic                                     cd_busy,
  // DDR3 controller port
  output logic                                     mem_cmd_valid,
  output logic                                     mem_write,
  output logic [MEM_ADDR_W-1:0]                    mem_addr,
  output logic [127:0]                             mem_wdata,
  input  logic                                     mem_ready,
  input  logic                                     mem_rd_valid,
  input  logic [127:0]                             mem_rd_data,
  // SiTCP transmit port
  output logic                                     tcp_tx_wr,
  output logic [7:0]                               tcp_tx_data,
  input  logic                                     tcp_tx_full,
  // status
  output logic [31:0]                              n_self,
  output logic [31:0]                              n_coinc,
  output logic [31:0]                              n_ext,
  output logic [31:0]                              n_records,
  output logic [N_PMT_P-1:0][15:0]                 adc_drops,
  output logic [N_PMT_P+N_SIPM_P-1:0][15:0]        tdc_drops,
  output logic [N_PMT_P+N_SIPM_P-1:0]              tdc_hit_seen,
  output logic [MEM_ADDR_W:0]                      ddr_level
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned NA   = N_PMT_P / ADC_CH;      // ADC chips
  localparam int unsigned NT   = N_PMT_P + N_SIPM_P;    // TDC channels

  // ---- time stamp -------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst)          ts <= '0;
    else if (ts_load) ts <= ts_load_value;
    else              ts <= ts + 1'b1;
  end

  // ---- ADC data: channel separation ------------------------------------------
  logic [NA-1:0]                            adc_valid;
  logic [NA-1:0][ADC_CH-1:0][SAMPLE_W-1:0]  adc_sample;

  for (genvar a = 0; a < int'(NA); a++) begin : g_adc
    jesd_transport_demux #(.N_CONV(ADC_CH), .LANES(LANES)) u_demux (
      .clk, .rst, .rx_valid(jesd_rx_valid[a]), .rx_sof(jesd_rx_sof[a]),
      .rx_data(jesd_rx_data[a]), .sample_valid(adc_valid[a]), .sample(adc_sample[a]));
  end

  // ---- discriminators ----------------------------------------------------------
  logic [N_PMT_P-1:0]                 ch_valid, ch_over, ch_hit;
  logic [N_PMT_P-1:0][SAMPLE_W-1:0]   ch_sample, ch_base;

  for (genvar c = 0; c < int'(N_PMT_P); c++) begin : g_disc
    channel_discriminator #(.AVG_SHIFT(AVG_SHIFT)) u_disc (
      .clk, .rst, .sample_valid(adc_valid[c / ADC_CH]),
      .sample(adc_sample[c / ADC_CH][c % ADC_CH]), .threshold(threshold[c]),
      .baseline(ch_base[c]), .out_valid(ch_valid[c]), .sample_q(ch_sample[c]),
      .over(ch_over[c]), .hit(ch_hit[c]));
  end

  // ---- trigger -----------------------------------------------------------------
  logic                                 coinc_trig, global_trig, tdc_keep;
  logic [N_PMT_P-1:0]                   read_req;
  logic [$clog2(N_PMT_P+1)-1:0]         coinc_active;

  coincidence_trigger #(.N_CH(N_PMT_P), .WIN_W(8)) u_coinc (
    .clk, .rst, .sample_valid(ch_valid[0]), .hit(ch_hit), .window(coinc_window),
    .mult(coinc_mult), .trig(coinc_trig), .active_count(coinc_active));

  trigger_control #(.N_CH(N_PMT_P)) u_trig (
    .clk, .rst, .mode(trig_mode), .hit(ch_hit), .coinc_trig, .ext_trig_in,
    .tdc_gate_len, .read_req, .global_trig, .tdc_keep,
    .n_self, .n_coinc, .n_ext);

  // ---- waveform recorders --------------------------------------------------------
  logic      [N_PMT_P-1:0]        info_empty, info_pop, data_empty, data_pop, rec_busy, rec_drop;
  adc_info_t [N_PMT_P-1:0]        info_data;
  logic      [N_PMT_P-1:0][31:0]  data_rdata;

  for (genvar c = 0; c < int'(N_PMT_P); c++) begin : g_rec
    waveform_recorder #(.PRE(PRE), .LEN(LEN), .DATA_DEPTH(DATA_DEPTH),
                        .INFO_DEPTH(INFO_DEPTH)) u_rec (
      .clk, .rst, .sample_valid(ch_valid[c]), .sample(ch_sample[c]),
      .baseline(ch_base[c]), .mode(trig_mode), .ts, .trig(read_req[c]),
      .info_empty(info_empty[c]), .info_data(info_data[c]), .info_pop(info_pop[c]),
      .data_empty(data_empty[c]), .data_rdata(data_rdata[c]), .data_pop(data_pop[c]),
      .busy(rec_busy[c]), .drop(rec_drop[c]), .n_drop(adc_drops[c]));
  end

  // ---- TDC channels --------------------------------------------------------------
  logic     [NT-1:0] tot_all, tdc_empty, tdc_pop;
  tdc_hit_t [NT-1:0] tdc_data;

  assign tot_all = {tot_sipm, tot_pmt};

  for (genvar t = 0; t < int'(NT); t++) begin : g_tdc
    tdc_channel #(.N_CARRY4_P(N_CARRY4_P), .FIFO_DEPTH(TDC_FIFO_DEPTH), .SEED(t + 1)) u_tdc (
      .clk, .rst, .tot(tot_all[t]), .ts, .keep(tdc_keep),
      .fifo_empty(tdc_empty[t]), .fifo_data(tdc_data[t]), .fifo_pop(tdc_pop[t]),
      .hit_seen(tdc_hit_seen[t]), .hit_fine(tdc_fine[t]), .n_drop(tdc_drops[t]));
  end

  // ---- code-density calibration on one selected channel ---------------------------
  // The histogram sees the encoder output of the selected channel whether or
  // not the trigger mode keeps the hit.
  logic [NT-1:0][8:0] tdc_fine;
  logic       cd_hit;
  logic [8:0] cd_fine;

  always_comb begin
    cd_hit  = 1'b0;
    cd_fine = '0;
    for (int t = 0; t < int'(NT); t++) begin
      if (CH_W'(t) == cd_channel) begin
        cd_hit  = tdc_hit_seen[t];
        cd_fine = tdc_fine[t];
      end
    end
  end

  tdc_code_density #(.N_BINS(4 * N_CARRY4_P), .CNT_W(24)) u_cd (
    .clk, .rst, .clear(cd_clear), .enable(cd_enable), .hit_valid(cd_hit),
    .fine(cd_fine), .rd_addr(cd_rd_addr), .rd_data(cd_rd_data),
    .total(cd_total), .busy(cd_busy));

  // ---- event builder and DDR3 / SiTCP buffer --------------------------------------
  logic        ev_valid, ev_ready, ring_full;
  logic [31:0] ev_data;

  readout_arbiter #(.N_ADC_CH(N_PMT_P), .N_TDC_CH(NT)) u_arb (
    .clk, .rst, .info_empty, .info_data, .info_pop, .data_empty, .data_rdata,
    .data_pop, .tdc_empty, .tdc_data, .tdc_pop, .out_valid(ev_valid),
    .out_data(ev_data), .out_ready(ev_ready), .n_records);

  ddr3_buffer_ctrl #(.MEM_ADDR_W(MEM_ADDR_W)) u_buf (
    .clk, .rst, .in_valid(ev_valid), .in_data(ev_data), .in_ready(ev_ready),
    .mem_cmd_valid, .mem_write, .mem_addr, .mem_wdata, .mem_ready,
    .mem_rd_valid, .mem_rd_data, .tcp_tx_wr, .tcp_tx_data, .tcp_tx_full,
    .level(ddr_level), .ring_full);
endmodule
