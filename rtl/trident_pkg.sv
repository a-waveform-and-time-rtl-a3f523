// trident_pkg -- constants and types shared by the hDOM mainboard firmware.
//
// Channel counts, sample width and delay-line length follow the mainboard
// description: 32 PMT channels digitised at 125 MS/s with 16-bit samples by
// two 16-channel ADCs, 56 TDC channels (32 PMT + 24 SiPM), and TDC delay
// lines of 96 CARRY4 cells with 4 taps each. The timestamp width, the trigger
// mode encoding and the 32-bit record word format are choices of this design.
//
// Record formats written to the event stream (one 32-bit word per line):
//   ADC record : {TAG_ADC, mode[1:0], ch[5:0], 4'h0, nsamples[15:0]}
//                {16'h0, ts[47:32]}
//                {ts[31:0]}                      trigger time, 4 ns ticks
//                {16'h0, baseline[15:0]}
//                nsamples/2 words {sample[2k], sample[2k+1]}
//   TDC record : {TAG_TDC, 2'b00, ch[5:0], 11'h0, fine[8:0]}
//                {16'h0, coarse[47:32]}
//                {coarse[31:0]}
//   filler     : 32'h0000_0000 (pads the last 128-bit memory word)
package trident_pkg;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned N_PMT     = 32;  // PMT channels (ADC + TDC)
  localparam int unsigned N_SIPM    = 24;  // SiPM ToT channels (TDC only)
  localparam int unsigned N_TDC     = N_PMT + N_SIPM;
  localparam int unsigned N_ADC     = 2;   // 16-channel ADCs
  localparam int unsigned ADC_CH    = 16;  // converters per ADC
  localparam int unsigned SAMPLE_W  = 16;  // bits per ADC sample
  localparam int unsigned N_CARRY4  = 96;  // CARRY4 cells per delay line
  localparam int unsigned TS_W      = 48;  // timestamp width, 4 ns ticks
  localparam int unsigned CH_W      = 6;   // channel number field

  typedef enum logic [1:0] {
    TRIG_SELF  = 2'd0,   // each channel triggers itself on threshold
    TRIG_COINC = 2'd1,   // multiplicity within a time window
    TRIG_EXT   = 2'd2    // external trigger request, all channels
  } trig_mode_e;

  localparam logic [3:0] TAG_ADC = 4'hA;
  localparam logic [3:0] TAG_TDC = 4'hC;

  // Information FIFO entry of one ADC record.
  typedef struct packed {
    logic [1:0]          mode;
    logic [TS_W-1:0]     ts;
    logic [SAMPLE_W-1:0] baseline;
    logic [15:0]         nsamples;
  } adc_info_t;

  // One TDC measurement.
  typedef struct packed {
    logic [TS_W-1:0] coarse;
    logic [8:0]      fine;
  } tdc_hit_t;
endpackage
