// trigger_control -- selects the trigger mode and issues readout requests.
//
// Three modes, chosen at run time by mode:
//   TRIG_SELF  : every channel is read out on its own hit (self-trigger).
//   TRIG_COINC : all channels are read out when the coincidence trigger fires.
//   TRIG_EXT   : all channels are read out on the rising edge of the external
//                trigger input (e.g. the trigger output of a pulsed laser).
// The external input is asynchronous; it passes two synchroniser flip-flops
// before its rising edge is detected. Which channels a coincidence reads
// out is not fixed by the mainboard description; here it reads all of them.
//
// TDC measurements follow the mode through tdc_keep: it is always high in
// self-trigger mode and, in the other two modes, high for tdc_gate_len clock
// cycles after each global trigger. The gate is this design's choice.
//
// Timing: read_req and global_trig are registered one-cycle pulses, one
// cycle after the hit / coincidence pulse and three cycles after an
// external edge. The counters count issued triggers per mode (wrapping).
module trigger_control
  import trident_pkg::*;
#(
  parameter int unsigned N_CH = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  trig_mode_e       mode,
  input  logic [N_CH-1:0]  hit,          // per-channel self-trigger pulses
  input  logic             coinc_trig,   // from coincidence_trigger
  input  logic             ext_trig_in,  // asynchronous external request
  input  logic [15:0]      tdc_gate_len, // cycles TDC hits are kept after a trigger
  output logic [N_CH-1:0]  read_req,     // per-channel record request
  output logic             global_trig,  // an all-channel trigger was issued
  output logic             tdc_keep,     // TDC hits are recorded now
  output logic [31:0]      n_self,
  output logic [31:0]      n_coinc,
  output logic [31:0]      n_ext
);
  timeunit 1ns; timeprecision 1ps;

  logic [2:0] ext_sync;
  logic       ext_edge;

  logic [15:0] gate_cnt;

  assign ext_edge = ext_sync[1] && !ext_sync[2];
  assign tdc_keep = (mode == TRIG_SELF) || (gate_cnt != '0);

  always_ff @(posedge clk) begin
    if (rst)                   gate_cnt <= '0;
    else if (global_trig)      gate_cnt <= tdc_gate_len;
    else if (gate_cnt != '0)   gate_cnt <= gate_cnt - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ext_sync    <= '0;
      read_req    <= '0;
      global_trig <= 1'b0;
      n_self      <= '0;
      n_coinc     <= '0;
      n_ext       <= '0;
    end else begin
      ext_sync    <= {ext_sync[1:0], ext_trig_in};
      read_req    <= '0;
      global_trig <= 1'b0;
      unique case (mode)
        TRIG_SELF: begin
          read_req <= hit;
          if (hit != '0) n_self <= n_self + 1'b1;
        end
        TRIG_COINC: if (coinc_trig) begin
          read_req    <= '1;
          global_trig <= 1'b1;
          n_coinc     <= n_coinc + 1'b1;
        end
        TRIG_EXT: if (ext_edge) begin
          read_req    <= '1;
          global_trig <= 1'b1;
          n_ext       <= n_ext + 1'b1;
        end
        default: ;
      endcase
    end
  end
endmodule
