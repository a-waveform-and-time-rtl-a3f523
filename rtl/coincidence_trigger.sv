// coincidence_trigger -- multiplicity trigger over a sliding time window.
//
// A coincidence trigger requires at least mult channels to have fired within
// a time window. A channel hit (a one-cycle pulse, on any clock cycle, so
// that channels of different ADCs need not be aligned) opens a per-channel
// window that stays open during the hit cycle and the next window ADC
// samples (counted by sample_valid). The trigger fires in the cycle where the
// number of open windows first reaches mult, and re-arms only after the
// number drops below mult again, so one cluster of hits gives one trigger.
// window and mult are run-time settings (mult = 0 is treated as 1).
//
// Timing: trig is a registered one-cycle pulse, one cycle after the hit
// that completes the coincidence.
module coincidence_trigger #(
  parameter int unsigned N_CH  = 32,
  parameter int unsigned WIN_W = 8
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       sample_valid,
  input  logic [N_CH-1:0]            hit,
  input  logic [WIN_W-1:0]           window,   // samples a hit stays counted
  input  logic [$clog2(N_CH+1)-1:0]  mult,     // channels required
  output logic                       trig,
  output logic [$clog2(N_CH+1)-1:0]  active_count
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned CW = $clog2(N_CH+1);

  logic [N_CH-1:0][WIN_W-1:0] remain;
  logic [N_CH-1:0]            open_now;
  logic [CW-1:0]              need;
  logic                       armed;

  always_comb begin
    active_count = '0;
    for (int i = 0; i < int'(N_CH); i++) begin
      open_now[i]  = hit[i] || (remain[i] != '0);
      active_count = active_count + CW'(open_now[i]);
    end
    need = (mult == '0) ? CW'(1) : mult;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      remain <= '0;
      armed  <= 1'b1;
      trig   <= 1'b0;
    end else begin
      trig <= 1'b0;
      for (int i = 0; i < int'(N_CH); i++) begin
        if (hit[i])                                remain[i] <= window;
        else if (sample_valid && remain[i] != '0)  remain[i] <= remain[i] - 1'b1;
      end
      if (active_count >= need) begin
        if (armed) trig <= 1'b1;
        armed <= 1'b0;
      end else begin
        armed <= 1'b1;
      end
    end
  end
endmodule
