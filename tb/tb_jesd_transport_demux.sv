// tb_jesd_transport_demux -- checks the JESD204B transport-layer split.
// Frames of 16 known 16-bit samples are encoded by the testbench into the
// lane/octet order of an L=4, M=16, F=8 link (lane l carries converters
// 4l..4l+3, MSB octet first, first octet in bits [7:0]) and sent as two
// words per lane, one frame every two cycles. Every decoded sample, the
// output rate (one frame per two cycles) and the one-cycle latency after the
// last word are checked, as is re-alignment after a stray word without sof.
module tb_jesd_transport_demux;
  timeunit 1ns; timeprecision 1ps;
  import trident_pkg::*;
  localparam int M = 16, L = 4;
  logic clk = 0, rst = 1;
  logic rx_valid = 0, rx_sof = 0;
  logic [L-1:0][31:0] rx_data = '0;
  logic sample_valid;
  logic [M-1:0][15:0] sample;
  int checks = 0, failures = 0;
  int n_out = 0, cyc = 0, last_out = -1;
  logic [M-1:0][15:0] expq[$];

  jesd_transport_demux #(.N_CONV(M), .LANES(L)) dut (.*);

  always #2 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Octet stream of lane l: conv 4l MSB, LSB, conv 4l+1 MSB, LSB, ...
  function automatic logic [7:0] octet(logic [M-1:0][15:0] s, int l, int o);
    int k = 4 * l + o / 2;
    return (o % 2 == 0) ? s[k][15:8] : s[k][7:0];
  endfunction

  task automatic send_frame(logic [M-1:0][15:0] s);
    for (int w = 0; w < 2; w++) begin
      rx_valid = 1; rx_sof = (w == 0);
      for (int l = 0; l < L; l++)
        for (int b = 0; b < 4; b++) rx_data[l][8*b +: 8] = octet(s, l, 4 * w + b);
      @(posedge clk); #0.1;
    end
    rx_valid = 0; rx_sof = 0;
  endtask

  always @(posedge clk) if (!rst && sample_valid) begin
    logic [M-1:0][15:0] e;
    e = expq.pop_front();
    for (int k = 0; k < M; k++) check(sample[k] == e[k], $sformatf("sample %0d", k));
    if (last_out >= 0) check(cyc - last_out == 2, "one frame per two cycles");
    last_out = cyc;
    n_out++;
  end

  initial begin
    logic [M-1:0][15:0] f;
    repeat (3) @(posedge clk);
    rst = 0; #0.1;
    // a stray word without sof must be ignored
    rx_valid = 1; rx_sof = 0; rx_data = '1; @(posedge clk); #0.1; rx_valid = 0;
    for (int n = 0; n < 50; n++) begin
      for (int k = 0; k < M; k++) f[k] = 16'($urandom);
      expq.push_back(f);
      send_frame(f);
    end
    repeat (4) @(posedge clk);
    check(n_out == 50, "frame count");
    check(expq.size() == 0, "all frames out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
