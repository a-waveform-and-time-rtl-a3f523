// tb_trigger_control -- checks the three trigger modes and the TDC gate.
// Self mode: read requests copy the hit vector one cycle later, nothing
// global. Coincidence mode: a coincidence pulse requests all channels and
// opens the TDC gate for tdc_gate_len cycles; hits alone do nothing.
// External mode: an asynchronous rising edge requests all channels three
// cycles later, once per edge, however long the input stays high. The
// per-mode counters are checked at the end.
// A random phase follows: after a fresh reset, mode, gate length, hits,
// coincidence pulses and the external input change at random, and every
// output is compared on every cycle with a cycle-level model.
module tb_trigger_control;
  timeunit 1ns; timeprecision 1ps;
  import trident_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst = 1;
  trig_mode_e mode = TRIG_SELF;
  logic [N-1:0] hit = '0;
  logic coinc_trig = 0, ext_trig_in = 0;
  logic [15:0] tdc_gate_len = 16'd10;
  logic [N-1:0] read_req;
  logic global_trig, tdc_keep;
  logic [31:0] n_self, n_coinc, n_ext;
  int checks = 0, failures = 0;

  trigger_control #(.N_CH(N)) dut (.*);

  always #2 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic tick(int n = 1);
    repeat (n) @(posedge clk);
    #0.1;
  endtask

  initial begin
    int cnt;
    tick(3); rst = 0; tick();
    // ---- self mode
    check(tdc_keep, "self: TDC always kept");
    hit = 32'h0000_1234; tick(); hit = '0;
    check(read_req == 32'h0000_1234 && !global_trig, "self: request = hit vector");
    tick();
    check(read_req == '0, "self: one-cycle request");
    coinc_trig = 1; tick(); coinc_trig = 0;
    check(read_req == '0, "self: coincidence ignored");
    ext_trig_in = 1; tick(6); ext_trig_in = 0; tick(4);
    check(read_req == '0 && n_ext == 0, "self: external ignored");
    // ---- coincidence mode
    mode = TRIG_COINC; tick();
    check(!tdc_keep, "coinc: TDC gate closed");
    hit = 32'h0000_0003; tick(); hit = '0;
    check(read_req == '0, "coinc: hits alone do not read out");
    coinc_trig = 1; tick(); coinc_trig = 0;
    check(read_req == '1 && global_trig, "coinc: all channels requested");
    cnt = 0;
    for (int i = 0; i < 20; i++) begin tick(); if (tdc_keep) cnt++; end
    check(cnt == 10, $sformatf("coinc: TDC gate open %0d cycles, expected 10", cnt));
    // ---- external mode
    mode = TRIG_EXT; tick();
    #1.3 ext_trig_in = 1;                 // asynchronous edge
    cnt = 0;
    for (int i = 0; i < 12; i++) begin
      tick();
      if (read_req == '1) begin
        cnt++;
        check(i == 2, $sformatf("ext: request %0d cycles after the edge, expected 3", i + 1));
      end
    end
    check(cnt == 1, "ext: one request per edge");
    ext_trig_in = 0; tick(3);
    ext_trig_in = 1; tick(5); ext_trig_in = 0; tick(3);
    check(n_self == 1 && n_coinc == 1 && n_ext == 2,
          $sformatf("counters self=%0d coinc=%0d ext=%0d", n_self, n_coinc, n_ext));
    // ---- random phase against the model
    @(negedge clk);
    hit = '0; coinc_trig = 0; ext_trig_in = 0; rst = 1;
    repeat (3) @(negedge clk);
    rst = 0; model_on = 1;
    for (int b = 0; b < 40; b++) begin
      mode = trig_mode_e'($urandom % 3);
      tdc_gate_len = 16'($urandom % 40);
      for (int c = 0; c < 500; c++) begin
        for (int i = 0; i < N; i++) hit[i] = ($urandom % 100) == 0;
        coinc_trig = ($urandom % 50) == 0;
        if ($urandom % 20 == 0) ext_trig_in = !ext_trig_in;
        @(negedge clk);
      end
    end
    model_on = 0;
    check(ns_m > 50 && nc_m > 50 && ne_m > 50,
          $sformatf("random phase triggers self=%0d coinc=%0d ext=%0d", ns_m, nc_m, ne_m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- cycle-level model for the random phase ----
  bit model_on = 0, gt_m = 0;
  logic [2:0] es_m = '0;
  logic [N-1:0] rq_m = '0;
  int gate_m = 0, ns_m = 0, nc_m = 0, ne_m = 0;

  always @(posedge clk) begin
    if (model_on) begin
      bit ext_edge_m;
      check(read_req == rq_m && global_trig == gt_m, "random: read_req / global_trig");
      check(tdc_keep == (mode == TRIG_SELF || gate_m != 0), "random: tdc_keep");
      check(int'(n_self) == ns_m && int'(n_coinc) == nc_m && int'(n_ext) == ne_m, "random: counters");
      ext_edge_m = es_m[1] && !es_m[2];
      if (gt_m) gate_m = int'(tdc_gate_len);
      else if (gate_m != 0) gate_m--;
      es_m = {es_m[1:0], ext_trig_in};
      rq_m = '0; gt_m = 0;
      case (mode)
        TRIG_SELF:  begin rq_m = hit; if (hit != '0) ns_m++; end
        TRIG_COINC: if (coinc_trig) begin rq_m = '1; gt_m = 1; nc_m++; end
        TRIG_EXT:   if (ext_edge_m) begin rq_m = '1; gt_m = 1; ne_m++; end
        default: ;
      endcase
    end
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
