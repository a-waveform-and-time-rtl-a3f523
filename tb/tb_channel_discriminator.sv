// tb_channel_discriminator -- checks baseline tracking and threshold hits.
// Samples arrive every other cycle (125 MS/s on a 250 MHz clock). A
// reference model in the testbench recomputes the moving-average baseline
// and the over/hit flags for every sample: a flat baseline with noise, a
// baseline step that must be followed, negative pulses above and below the
// threshold, a positive excursion that must not trigger, and a full-scale
// pulse whose depth exceeds the 16-bit signed range.
module tb_channel_discriminator;
  timeunit 1ns; timeprecision 1ps;
  import trident_pkg::*;
  localparam int SH = 4;
  logic clk = 0, rst = 1;
  logic sample_valid = 0;
  logic signed [15:0] sample = '0;
  logic [15:0] threshold = 16'd40;
  logic signed [15:0] baseline, sample_q;
  logic out_valid, over, hit;
  int checks = 0, failures = 0, n_hits = 0, exp_hits = 0;
  // reference state
  longint acc_m; bit primed_m = 0, over_m = 0;

  channel_discriminator #(.AVG_SHIFT(SH)) dut (.*);

  always #2 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic put(int v);
    longint base_m, dev;
    bit now;
    base_m = acc_m >>> SH;
    dev = base_m - v;
    now = primed_m && (dev > longint'(threshold));
    sample_valid = 1; sample = 16'(v);
    @(posedge clk); #0.1;
    sample_valid = 0;
    check(out_valid && sample_q == 16'(v), "out_valid/sample_q");
    check(over == now, "over");
    check(hit == (now && !over_m), "hit");
    if (now && !over_m) exp_hits++;
    if (!primed_m) begin acc_m = longint'(v) <<< SH; primed_m = 1; end
    else if (!now) acc_m = acc_m + v - base_m;
    over_m = now;
    check(baseline == 16'(acc_m >>> SH), "baseline");
    @(posedge clk); #0.1;
    check(!out_valid && !hit, "single-cycle outputs");
  endtask

  always @(posedge clk) if (hit && !rst) n_hits++;

  initial begin
    repeat (3) @(posedge clk);
    rst = 0; #0.1;
    for (int i = 0; i < 200; i++) put(900 + int'($urandom % 7) - 3);
    check(baseline > 890 && baseline < 910, "baseline settled near 900");
    // negative pulse 100 counts deep (well above threshold 40)
    for (int i = 0; i < 8; i++) put(900 - 100 + i * 5);
    for (int i = 0; i < 50; i++) put(900);
    // small pulse below threshold
    for (int i = 0; i < 5; i++) put(900 - 30);
    for (int i = 0; i < 50; i++) put(900);
    // positive excursion must not trigger
    for (int i = 0; i < 5; i++) put(900 + 300);
    // baseline step: the tracker follows it
    for (int i = 0; i < 300; i++) put(1200);
    check(baseline > 1190, "baseline followed step");
    for (int i = 0; i < 4; i++) put(1100);
    for (int i = 0; i < 20; i++) put(1200);
    // full-scale pulse: baseline near +0.91 V of a 2 Vpp range (+29800
    // counts), pulse down to -0.40 V (-13100): a deviation of about 43000
    // counts, beyond the 16-bit signed range
    for (int i = 0; i < 400; i++) put(29800 + int'($urandom % 7) - 3);
    for (int i = 0; i < 6; i++) put(-13100 + i * 4000);
    for (int i = 0; i < 60; i++) put(29800);
    check(baseline > 29700, "baseline kept through the full-scale pulse");
    check(n_hits == exp_hits && exp_hits == 3, $sformatf("hit count %0d/%0d", n_hits, exp_hits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
