// tb_waveform_recorder -- checks pre-trigger capture and the record FIFOs.
// The input is a ramp (sample n has value n), one sample every other cycle,
// so every recorded sample tells where it came from. A trigger given with
// sample k must produce samples k-PRE .. k-PRE+LEN-1, packed two per word,
// and an information entry with the trigger time, baseline, mode and length.
// Also checked: a trigger during a record is ignored, records queue up to the
// FIFO capacity, the next trigger is dropped and counted, and capture works
// again once the reader has made room.
module tb_waveform_recorder;
  timeunit 1ns; timeprecision 1ps;
  import trident_pkg::*;
  localparam int PRE = 8, LEN = 16, DD = 32, ID = 4;
  logic clk = 0, rst = 1;
  logic sample_valid = 0;
  logic [15:0] sample = '0, baseline = 16'd777;
  trig_mode_e mode = TRIG_EXT;
  logic [47:0] ts = '0;
  logic trig = 0;
  logic info_empty, info_pop = 0, data_empty, data_pop = 0, busy, drop;
  adc_info_t info_data;
  logic [31:0] data_rdata;
  logic [15:0] n_drop;
  int checks = 0, failures = 0, n = 0;
  int trig_k[$];            // sample index given with each accepted trigger
  longint trig_ts[$];

  waveform_recorder #(.PRE(PRE), .LEN(LEN), .DATA_DEPTH(DD), .INFO_DEPTH(ID)) dut (.*);

  always #2 clk = ~clk;
  always @(posedge clk) ts <= ts + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // one sample (two cycles); optionally trigger with it
  task automatic put(bit t);
    sample_valid = 1; sample = 16'(n); trig = t;
    if (t) begin trig_k.push_back(n); trig_ts.push_back(ts); end
    @(posedge clk); #0.1;
    sample_valid = 0; trig = 0;
    @(posedge clk); #0.1;
    n++;
  endtask

  task automatic read_record();
    int k; longint t;
    k = trig_k.pop_front(); t = trig_ts.pop_front();
    check(!info_empty, "info entry present");
    check(info_data.ts == 48'(t), "time stamp");
    check(info_data.baseline == 16'd777 && info_data.mode == TRIG_EXT && info_data.nsamples == 16'(LEN), "info fields");
    for (int w = 0; w < LEN / 2; w++) begin
      check(!data_empty, "data present");
      check(data_rdata == {16'(k - PRE + 2 * w), 16'(k - PRE + 2 * w + 1)},
            $sformatf("word %0d = %h, trigger at %0d", w, data_rdata, k));
      data_pop = 1; @(posedge clk); #0.1; data_pop = 0;
    end
    info_pop = 1; @(posedge clk); #0.1; info_pop = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0; #0.1;
    for (int i = 0; i < 20; i++) put(0);
    put(1);                                  // record 1
    for (int i = 0; i < 3; i++) put(0);
    put(1);                                  // during record 1: ignored
    void'(trig_k.pop_back()); void'(trig_ts.pop_back());
    for (int i = 0; i < 20; i++) put(0);
    check(!busy, "record 1 complete");
    read_record();
    check(info_empty && data_empty, "FIFOs empty after one record");
    // fill the FIFOs: 4 records fit, the 5th is dropped
    for (int r = 0; r < 5; r++) begin
      put(1);
      for (int i = 0; i < LEN + 2; i++) put(0);
    end
    void'(trig_k.pop_back()); void'(trig_ts.pop_back());
    check(n_drop == 16'd1, $sformatf("one drop counted (%0d)", n_drop));
    for (int r = 0; r < 4; r++) read_record();
    check(info_empty && data_empty, "FIFOs empty after four records");
    put(1);
    for (int i = 0; i < LEN + 2; i++) put(0);
    read_record();
    check(n_drop == 16'd1, "no further drops");
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
