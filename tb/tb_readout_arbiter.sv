// tb_readout_arbiter -- checks the event builder's record stream.
// Three ADC sources and two TDC sources are modelled as queues behind FIFO
// ports. Records with known content are loaded, the output is taken with a
// random ready signal, and a decoder rebuilds every record from the word
// stream: tags, channel numbers, time stamps, baselines, samples and fine
// counts must all match, each record must appear exactly once, and while all
// sources are busy the service order must be round robin.
module tb_readout_arbiter;
  timeunit 1ns; timeprecision 1ps;
  import trident_pkg::*;
  localparam int NA = 3, NT = 2, LEN = 6;
  logic clk = 0, rst = 1;
  logic      [NA-1:0]       info_empty, info_pop, data_empty, data_pop;
  adc_info_t [NA-1:0]       info_data;
  logic      [NA-1:0][31:0] data_rdata;
  logic      [NT-1:0]       tdc_empty, tdc_pop;
  tdc_hit_t  [NT-1:0]       tdc_data;
  logic out_valid, out_ready = 0;
  logic [31:0] out_data, n_records;
  int checks = 0, failures = 0;

  adc_info_t iq [NA][$];
  logic [31:0] dq [NA][$];
  tdc_hit_t tq [NT][$];
  int expect_src[$];     // order in which records were queued (for reference)
  int got_src[$];        // order in which records came out
  int n_loaded = 0, n_decoded = 0;

  readout_arbiter #(.N_ADC_CH(NA), .N_TDC_CH(NT)) dut (.*);

  always #2 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always_comb begin
    for (int c = 0; c < NA; c++) begin
      info_empty[c] = (iq[c].size() == 0);
      info_data[c]  = info_empty[c] ? '0 : iq[c][0];
      data_empty[c] = (dq[c].size() == 0);
      data_rdata[c] = data_empty[c] ? '0 : dq[c][0];
    end
    for (int t = 0; t < NT; t++) begin
      tdc_empty[t] = (tq[t].size() == 0);
      tdc_data[t]  = tdc_empty[t] ? '0 : tq[t][0];
    end
  end

  // reference copies for decoding
  adc_info_t ri [NA][$];
  logic [31:0] rd [NA][$];
  tdc_hit_t rt [NT][$];

  always @(posedge clk) begin
    for (int c = 0; c < NA; c++) begin
      if (data_pop[c]) begin check(dq[c].size() > 0, "data pop on empty"); void'(dq[c].pop_front()); end
      if (info_pop[c]) begin check(iq[c].size() > 0, "info pop on empty"); void'(iq[c].pop_front()); end
    end
    for (int t = 0; t < NT; t++)
      if (tdc_pop[t]) void'(tq[t].pop_front());
  end

  task automatic load_adc(int c);
    adc_info_t i;
    i.mode = 2'(c % 3); i.ts = {16'(c), 32'($urandom)}; i.baseline = 16'($urandom);
    i.nsamples = 16'(LEN);
    for (int w = 0; w < LEN / 2; w++) begin
      automatic logic [31:0] d = $urandom;
      dq[c].push_back(d); rd[c].push_back(d);
    end
    iq[c].push_back(i); ri[c].push_back(i);
    n_loaded++;
  endtask

  task automatic load_tdc(int t);
    tdc_hit_t h;
    h.coarse = {16'(t + 100), 32'($urandom)}; h.fine = 9'($urandom % 384);
    tq[t].push_back(h); rt[t].push_back(h);
    n_loaded++;
  endtask

  // stream decoder
  logic [31:0] words[$];
  always @(posedge clk) if (!rst && out_valid && out_ready) words.push_back(out_data);

  task automatic decode();
    while (words.size() > 0) begin
      logic [31:0] w0;
      w0 = words.pop_front();
      if (w0[31:28] == TAG_ADC) begin
        automatic int c = int'(w0[25:20]);
        adc_info_t e;
        logic [31:0] hi, lo, bl;
        e = ri[c].pop_front();
        hi = words.pop_front(); lo = words.pop_front(); bl = words.pop_front();
        check(w0[27:26] == e.mode && w0[15:0] == e.nsamples, "ADC header");
        check({hi[15:0], lo} == e.ts, "ADC time stamp");
        check(bl[15:0] == e.baseline, "ADC baseline");
        for (int k = 0; k < LEN / 2; k++) check(words.pop_front() == rd[c].pop_front(), "ADC sample word");
        got_src.push_back(c);
      end else if (w0[31:28] == TAG_TDC) begin
        automatic int t = int'(w0[25:20]);
        tdc_hit_t e;
        logic [31:0] hi, lo;
        e = rt[t].pop_front();
        hi = words.pop_front(); lo = words.pop_front();
        check(w0[8:0] == e.fine && {hi[15:0], lo} == e.coarse, "TDC record");
        got_src.push_back(NA + t);
      end else begin
        check(0, $sformatf("bad tag %h", w0));
      end
      n_decoded++;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    // all five sources hold two records each before reset is released
    for (int r = 0; r < 2; r++) begin
      for (int c = 0; c < NA; c++) load_adc(c);
      for (int t = 0; t < NT; t++) load_tdc(t);
    end
    rst = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk); out_ready = 1;
    end
    decode();
    // round robin: sources 0..4 then 0..4 again
    check(got_src.size() == 10, "ten records");
    for (int k = 0; k < got_src.size(); k++)
      check(got_src[k] == k % (NA + NT), $sformatf("service order %0d: source %0d", k, got_src[k]));
    // random traffic with a random ready
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      out_ready = ($urandom % 3) != 0;
      if ($urandom % 40 == 0) load_adc(int'($urandom % NA));
      if ($urandom % 25 == 0) load_tdc(int'($urandom % NT));
    end
    out_ready = 1;
    repeat (500) @(negedge clk);
    decode();
    check(n_decoded == n_loaded, $sformatf("records %0d out of %0d", n_decoded, n_loaded));
    check(n_records == 32'(n_loaded), "record counter");
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
