// tb_tdc_code_density -- checks the fine-code histogram.
// Hits with random fine codes are counted by the testbench and by the block;
// after the run every bin and the total are read back and compared. Also
// checked: hits are ignored while disabled, while clearing, and when the
// code is out of range; clear empties every bin; bins saturate (a narrow
// counter width is used so saturation is reached).
module tb_tdc_code_density;
  timeunit 1ns; timeprecision 1ps;
  localparam int NB = 48, CW = 6;
  logic clk = 0, rst = 1, clear = 0, enable = 0, hit_valid = 0;
  logic [8:0] fine = '0;
  logic [5:0] rd_addr = '0;
  logic [CW-1:0] rd_data;
  logic [31:0] total;
  logic busy;
  int checks = 0, failures = 0;
  int model [NB];
  int model_total = 0;

  tdc_code_density #(.N_BINS(NB), .CNT_W(CW)) dut (.*);

  always #2 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic hit(int f, bit counts);
    hit_valid = 1; fine = 9'(f);
    @(posedge clk); #0.1;
    hit_valid = 0;
    if (counts) begin
      model_total++;
      if (model[f] < (1 << CW) - 1) model[f]++;
    end
  endtask

  task automatic compare(string what);
    for (int b = 0; b < NB; b++) begin
      rd_addr = 6'(b);
      @(posedge clk); #0.1;
      check(int'(rd_data) == model[b], $sformatf("%s bin %0d: %0d vs %0d", what, b, rd_data, model[b]));
    end
    check(int'(total) == model_total, $sformatf("%s total %0d vs %0d", what, total, model_total));
  endtask

  initial begin
    foreach (model[b]) model[b] = 0;
    repeat (2) @(posedge clk);
    rst = 0; #0.1;
    check(busy, "clearing after reset");
    hit(3, 0);                                   // ignored while clearing
    while (busy) @(posedge clk);
    #0.1;
    hit(4, 0);                                   // ignored while disabled
    enable = 1;
    for (int i = 0; i < 1500; i++) begin
      automatic int f = int'($urandom % (NB + 4));
      if (i % 3 == 0) begin @(posedge clk); #0.1; end
      hit(f, f < NB);
    end
    hit(5, 1); hit(5, 1);                        // back to back, same bin
    compare("random");
    for (int i = 0; i < 80; i++) hit(7, 1);      // saturates
    compare("saturated");
    clear = 1; @(posedge clk); #0.1; clear = 0;
    while (busy) @(posedge clk);
    #0.1;
    foreach (model[b]) model[b] = 0;
    model_total = 0;
    compare("cleared");
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
