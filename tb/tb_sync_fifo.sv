// tb_sync_fifo -- self-checking test of the first-word-fall-through FIFO.
// Random push/pop traffic is compared against a queue reference model;
// the full, empty and count outputs are checked every cycle, and the FIFO is
// driven to full and back to empty explicitly.
module tb_sync_fifo;
  timeunit 1ns; timeprecision 1ps;
  localparam int W = 12, D = 8;
  logic clk = 0, rst = 1;
  logic push = 0, pop = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic empty, full;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #2 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic step(bit do_push, bit do_pop, logic [W-1:0] d);
    push = do_push; pop = do_pop; wr_data = d;
    @(posedge clk);
    if (do_pop && model.size() > 0) void'(model.pop_front());
    if (do_push && model.size() < D) model.push_back(d);
    #0.1;
    push = 0; pop = 0;
    check(count == ($clog2(D)+1)'(model.size()), "count");
    check(empty == (model.size() == 0), "empty");
    check(full == (model.size() == D), "full");
    if (model.size() > 0) check(rd_data == model[0], "rd_data");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    #0.1;
    // fill to full
    for (int i = 0; i < D; i++) step(1, 0, W'(i * 37 + 5));
    check(full, "full after D pushes");
    // simultaneous push and pop when full
    step(1, 1, 12'hABC);
    // drain
    while (model.size() > 0) step(0, 1, '0);
    check(empty, "empty after drain");
    // random traffic, never violating the protocol
    for (int i = 0; i < 2000; i++) begin
      automatic bit p = ($urandom % 2) && (model.size() < D);
      automatic bit q = ($urandom % 2) && (model.size() > 0);
      step(p, q, W'($urandom));
    end
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
