// tb_tdc_channel -- end-to-end test of one TDC channel.
// ToT pulses with random arrival times are fed to the channel; each stored
// hit is turned back into a time, t = time(clock edge 'coarse') - age,
// where age is the middle of the span of edge ages that give this fine
// count. The spans are the tap delays of the line, read from the model: the
// result of an ideal code-density calibration. The error must stay within
// 20 ps (half the widest code plus the 1 ps time step). Hits arriving while
// keep is low must not be stored, and a full hit FIFO must count drops.
module tb_tdc_channel;
  timeunit 1ns; timeprecision 1ps;
  import trident_pkg::*;
  logic clk = 0, rst = 1, tot = 0, keep = 1;
  logic [47:0] ts = '0;
  logic fifo_empty, fifo_pop = 0, hit_seen;
  tdc_hit_t fifo_data;
  logic [8:0] hit_fine;
  logic [15:0] n_drop;
  int checks = 0, failures = 0;
  realtime edge_t [longint];
  realtime true_t[$];
  real max_err = 0.0;

  tdc_channel #(.FIFO_DEPTH(4), .SEED(9)) dut (.*);

  always #2 clk = ~clk;
  always @(posedge clk) begin
    ts <= ts + 1;
    edge_t[longint'(ts + 1)] = $realtime;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic pulse(bit store);
    #(20.0 + real'($urandom % 4000) / 1000.0);
    tot = 1;
    if (store) true_t.push_back($realtime);
    #(12.0);
    tot = 0;
    #(12.0);
  endtask

  // middle of the edge ages that give fine count f (ages cum[f-1] .. cum[f])
  function automatic realtime age(int f);
    realtime lo = (f == 0) ? 0.0 : dut.u_line.cum_ns[f - 1];
    return (lo + dut.u_line.cum_ns[f]) / 2.0;
  endfunction

  task automatic drain();
    #0.1;
    while (!fifo_empty) begin
      realtime t, e;
      t = edge_t[longint'(fifo_data.coarse)] - age(int'(fifo_data.fine));
      e = t - true_t.pop_front();
      if (e < 0) e = -e;
      if (e > max_err) max_err = e;
      check(e < 0.02, $sformatf("time error %0.3f ns (fine %0d)", e, fifo_data.fine));
      @(negedge clk); fifo_pop = 1; @(posedge clk); #0.1; fifo_pop = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 200; i++) begin
      pulse(1);
      drain();
    end
    check(true_t.size() == 0, "every pulse measured");
    // keep low: nothing stored
    keep = 0;
    for (int i = 0; i < 5; i++) pulse(0);
    #20 check(fifo_empty, "hits outside the gate are not stored");
    keep = 1;
    // overflow: 6 pulses into a 4-deep FIFO
    for (int i = 0; i < 6; i++) pulse(i < 4);
    #20 check(n_drop == 16'd2, $sformatf("drops %0d", n_drop));
    drain();
    $display("max |error| %0.3f ns", max_err);
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
