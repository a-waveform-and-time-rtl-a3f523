// tb_carry4_delay_line -- checks the tapped delay line model.
// A ToT edge is placed at known offsets before a clock edge. The captured
// snapshot must be a clean thermometer code (ones from tap 0 up, zeros
// above), its length must grow with the offset and match offset / 12 ps
// within the model's tap spread, an edge 4 ns old must have travelled about
// 333 taps, and after a falling edge the low taps must read zero while the
// older high level is still seen further along the line.
module tb_carry4_delay_line;
  timeunit 1ns; timeprecision 1ps;
  localparam int NC = 96, NT = 4 * NC;
  logic clk = 0, tot = 0;
  logic [NT-1:0] taps;
  int checks = 0, failures = 0;

  carry4_delay_line #(.N_CARRY4(NC), .TAP_PS(12), .SEED(3)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int ones(logic [NT-1:0] v);
    int c = 0;
    for (int i = 0; i < NT; i++) c += int'(v[i]);
    return c;
  endfunction

  function automatic bit thermo(logic [NT-1:0] v);
    int c = ones(v);
    for (int i = 0; i < NT; i++) if (v[i] != (i < c)) return 0;
    return 1;
  endfunction

  // ToT rises `off` ns before a clock edge; returns the snapshot length
  task automatic shot(real off, output int cnt);
    #(10.0 - off) tot = 1;
    #(off) clk = 1;
    #0.5 clk = 0;
    check(thermo(taps), $sformatf("thermometer code at offset %0.3f", off));
    cnt = ones(taps);
    #20 tot = 0;
    #20;
  endtask

  initial begin
    int c, prev;
    real err, off;
    prev = -1;
    for (int i = 0; i <= 40; i++) begin
      off = 0.1 * i;
      shot(off, c);
      check(c >= prev, "snapshot length grows with the edge age");
      err = real'(c) - off / 0.012;
      check(err < 25.0 && err > -25.0, $sformatf("offset %0.2f ns gave %0d taps", off, c));
      prev = c;
    end
    shot(4.0, c);
    check(c > 300 && c < 366, $sformatf("4 ns edge spans %0d taps", c));
    // falling edge 1 ns before the clock, rising 3 ns before it
    #10 tot = 1;
    #2 tot = 0;
    #1 clk = 1;
    #0.5 clk = 0;
    check(taps[0] == 0 && taps[40] == 0, "fresh low level near tap 0");
    check(taps[120] == 1 && taps[200] == 1, "older high level further along");
    check(taps[NT-1] == 0, "level before the rise at the end of the line");
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
