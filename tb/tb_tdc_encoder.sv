// tb_tdc_encoder -- checks fine-count decoding and edge detection.
// Snapshots are driven directly as thermometer codes of known length, as the
// delay line would present them after a clock edge. Checked: a new edge
// (tap 0 rising) gives exactly one hit, two cycles after the snapshot
// appears, with fine = number of ones (also with bubbles near the edge) and
// coarse = the time-stamp value of the sampling edge; a level that stays high
// or a falling edge gives no hit. A random phase then drives a new snapshot
// every cycle (zeros, ones, thermometer codes with bubbles, random bits) and
// compares hit_valid, fine and coarse each cycle with a model of the rule:
// a hit when tap 0 is high in one snapshot and was low in the one before.
module tb_tdc_encoder;
  timeunit 1ns; timeprecision 1ps;
  import trident_pkg::*;
  localparam int NT = 384;
  logic clk = 0, rst = 1;
  logic [NT-1:0] taps = '0;
  logic [47:0] ts = 48'h1234_0000_0000;
  logic hit_valid;
  tdc_hit_t hit;
  int checks = 0, failures = 0, nhits = 0;

  tdc_encoder #(.N_TAPS(NT)) dut (.*);

  always #2 clk = ~clk;
  always @(posedge clk) if (hit_valid && !rst) nhits++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [NT-1:0] thermo(int n);
    logic [NT-1:0] v = '0;
    for (int i = 0; i < NT; i++) v[i] = (i < n);
    return v;
  endfunction

  // Present snapshot v as if captured at a clock edge after which the
  // counter holds c; check the hit two cycles later.
  task automatic edge_case(logic [NT-1:0] v, int exp_fine, bit exp_hit);
    logic [47:0] c;
    @(posedge clk);
    ts <= ts + 1; taps <= v;              // sampling edge: counter -> c
    c = ts + 1;
    @(posedge clk); ts <= ts + 1; taps <= '1;
    @(posedge clk); ts <= ts + 1; #0.1;
    check(hit_valid == exp_hit, $sformatf("hit flag for fine %0d", exp_fine));
    if (exp_hit) check(hit.fine == 9'(exp_fine) && hit.coarse == c,
                       $sformatf("fine %0d/%0d coarse %h/%h", hit.fine, exp_fine, hit.coarse, c));
    // return to low
    @(posedge clk); ts <= ts + 1; taps <= '0;
    repeat (3) begin @(posedge clk); ts <= ts + 1; end
  endtask

  // ---- model for the random phase: snapshots seen at the last two edges
  bit model_on = 0;
  int n_model_hits = 0, age = 0;
  logic [NT-1:0] t_m1 = '0, t_m2 = '0, t_m3 = '0;
  logic [47:0]   c_m1 = '0, c_m2 = '0;

  always @(posedge clk) begin
    if (model_on && age >= 3) begin
      bit exp_v;
      int ones;
      exp_v = t_m2[0] && !t_m3[0];
      ones = 0;
      foreach (t_m2[i]) ones += int'(t_m2[i]);
      check(hit_valid == exp_v, "random: hit_valid");
      if (exp_v) begin
        n_model_hits++;
        check(int'(hit.fine) == ones && hit.coarse == c_m2,
              $sformatf("random: fine %0d/%0d coarse %h/%h", hit.fine, ones, hit.coarse, c_m2));
      end
    end
    age = model_on ? age + 1 : 0;
    t_m3 = t_m2; t_m2 = t_m1; t_m1 = taps;
    c_m2 = c_m1; c_m1 = ts;
  end

  initial begin
    logic [NT-1:0] v;
    int expn;
    expn = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int n = 1; n <= 340; n += 13) begin
      edge_case(thermo(n), n, 1);
      expn++;
    end
    // bubbles: two swapped bits at the edge keep the ones count
    v = thermo(100); v[99] = 0; v[101] = 1;
    edge_case(v, 100, 1); expn++;
    // falling edge (zeros near tap 0, ones further on): no hit
    @(posedge clk); ts <= ts + 1; taps <= '1;
    repeat (3) begin @(posedge clk); ts <= ts + 1; end
    v = ~thermo(50);
    @(posedge clk); ts <= ts + 1; taps <= v;
    repeat (2) begin @(posedge clk); ts <= ts + 1; end
    #0.1 check(!hit_valid, "falling edge gives no hit");
    @(posedge clk); ts <= ts + 1; taps <= '0;
    repeat (4) @(posedge clk);
    check(nhits == expn + 1, $sformatf("hit count %0d expected %0d", nhits, expn + 1));
    // random phase
    @(negedge clk);
    model_on = 1;
    for (int k = 0; k < 20000; k++) begin
      int r, n;
      r = int'($urandom % 10);
      if (r < 4)      v = '0;
      else if (r < 6) v = '1;
      else if (r < 9) begin
        n = 1 + int'($urandom % (NT - 1));
        v = thermo(n);
        repeat ($urandom % 4) begin
          int a, b;
          logic t;
          a = n - 3 + int'($urandom % 6);
          b = n - 3 + int'($urandom % 6);
          if (a >= 0 && a < NT && b >= 0 && b < NT) begin
            t = v[a]; v[a] = v[b]; v[b] = t;
          end
        end
      end else for (int i = 0; i < NT; i++) v[i] = 1'($urandom % 2);
      taps = v; ts = ts + 1;
      @(negedge clk);
    end
    model_on = 0;
    check(n_model_hits > 1000, $sformatf("random phase produced %0d hits", n_model_hits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
