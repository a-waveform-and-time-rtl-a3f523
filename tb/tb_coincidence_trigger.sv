// tb_coincidence_trigger -- checks the multiplicity-in-window trigger.
// Hand-built hit patterns with known answers: two hits inside the window
// trigger, two hits farther apart than the window do not, a three-fold
// requirement ignores two hits and fires on the third, five simultaneous
// hits give exactly one trigger, and mult = 0 behaves as mult = 1. The
// trigger must come exactly one cycle after the completing hit.
// A random phase then sends sparse hits on any cycle while window and mult
// change, and compares active_count and trig on every cycle with a model
// that keeps, per channel, the count of ADC samples seen since its last hit
// and the window in force at that hit.
module tb_coincidence_trigger;
  timeunit 1ns; timeprecision 1ps;
  localparam int N = 32;
  logic clk = 0, rst = 1;
  logic sample_valid = 0;
  logic [N-1:0] hit = '0;
  logic [7:0] window = 8'd4;
  logic [5:0] mult = 6'd2;
  logic trig;
  logic [5:0] active_count;
  int checks = 0, failures = 0, n_trig = 0, cyc = 0, last_hit_cyc = 0, last_trig_cyc = 0;

  coincidence_trigger #(.N_CH(N), .WIN_W(8)) dut (.*);

  always #2 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    sample_valid <= ~sample_valid;    // 125 MS/s on a 250 MHz clock
    if (trig && !rst) begin n_trig++; last_trig_cyc = cyc; end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // wait n samples (2n cycles)
  task automatic samples(int n);
    repeat (2 * n) @(posedge clk);
    #0.1;
  endtask

  task automatic pulse(logic [N-1:0] m);
    hit = m; last_hit_cyc = cyc;
    @(posedge clk); #0.1;
    hit = '0;
  endtask

  task automatic expect_trig(int n, string what);
    samples(12);     // let all windows close
    check(n_trig == n, $sformatf("%s: %0d triggers, expected %0d", what, n_trig, n));
    n_trig = 0;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst = 0; #0.1;
    // A: two channels 3 samples apart, window 4 -> trigger
    pulse(32'h0000_0008); samples(3);
    check(!trig, "no trigger on the first hit");
    pulse(32'h0000_0080);
    check(trig, "trigger registered at the edge that saw the completing hit");
    expect_trig(1, "A");
    // B: two channels 6 samples apart -> none
    pulse(32'h0000_0002); samples(6); pulse(32'h0000_0004);
    expect_trig(0, "B");
    // C: three-fold, hits at 0, 1 and 2 samples
    mult = 6'd3;
    pulse(32'h0000_0001); samples(1); pulse(32'h0000_0002);
    samples(1);
    check(n_trig == 0, "C: no trigger on two of three");
    pulse(32'h0001_0000);
    expect_trig(1, "C");
    // D: five at once with mult 3 -> exactly one
    pulse(32'h8000_001F);
    expect_trig(1, "D");
    // E: mult = 0 acts as 1
    mult = 6'd0;
    pulse(32'h0000_0100);
    expect_trig(1, "E");
    // F: the same channel twice does not make a coincidence
    mult = 6'd2;
    pulse(32'h0000_0040); samples(1); pulse(32'h0000_0040);
    expect_trig(0, "F");
    // G: random hits against the reference model
    samples(12);
    @(negedge clk);
    model_on = 1;
    for (int blk = 0; blk < 20; blk++) begin
      window = 8'(1 + $urandom % 10);
      mult   = 6'($urandom % 6);
      for (int c = 0; c < 1000; c++) begin
        for (int i = 0; i < N; i++) hit[i] = ($urandom % 200) == 0;
        @(negedge clk);
      end
    end
    hit = '0;
    @(negedge clk);
    model_on = 0;
    check(n_rand_trig > 20, $sformatf("random phase produced %0d triggers", n_rand_trig));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference model for the random phase ----
  bit model_on = 0, armed_m = 1, exp_trig = 0;
  int n_valid = 0, n_rand_trig = 0;
  int hit_at [N];                 // n_valid right after the channel's last hit
  int win_at [N];                 // window loaded by that hit
  initial foreach (hit_at[i]) begin hit_at[i] = -1000; win_at[i] = 0; end

  always @(posedge clk) begin
    if (model_on) begin
      int cnt, need;
      bit fire;
      check(trig == exp_trig, $sformatf("random: trig %0b, model %0b", trig, exp_trig));
      if (exp_trig) n_rand_trig++;
      cnt = 0;
      for (int i = 0; i < N; i++)
        if (hit[i] || (n_valid - hit_at[i] < win_at[i])) cnt++;
      check(int'(active_count) == cnt, $sformatf("random: active_count %0d, model %0d", active_count, cnt));
      need = (mult == 0) ? 1 : int'(mult);
      fire = cnt >= need;
      exp_trig = fire && armed_m;
      armed_m = !fire;
    end
    if (sample_valid) n_valid++;
    for (int i = 0; i < N; i++)
      if (hit[i]) begin hit_at[i] = n_valid; win_at[i] = int'(window); end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
