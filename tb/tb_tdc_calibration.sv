// tb_tdc_calibration -- code-density calibration and two-channel timing of
// the TDC at full size (96 carry cells, 384 taps, 384-bin histogram).
//
// Part 1, bin-by-bin calibration: each of two TDC channels receives
// N_CAL ToT pulses at times unrelated to the 4 ns clock, and the in-FPGA
// histogram collects their fine codes. The testbench then reads the 384
// bins back as the readout software would and derives for every code its
// width w(c) = 4 ns * N(c) / N_total, its DNL = w(c) / mean width - 1 and
// the INL as the running sum of the DNL. An edge younger than tap 0's delay
// is not yet seen and is caught one clock later, so the codes cover edge
// ages from cum(0) to cum(0) + 4 ns and code 0 never occurs. The widths
// must match the model's true tap delays within five standard deviations
// of the counting statistics; codes outside that span must stay empty; and
// the run of narrow codes the model places around code 180 (the clock-region
// crossing) must show a clearly negative DNL. The DNL and INL ranges are
// printed.
//
// Part 2, resolution: the same edge is sent to both channels N_PAIR times,
// as with a pulse split to two inputs. Each hit is turned into a time with
// the widths measured in part 1 (middle of the code's span of edge ages).
// The calibration cannot see the delay up to tap 0, a constant per channel
// that the channel-offset calibration removes; after subtracting each
// channel's mean offset every time must be within 20 ps of the true edge
// time: half the widest code (9 ps) plus the counting error of the summed
// widths (up to 4 ns * sqrt(0.25 / N_CAL), about 6 ps). The spread of the
// time difference between the two channels is the intrinsic resolution. The
// model has no
// jitter, so this spread only contains quantisation and calibration error
// and must stay below the 12 ps that real hardware reaches with noise.
module tb_tdc_calibration;
  timeunit 1ns; timeprecision 1ps;
  import trident_pkg::*;
  localparam int NTAP   = 4 * N_CARRY4;
  localparam int N_CAL  = 100000;
  localparam int N_PAIR = 2000;

  logic clk = 0, rst = 1;
  logic [47:0] ts = '0;
  logic [1:0] tot = '0;
  logic [1:0] fifo_empty, fifo_pop, hit_seen;
  logic drain_all = 1, pop_pair = 0;
  tdc_hit_t   fifo_data [2];
  logic [8:0] hit_fine [2];
  logic [15:0] n_drop [2];
  int sel = 0;
  logic cd_clear = 0, cd_enable = 0;
  logic [8:0] cd_addr = '0;
  logic [23:0] cd_data;
  logic [31:0] cd_total;
  logic cd_busy;
  int checks = 0, failures = 0;

  for (genvar k = 0; k < 2; k++) begin : g_ch
    tdc_channel #(.SEED(k + 1)) u_tdc (
      .clk, .rst, .tot(tot[k]), .ts, .keep(1'b1),
      .fifo_empty(fifo_empty[k]), .fifo_data(fifo_data[k]), .fifo_pop(fifo_pop[k]),
      .hit_seen(hit_seen[k]), .hit_fine(hit_fine[k]), .n_drop(n_drop[k]));
  end

  tdc_code_density u_cd (
    .clk, .rst, .clear(cd_clear), .enable(cd_enable),
    .hit_valid(hit_seen[sel]), .fine(hit_fine[sel]),
    .rd_addr(cd_addr), .rd_data(cd_data), .total(cd_total), .busy(cd_busy));

  // part 1 discards hits as they come; part 2 pops both after each edge
  assign fifo_pop = drain_all ? ~fifo_empty : {2{pop_pair}};

  always #2 clk = ~clk;
  // ts becomes c at the rising edge at 4c - 2 ns
  always @(posedge clk) ts <= ts + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // true tap delays of both lines
  realtime cum [2][NTAP];
  initial begin
    #1;
    foreach (cum[0][i]) cum[0][i] = g_ch[0].u_tdc.u_line.cum_ns[i];
    foreach (cum[1][i]) cum[1][i] = g_ch[1].u_tdc.u_line.cum_ns[i];
  end

  real cal_w [2][NTAP];                  // measured code widths, ns

  function automatic real rnd(real lo, real span);
    return lo + span * real'($urandom % 100000) / 100000.0;
  endfunction

  task automatic calibrate(int k);
    int nfull = 0, n;
    real mean_w, dnl, inl = 0.0, dnl_min = 9.0, dnl_max = -9.0, inl_min = 9.0, inl_max = -9.0;
    real band = 0.0;
    int nband = 0, hits_seen = 0;
    sel = k;
    @(negedge clk); cd_clear = 1; @(negedge clk); cd_clear = 0;
    while (cd_busy) @(negedge clk);
    cd_enable = 1;
    for (int i = 0; i < N_CAL; i++) begin
      #(rnd(5.0, 7.0)) tot[k] = 1;
      #(rnd(5.0, 3.0)) tot[k] = 0;
    end
    #20;
    @(negedge clk); cd_enable = 0;
    check(cd_total == 32'(N_CAL), $sformatf("ch %0d: histogram total %0d of %0d", k, cd_total, N_CAL));
    for (int c = 0; c < NTAP; c++) begin
      real w_true, n_exp, sigma;
      @(negedge clk); cd_addr = 9'(c);
      @(negedge clk);
      n = int'(cd_data);
      hits_seen += n;
      cal_w[k][c] = 4.0 * real'(n) / real'(N_CAL);
      w_true = cum[k][c] - ((c == 0) ? 0.0 : cum[k][c - 1]);
      if (c > 0 && cum[k][c] < cum[k][0] + 4.0) begin
        // a code wholly inside the span of one clock period
        nfull++;
        n_exp = real'(N_CAL) * w_true / 4.0;
        sigma = 4.0 * $sqrt(n_exp) / real'(N_CAL);
        check(cal_w[k][c] - w_true < 5.0 * sigma + 0.0002 &&
              w_true - cal_w[k][c] < 5.0 * sigma + 0.0002,
              $sformatf("ch %0d code %0d: width %0.4f ns, true %0.4f ns", k, c, cal_w[k][c], w_true));
      end else if (c == 0 || cum[k][c - 1] >= cum[k][0] + 4.0) begin
        check(n == 0, $sformatf("ch %0d code %0d outside one clock period has %0d hits", k, c, n));
      end
    end
    check(hits_seen == N_CAL, "bins add up to the total");
    mean_w = 0.0;
    for (int c = 1; c <= nfull; c++) mean_w += cal_w[k][c];
    mean_w /= real'(nfull);
    for (int c = 1; c <= nfull; c++) begin
      dnl = cal_w[k][c] / mean_w - 1.0;
      inl += dnl;
      if (dnl < dnl_min) dnl_min = dnl;
      if (dnl > dnl_max) dnl_max = dnl;
      if (inl < inl_min) inl_min = inl;
      if (inl > inl_max) inl_max = inl;
      if (c >= 168 && c < 192) begin band += dnl; nband++; end
    end
    band /= real'(nband);
    $display("ch %0d: %0d full codes, mean width %0.2f ps, DNL %0.2f .. %0.2f LSB, INL %0.2f .. %0.2f LSB, mean DNL near code 180 %0.2f LSB",
             k, nfull, mean_w * 1000.0, dnl_min, dnl_max, inl_min, inl_max, band);
    check(mean_w > 0.010 && mean_w < 0.014, "mean code width near 12 ps");
    check(band < -0.3, "narrow codes at the clock-region crossing");
  endtask

  // time of a hit from the measured widths: middle of its span of ages
  function automatic realtime hit_time(int k, tdc_hit_t h);
    real a = 0.0;
    for (int i = 0; i < int'(h.fine); i++) a += cal_w[k][i];
    a += cal_w[k][h.fine] / 2.0;
    return 4.0 * real'(h.coarse) - 2.0 - a;
  endfunction

  initial begin
    real s, s2, d, rms, mean, max_err;
    realtime t_true, t0, t1;
    real err0 [N_PAIR], err1 [N_PAIR], off0, off1;
    s = 0.0; s2 = 0.0; max_err = 0.0; off0 = 0.0; off1 = 0.0;
    repeat (4) @(posedge clk);
    rst = 0;
    calibrate(0);
    calibrate(1);
    // ---- part 2: identical edges on both channels
    @(negedge clk); drain_all = 0;
    for (int i = 0; i < N_PAIR; i++) begin
      #(rnd(8.0, 8.0));
      tot = 2'b11;
      t_true = $realtime;
      #(6.0) tot = 2'b00;
      #(24.0);
      check(!fifo_empty[0] && !fifo_empty[1], "both channels measured the edge");
      t0 = hit_time(0, fifo_data[0]);
      t1 = hit_time(1, fifo_data[1]);
      err0[i] = t0 - t_true;
      err1[i] = t1 - t_true;
      d = t0 - t1;
      s += d; s2 += d * d;
      @(negedge clk); pop_pair = 1; @(negedge clk); pop_pair = 0;
      check(fifo_empty == 2'b11, "one hit per edge");
    end
    foreach (err0[i]) begin off0 += err0[i] / real'(N_PAIR); off1 += err1[i] / real'(N_PAIR); end
    foreach (err0[i]) begin
      d = err0[i] - off0; if (d < 0) d = -d; if (d > max_err) max_err = d;
      d = err1[i] - off1; if (d < 0) d = -d; if (d > max_err) max_err = d;
    end
    $display("channel offsets %0.1f ps and %0.1f ps", off0 * 1000.0, off1 * 1000.0);
    check(max_err < 0.020, $sformatf("calibrated time off by %0.1f ps", max_err * 1000.0));
    mean = s / real'(N_PAIR);
    rms = $sqrt(s2 / real'(N_PAIR) - mean * mean);
    $display("two channels, %0d identical edges: difference mean %0.2f ps, rms %0.2f ps; largest time error %0.1f ps",
             N_PAIR, mean * 1000.0, rms * 1000.0, max_err * 1000.0);
    check(rms < 0.012, "time-difference spread below 12 ps");
    check(n_drop[0] == 0 && n_drop[1] == 0, "no hits dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
