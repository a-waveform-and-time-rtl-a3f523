// tb_hdom_mainboard_fpga -- end-to-end test of the digitizer firmware at its
// full default size (32 ADC channels, 56 TDC channels, 384-tap delay lines,
// 256-sample records with 128 pre-trigger samples, 2^24-word DDR3 ring).
//
// The testbench plays the parts around the FPGA: two ADCs sending JESD204B
// transport frames of noisy baselines with injected negative PMT pulses,
// asynchronous ToT pulses on the PMT and SiPM TDC inputs, an external
// trigger, a DDR3 memory model and a SiTCP sink that stalls at random. Every
// byte leaving the SiTCP port is decoded back into records and checked:
//   ADC records : the LEN samples must be exactly a window of what the ADC
//                 sent on that channel, placed PRE samples ahead of the
//                 trigger; mode and baseline fields must be right.
//   TDC records : coarse/fine must give the injected ToT edge time within
//                 20 ps, using each line's true tap delays as the
//                 calibration; only hits the trigger mode should keep appear.
// Phases: self trigger; coincidence (a lone hit is rejected, a two-channel
// coincidence reads all channels, the TDC gate keeps only nearby hits);
// external trigger after loading the White Rabbit time; FIFO overflow under
// a high self-trigger rate (records + counted drops = triggers); and the TDC
// code-density histogram. Each mechanism is counted and must occur.
module tb_hdom_mainboard_fpga;
  timeunit 1ns; timeprecision 1ps;
  import trident_pkg::*;
  localparam int NP = 32, NS = 24, NT = 56, NA = 2, L = 4;
  localparam int PRE = 128, LEN = 256, NTAP = 384;

  logic clk = 0, rst = 1;
  logic [NA-1:0] jesd_rx_valid = '0, jesd_rx_sof = '0;
  logic [NA-1:0][L-1:0][31:0] jesd_rx_data = '0;
  logic [NP-1:0] tot_pmt = '0;
  logic [NS-1:0] tot_sipm = '0;
  logic ext_trig_in = 0, ts_load = 0;
  logic [47:0] ts_load_value = '0, ts;
  trig_mode_e trig_mode = TRIG_SELF;
  logic [NP-1:0][15:0] threshold;
  logic [7:0] coinc_window = 8'd4;
  logic [5:0] coinc_mult = 6'd2;
  logic [15:0] tdc_gate_len = 16'd200;
  logic [5:0] cd_channel = '0;
  logic cd_clear = 0, cd_enable = 0;
  logic [8:0] cd_rd_addr = '0;
  logic [23:0] cd_rd_data;
  logic [31:0] cd_total;
  logic cd_busy;
  logic mem_cmd_valid, mem_write, mem_ready, mem_rd_valid;
  logic [23:0] mem_addr;
  logic [127:0] mem_wdata, mem_rd_data;
  logic tcp_tx_wr, tcp_tx_full = 0;
  logic [7:0] tcp_tx_data;
  logic [31:0] n_self, n_coinc, n_ext, n_records;
  logic [NP-1:0][15:0] adc_drops;
  logic [NT-1:0][15:0] tdc_drops;
  logic [NT-1:0] tdc_hit_seen;
  logic [24:0] ddr_level;

  hdom_mainboard_fpga dut (.*);

  ddr3_mem_model #(.ADDR_W(24)) u_mem (
    .clk, .cmd_valid(mem_cmd_valid), .write(mem_write), .addr(mem_addr),
    .wdata(mem_wdata), .ready(mem_ready), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data));

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- mechanism counters ---------------------------------------------------------
  int m_self_rec = 0, m_coinc_trig = 0, m_coinc_reject = 0, m_ext_trig = 0;
  int m_tdc_pmt = 0, m_tdc_sipm = 0, m_tdc_gated = 0, m_adc_drop = 0;
  int m_ts_load = 0, m_cd_hits = 0, m_tcp_stall = 0, m_pretrig = 0;

  // ---- ADC stimulus -----------------------------------------------------------------
  int hist [NP][$];             // every sample sent, per channel
  longint frame_ts [$];         // time stamp when frame n was sent
  int pulse_at [NP];            // frame index of a pending pulse (-1 none)
  int pulse_amp = 300;
  int nframe = 0;
  bit phase = 0;
  real shape [8] = '{0.2, 0.6, 1.0, 0.8, 0.5, 0.3, 0.15, 0.05};
  int cur [NP];

  function automatic int noise(int c, int n);
    logic [31:0] h;
    h = (32'(c) * 32'd7919 + 32'(n) * 32'd104729) * 32'd2654435761;
    return int'(h[31:27]) % 17 - 8;
  endfunction

  function automatic logic [7:0] octet(int a, int l, int o);
    int k = 4 * l + o / 2;
    logic [15:0] s = 16'(cur[a * 16 + k]);
    return (o % 2 == 0) ? s[15:8] : s[7:0];
  endfunction

  always @(negedge clk) begin
    if (rst) begin
      jesd_rx_valid <= '0;
    end else begin
      if (!phase) begin
        for (int c = 0; c < NP; c++) begin
          automatic int v = 900 + noise(c, nframe);
          if (pulse_at[c] >= 0 && nframe >= pulse_at[c] && nframe < pulse_at[c] + 8)
            v -= int'(shape[nframe - pulse_at[c]] * real'(pulse_amp));
          if (pulse_at[c] >= 0 && nframe >= pulse_at[c] + 8) pulse_at[c] = -1;
          cur[c] = v;
          hist[c].push_back(v);
        end
        frame_ts.push_back(longint'(ts));
        nframe++;
      end
      for (int a = 0; a < NA; a++) begin
        jesd_rx_valid[a] <= 1'b1;
        jesd_rx_sof[a]   <= !phase;
        for (int l = 0; l < L; l++)
          for (int b = 0; b < 4; b++)
            jesd_rx_data[a][l][8*b +: 8] <= octet(a, l, 4 * int'(phase) + b);
      end
      phase = !phase;
    end
  end

  task automatic frames(int n);
    int target = nframe + n;
    while (nframe < target) @(posedge clk);
  endtask

  // ---- ToT stimulus -------------------------------------------------------------------
  realtime tdc_true [NT][$];    // rising-edge times that must be reported
  realtime edge_t [longint];    // time of the clock edge after which ts == key

  always @(posedge clk) begin
    #0.01;
    edge_t[longint'(ts)] = $realtime - 0.01;
  end

  // Tap delays of every line, copied from the models: an ideal code-density
  // calibration. age() is the middle of the edge ages giving fine count f.
  realtime cal [NT][NTAP];
  for (genvar g = 0; g < NT; g++) begin : g_cal
    initial begin
      #1;
      foreach (cal[g][i]) cal[g][i] = dut.g_tdc[g].u_tdc.u_line.cum_ns[i];
    end
  end

  function automatic realtime age(int t, int f);
    realtime lo = (f == 0) ? 0.0 : cal[t][f - 1];
    return (lo + cal[t][f]) / 2.0;
  endfunction

  task automatic set_tot(int t, logic v);
    if (t < NP) tot_pmt[t] = v; else tot_sipm[t - NP] = v;
  endtask

  // ToT pulse on channel t starting after `delay` ns; expected = must be read out
  task automatic tot_pulse(int t, real delay, real width, bit expected);
    fork begin
      #(delay);
      set_tot(t, 1'b1);
      if (expected) tdc_true[t].push_back($realtime);
      #(width);
      set_tot(t, 1'b0);
    end join_none
  endtask

  // ---- SiTCP sink and record decoder ------------------------------------------------
  logic [7:0] bytes [$];
  longint cyc = 0, last_byte = 0;
  int stall_pct = 0;

  always @(posedge clk) begin
    cyc++;
    if (tcp_tx_wr && !rst) begin bytes.push_back(tcp_tx_data); last_byte = cyc; end
    if (tcp_tx_full && dut.u_buf.rdf_empty == 1'b0) m_tcp_stall++;
  end
  always @(negedge clk) tcp_tx_full <= (int'($urandom % 100) < stall_pct);

  typedef struct { int ch; int mode; longint ts; int n0; } adc_rec_t;
  adc_rec_t adc_recs [$];
  int tdc_recs [NT];

  function automatic logic [31:0] word_pop();
    logic [31:0] w = {bytes[0], bytes[1], bytes[2], bytes[3]};
    repeat (4) void'(bytes.pop_front());
    return w;
  endfunction

  task automatic decode();
    while (bytes.size() >= 4) begin
      logic [31:0] w0;
      w0 = word_pop();
      if (w0 == 32'h0) continue;                        // filler
      if (w0[31:28] == TAG_ADC) begin
        adc_rec_t r;
        int s [LEN];
        int n0, nlen, mn, mi;
        longint hi, lo;
        logic [31:0] bl;
        r.ch = int'(w0[25:20]); r.mode = int'(w0[27:26]); nlen = int'(w0[15:0]);
        hi = longint'(word_pop()); lo = longint'(word_pop()); bl = word_pop();
        r.ts = (hi << 32) | lo;
        check(nlen == LEN, "record length field");
        for (int k = 0; k < LEN / 2; k++) begin
          logic [31:0] w = word_pop();
          s[2*k] = int'($signed(w[31:16])); s[2*k+1] = int'($signed(w[15:0]));
        end
        check(int'(bl[15:0]) > 880 && int'(bl[15:0]) < 920, $sformatf("baseline field %0d", bl[15:0]));
        // locate the window among what was sent on that channel
        n0 = -1;
        for (int n = 0; n + LEN <= hist[r.ch].size() && n0 < 0; n++) begin
          if (hist[r.ch][n] == s[0] && hist[r.ch][n+1] == s[1] && hist[r.ch][n+2] == s[2]) begin
            bit ok = 1;
            for (int k = 0; k < LEN; k++) if (hist[r.ch][n+k] != s[k]) begin ok = 0; break; end
            if (ok && frame_ts[n + PRE] <= r.ts && frame_ts[n + PRE] + 24 >= r.ts) n0 = n;
          end
        end
        check(n0 >= 0, $sformatf("ch %0d mode %0d: samples are a window PRE ahead of the trigger", r.ch, r.mode));
        r.n0 = n0;
        // pre-trigger: in self mode the pulse sits after PRE quiet samples
        if (r.mode == 0) begin
          mn = 1 << 30; mi = 0;
          for (int k = 0; k < LEN; k++) if (s[k] < mn) begin mn = s[k]; mi = k; end
          check(mi >= PRE && mi < PRE + 10, $sformatf("pulse minimum at sample %0d", mi));
          if (mi >= PRE && s[0] > 880) m_pretrig++;
        end
        adc_recs.push_back(r);
      end else if (w0[31:28] == TAG_TDC) begin
        int t;
        longint hi, lo, c;
        realtime tm;
        bit found;
        t = int'(w0[25:20]);
        hi = longint'(word_pop()); lo = longint'(word_pop());
        c = (hi << 32) | lo;
        tm = edge_t[c] - age(t, int'(w0[8:0]));
        found = 0;
        foreach (tdc_true[t][k]) begin
          realtime e = tdc_true[t][k] - tm;
          if (!found && e < 0.02 && e > -0.02) begin found = 1; tdc_true[t].delete(k); end
        end
        check(found, $sformatf("TDC ch %0d hit at %0.3f ns was injected and expected", t, tm));
        if (found) begin
          tdc_recs[t]++;
          if (t < NP) m_tdc_pmt++; else m_tdc_sipm++;
        end
      end else begin
        check(0, $sformatf("unknown record word %h", w0));
      end
    end
  endtask

  // wait until everything has left the SiTCP port, then decode it
  task automatic drain();
    do @(posedge clk);
    while (!(ddr_level == '0 && cyc - last_byte > 2000));
    decode();
    for (int t = 0; t < NT; t++)
      check(tdc_true[t].size() == 0, $sformatf("TDC ch %0d: %0d hits missing", t, tdc_true[t].size()));
  endtask

  function automatic int count_recs(int mode, int ch);
    int n = 0;
    foreach (adc_recs[i]) if (adc_recs[i].mode == mode && (ch < 0 || adc_recs[i].ch == ch)) n++;
    return n;
  endfunction

  // ---- test sequence --------------------------------------------------------------------
  initial begin
    int c0, drops0 [NP];
    for (int c = 0; c < NP; c++) begin pulse_at[c] = -1; threshold[c] = 16'd40; end
    repeat (10) @(posedge clk);
    rst = 0;
    frames(400);                                       // fill pre-trigger buffers

    // ---------- self trigger
    pulse_at[3] = nframe + 10;
    pulse_at[17] = nframe + 300;
    tot_pulse(5, 100.0, 15.0, 1);
    tot_pulse(NP + 8, 333.3, 20.0, 1);
    frames(700);
    drain();
    check(adc_recs.size() == 2 && count_recs(0, 3) == 1 && count_recs(0, 17) == 1,
          $sformatf("self: records for ch 3 and 17 only (%0d)", adc_recs.size()));
    m_self_rec += count_recs(0, -1);
    check(n_self == 2, "self trigger counter");
    adc_recs.delete();

    // ---------- coincidence
    trig_mode = TRIG_COINC;
    frames(10);
    pulse_at[1] = nframe + 5;                          // alone: rejected
    tot_pulse(9, 200.0, 15.0, 0);                      // gate closed: dropped
    m_tdc_gated++;
    frames(300);
    check(n_coinc == 0, "lone hit gives no coincidence");
    if (n_coinc == 0) m_coinc_reject++;
    pulse_at[2] = nframe + 5;
    pulse_at[20] = nframe + 7;                         // other ADC, 2 samples later
    @(posedge dut.global_trig);
    tot_pulse(7, 50.7, 15.0, 1);                       // inside the TDC gate
    tot_pulse(8, 1500.3, 15.0, 0);                     // after the gate closed
    m_tdc_gated++;
    frames(700);
    drain();
    check(n_coinc == 1, "one coincidence");
    m_coinc_trig = int'(n_coinc);
    check(adc_recs.size() == NP && count_recs(1, -1) == NP, $sformatf("coinc: all %0d channels read (%0d)", NP, adc_recs.size()));
    check(count_recs(1, 2) == 1 && count_recs(1, 20) == 1, "coinc: hit channels included");
    // all channels of one trigger share the time stamp
    foreach (adc_recs[i]) check(adc_recs[i].ts == adc_recs[0].ts, "coinc: common time stamp");
    adc_recs.delete();

    // ---------- external trigger with White Rabbit time loaded
    @(negedge clk);
    ts_load = 1; ts_load_value = 48'h0001_0000_0000;
    @(negedge clk);
    ts_load = 0;
    m_ts_load++;
    trig_mode = TRIG_EXT;
    frames(20);
    #1.7 ext_trig_in = 1;
    tot_pulse(NP + 20, 120.0, 15.0, 1);
    frames(50);
    ext_trig_in = 0;
    frames(700);
    drain();
    check(n_ext == 1, "one external trigger");
    m_ext_trig = int'(n_ext);
    check(count_recs(2, -1) == NP, $sformatf("ext: all channels read (%0d)", count_recs(2, -1)));
    foreach (adc_recs[i]) check(adc_recs[i].ts >= 64'h0001_0000_0000 && adc_recs[i].ts < 64'h0001_0001_0000,
                                "ext: time stamp follows the loaded WR time");
    adc_recs.delete();

    // ---------- overflow: all channels self-trigger faster than readout
    trig_mode = TRIG_SELF;
    stall_pct = 30;
    for (int c = 0; c < NP; c++) drops0[c] = int'(adc_drops[c]);
    c0 = int'(n_self);
    for (int r = 0; r < 8; r++) begin
      for (int c = 0; c < NP; c++) pulse_at[c] = nframe + 5;
      frames(280);
    end
    frames(300);
    stall_pct = 0;
    drain();
    for (int c = 0; c < NP; c++) begin
      automatic int d = int'(adc_drops[c]) - drops0[c];
      check(count_recs(0, c) + d == 8, $sformatf("ch %0d: %0d records + %0d drops != 8", c, count_recs(0, c), d));
      m_adc_drop += d;
    end
    m_self_rec += count_recs(0, -1);
    adc_recs.delete();

    // ---------- TDC code-density histogram on channel 11
    cd_channel = 6'd11;
    @(negedge clk); cd_clear = 1; @(negedge clk); cd_clear = 0;
    while (cd_busy) @(negedge clk);
    cd_enable = 1;
    for (int i = 0; i < 1000; i++) begin
      tot_pulse(11, 0.0, 10.0 + real'($urandom % 2000) / 1000.0, 1);
      #(30.0 + real'($urandom % 10000) / 1000.0);
    end
    #100;
    cd_enable = 0;
    check(cd_total == 32'd1000, $sformatf("histogram total %0d", cd_total));
    begin
      int sum, nz, tail;
      sum = 0; nz = 0; tail = 0;
      for (int b = 0; b < NTAP; b++) begin
        @(negedge clk); cd_rd_addr = 9'(b);
        @(negedge clk);
        sum += int'(cd_rd_data);
        if (cd_rd_data != 0) nz++;
        if (b >= 360 && cd_rd_data != 0) tail++;
      end
      check(sum == 1000, $sformatf("histogram sum %0d", sum));
      check(nz > 200, $sformatf("%0d codes occupied", nz));
      check(tail == 0, "codes beyond one clock period of taps stay empty");
      m_cd_hits = sum;
    end
    drain();

    // ---------- every mechanism happened
    check(m_self_rec > 0, "self-trigger records");
    check(m_pretrig > 0, "pre-trigger samples ahead of pulses");
    check(m_coinc_trig > 0, "coincidence trigger");
    check(m_coinc_reject > 0, "coincidence rejection of a lone hit");
    check(m_ext_trig > 0, "external trigger");
    check(m_tdc_pmt > 0, "PMT TDC hits");
    check(m_tdc_sipm > 0, "SiPM TDC hits");
    check(m_tdc_gated > 0, "TDC hits gated out");
    check(m_adc_drop > 0, "record FIFO overflow drops");
    check(m_ts_load > 0, "White Rabbit time load");
    check(m_cd_hits > 0, "code-density hits");
    check(m_tcp_stall > 0, "SiTCP back-pressure");
    $display("mechanisms: self_rec=%0d pretrig=%0d coinc=%0d coinc_reject=%0d ext=%0d tdc_pmt=%0d tdc_sipm=%0d tdc_gated=%0d adc_drop=%0d ts_load=%0d cd_hits=%0d tcp_stall=%0d",
             m_self_rec, m_pretrig, m_coinc_trig, m_coinc_reject, m_ext_trig, m_tdc_pmt, m_tdc_sipm,
             m_tdc_gated, m_adc_drop, m_ts_load, m_cd_hits, m_tcp_stall);
    $display("records built %0d, cycles %0d", n_records, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #8ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
