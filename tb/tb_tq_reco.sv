// tb_tq_reco: end-to-end test of the TQ reconstruction channel at its
// default sizes.
//
// Stimulus: a 14-bit waveform on an offset baseline of about 8000 counts with
// a slow drift and +-3 counts of noise, carrying negative photoelectron
// pulses of about 140 counts and 40 ns width: single hits and hit pairs
// whose spacing is 0.5, 0.7, 1.0 and 1.2 pulse widths (20, 28, 40, 48 ns).
// A reference model, written from the algorithm's rules and working sample
// by sample, computes baseline, threshold regions, both filters and peaks
// and the expected packets; every packet read from the output FIFO must
// match one of them exactly (time, charge, baseline, flags, sequence).
//
// The run makes each mechanism happen and counts it: baseline re-seeds and
// rejected (pulse) frames, trigger primitives and trigger regions, a tap
// reload of the deconvolution filter in mid-stream, a reload refused for lack
// of taps, a frame with two peaks (multi flag, with the interval set to 1),
// and output FIFO overflow (reading paused for a long stretch).  It also
// checks the packet latency and prints, per pair spacing, how often exactly
// two hits were found.
module tb_tq_reco;
  import tq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NF       = 40000;      // frames simulated
  localparam int EV_EVERY = 75;         // frames between events (600 ns)
  localparam int THR      = 20;
  localparam int PAUSE_LO = 5000, PAUSE_HI = 35000;   // FIFO not read
  localparam int WIN1_AT  = 36000;      // interval 1 from here on

  // DUT signals
  logic               adc_valid = 0;
  logic [FRAME_W-1:0] adc = '0;
  logic [TIME_W-1:0]  tcnt = 48'd1000;
  logic [15:0]        bl_d = 16'd3, thr = 16'(THR);
  logic [3:0]         pwin = 4'd3;
  logic               cfg_wr_en = 0, cfg_start = 0, cfg_full, cfg_busy, cfg_done, cfg_err;
  coef_t              cfg_wr_data = '0;
  fir_sel_e           cfg_sel = SEL_DECONV;
  logic               trigger, tq_rd_en = 0, tq_empty, bvalid, reseed, in_region;
  logic [NS-1:0]      overthrd;
  tq_packet_t         tq_out;
  logic [15:0]        baseline;
  logic [31:0]        ovf, npk;
  logic [9:0]         tq_count;

  tq_reco dut (
    .clk, .rst_n, .adc_valid, .adc_raw_data(adc), .time_cnt(tcnt),
    .channel_id(8'd5), .baseline_d(bl_d), .thrd_value_rel(thr), .peak_win(pwin),
    .cfg_wr_en, .cfg_wr_data, .cfg_full, .cfg_start, .cfg_sel, .cfg_busy,
    .cfg_reload_done(cfg_done), .cfg_error(cfg_err),
    .trigger, .overthrd, .tq_rd_en, .tq_fifo_out(tq_out), .tq_empty,
    .baseline, .baseline_valid(bvalid), .tq_overflow(ovf), .tq_packets(npk),
    .tq_count, .baseline_reseed(reseed), .in_region
  );

  // ---------------------------------------------------------------- stimulus
  int raw   [NS*NF];
  int ev_t  [$];       // true pulse start sample of every injected hit
  int ev_kind [$];     // per event: 0 single, 1..4 pair spacing index
  int ev_first [$];    // per event: first sample
  int spacing [5] = '{0, 20, 28, 40, 48};

  function automatic real pulse(input real t);
    if (t < 0) return 0.0;
    return 250.0 * (1.0 - $exp(-t / 2.0)) * $exp(-t / 10.0);
  endfunction

  task automatic build_waveform();
    for (int n = 0; n < NS*NF; n++)
      raw[n] = 8000 + n / 40000 + int'($urandom_range(6)) - 3;
    for (int e = 0; 40 + e * EV_EVERY < NF - 20; e++) begin
      int s0, kind;
      s0   = (40 + e * EV_EVERY) * NS + int'($urandom_range(7));
      kind = e % 5;
      ev_kind.push_back(kind);
      ev_first.push_back(s0);
      for (int h = 0; h < (kind == 0 ? 1 : 2); h++) begin
        int st;
        real a;
        st = s0 + h * spacing[kind];
        a  = 0.9 + 0.2 * real'($urandom_range(100)) / 100.0;
        ev_t.push_back(st);
        for (int k = 0; k < 160; k++)
          if (st + k < NS*NF) raw[st + k] -= int'(a * pulse(real'(k)));
      end
    end
  endtask

  // --------------------------------------------------------- reference model
  int  b_at [NF];  bit bv_at [NF];      // baseline seen by each frame
  bit  hit_f [NF], stop_f [NF];
  int  x [NS*NF], w [NS*NF], d [NS*NF];
  int  swap_frame = NF;                 // first raw frame using the new deconv taps
  int  new_deconv [DECONV_TAPS] = '{5, 3, 1, 0, -1, -3, -5};
  int  win_at [NF];                     // interval in force per clock/frame
  int  n_reject = 0, n_reseed_model = 0;

  typedef struct { longint t; int q; int b; int m; } pk_t;
  pk_t exp_pk [$];

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  task automatic run_model();
    int b, cnt;
    bit bv, in_reg, charge_st;
    bit region [NF];
    b = 0; bv = 0; cnt = 0; charge_st = 0;
    for (int f = 0; f < NF; f++) begin
      int s, a;
      b_at[f] = b; bv_at[f] = bv;
      // over-threshold check with the baseline of earlier frames
      begin
        bit any;
        any = 0;
        for (int i = 0; i < NS; i++) begin
          s = raw[f*NS + i];
          if (bv && s < b - THR) any = 1;
          x[f*NS + i] = sat(longint'(b) - s);
        end
        hit_f[f] = 0; stop_f[f] = 0;
        if (!charge_st && any) begin hit_f[f] = 1; charge_st = 1; end
        else if (charge_st && !any) begin stop_f[f] = 1; charge_st = 0; end
      end
      // baseline update
      a = 0;
      for (int i = 0; i < NS; i++) a += raw[f*NS + i];
      a = a / NS;
      if (!bv || cnt == 124) begin
        if (bv) n_reseed_model++;
        b = a; bv = 1; cnt = 0;
      end else begin
        cnt++;
        if (a >= b - 3 && a <= b + 3) b = (b + a) / 2;
        else n_reject++;
      end
    end
    // filters
    for (int n = 0; n < NS*NF; n++) begin
      longint acc;
      acc = 0;
      for (int k = 0; k < WIENER_TAPS; k++) acc += (n-k >= 0 ? longint'(x[n-k]) : 0) * longint'(WIENER_DEFAULT[k]);
      w[n] = sat(acc >>> WIENER_SHIFT);
    end
    for (int n = 0; n < NS*NF; n++) begin
      longint acc;
      bit nw;
      nw = (n / NS) >= swap_frame;
      acc = 0;
      for (int k = 0; k < DECONV_TAPS; k++)
        acc += (n-k >= 0 ? longint'(w[n-k]) : 0) * longint'(nw ? new_deconv[k] : int'(DECONV_DEFAULT[k]));
      d[n] = sat(acc >>> DECONV_SHIFT);
    end
    // trigger regions in filtered-frame terms: a raw hit at frame f opens the
    // search at filtered frame f+1 (the filters delay the signal one frame)
    in_reg = 0;
    for (int f = 0; f < NF; f++) begin
      bit h, st;
      h  = (f >= 1) && hit_f[f-1];
      st = (f >= 1) && stop_f[f-1];
      region[f] = h || in_reg;
      if (h) in_reg = 1; else if (st) in_reg = 0;
    end
    for (int f = 0; f < NF - 2; f++) begin
      int c, best, bi, wv;
      c = 0; best = 0; bi = 0;
      wv = win_at[f + 6 < NF ? f + 6 : NF - 1];
      if (region[f] || hit_f[f]) begin        // hit_f[f] opens filtered frame f+1
        for (int i = 0; i < NS; i++) begin
          int j;
          bit ok;
          j = f*NS + i;
          ok = 1;
          for (int k = 1; k <= wv; k++) begin
            if (!((j-k >= 0 ? d[j-k] : 0) < d[j-k+1])) ok = 0;
            if (!(d[j+k] < d[j+k-1])) ok = 0;
          end
          if (ok) begin
            if (c == 0 || d[j] > best) begin best = d[j]; bi = i; end
            c++;
          end
        end
      end
      if (c > 0) begin
        pk_t p;
        p.t = longint'(1000 + f) * NS + bi - GROUP_DELAY;
        p.q = best; p.b = b_at[f]; p.m = (c > 1);
        exp_pk.push_back(p);
      end
    end
  endtask

  // ------------------------------------------------------------- watchdog
  initial begin
    repeat (NF + 5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- monitors
  int n_trig = 0, n_regions = 0, n_reseed = 0, n_multi = 0, n_read = 0;
  bit prev_region = 0;
  pk_t got [$];
  int got_seq [$];
  always @(posedge clk) if (rst_n) begin
    if (trigger) n_trig++;
    if (in_region && !prev_region) n_regions++;
    prev_region <= in_region;
    if (reseed) n_reseed++;
    if (tq_rd_en && !tq_empty) begin
      pk_t p;
      p.t = longint'(tq_out.hit_time); p.q = int'($signed(tq_out.charge));
      p.b = int'(tq_out.baseline);     p.m = int'(tq_out.flags[0]);
      got.push_back(p);
      got_seq.push_back(int'(tq_out.seq));
      if (tq_out.channel != 8'd5) begin failures++; $display("bad channel"); end
      if (p.m) n_multi++;
      n_read++;
    end
  end

  // packet latency: the first packet can be read from the FIFO
  // TOTAL_LATENCY + 2 clocks after the frame holding its spike was presented
  int first_pkt_frame = -1;

  // ------------------------------------------------------------- main
  initial begin
    int f_first_spike;
    build_waveform();
    for (int f = 0; f < NF; f++) win_at[f] = (f < WIN1_AT) ? 3 : 1;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // a reload with an empty coefficient FIFO is refused
    cfg_start = 1; cfg_sel = SEL_DECONV;
    @(negedge clk); cfg_start = 0;
    @(negedge clk);
    checks++;
    if (!cfg_err) begin failures++; $display("cfg_error not raised"); end
    // stream the waveform; time_cnt counts clocks from 1000 at frame 0
    for (int f = 0; f < NF; f++) begin
      adc_valid = 1;
      for (int i = 0; i < NS; i++) adc[i*16 +: 16] = 16'(raw[f*NS + i]);
      tcnt      = 48'(1000 + f);
      pwin      = 4'(win_at[f]);
      tq_rd_en  = !(f >= PAUSE_LO && f < PAUSE_HI) && !tq_empty;
      if (!tq_empty && first_pkt_frame < 0) first_pkt_frame = f;
      // load new deconvolution taps around frame 20000, start the reload
      if (f >= 20000 && f < 20000 + DECONV_TAPS) begin
        cfg_wr_en = 1; cfg_wr_data = coef_t'(new_deconv[f - 20000]);
      end else cfg_wr_en = 0;
      cfg_start = (f == 20010);
      @(negedge clk);
      // reload_done is high in the clock after the taps were swapped: frame f
      // was presented then, and frames from f-3 on meet the new taps in the
      // deconvolution filter
      if (cfg_done) swap_frame = f + 1 - 3;
    end
    adc_valid = 0; cfg_wr_en = 0; cfg_start = 0;
    for (int r = 0; r < 700; r++) begin
      tq_rd_en = !tq_empty;
      @(negedge clk);
    end
    tq_rd_en = 0;
    // ---- compare with the reference
    run_model();
    begin
      int k, skipped;
      k = 0; skipped = 0;
      for (int g = 0; g < got.size(); g++) begin
        checks++;
        while (k < exp_pk.size() && !(exp_pk[k].t == got[g].t && exp_pk[k].q == got[g].q &&
                                      exp_pk[k].b == got[g].b && exp_pk[k].m == got[g].m)) begin
          k++; skipped++;
        end
        if (k >= exp_pk.size()) begin
          failures++;
          if (failures < 10) $display("packet %0d not expected: t=%0d q=%0d b=%0d m=%0d", g, got[g].t, got[g].q, got[g].b, got[g].m);
        end else k++;
        if (got_seq[g] != g) begin failures++; if (failures < 10) $display("seq %0d at %0d", got_seq[g], g); end
      end
      skipped += exp_pk.size() - k;
      checks++;
      if (skipped != int'(ovf)) begin
        failures++;
        $display("expected %0d packets, got %0d, missing %0d, overflow counter %0d", exp_pk.size(), got.size(), skipped, ovf);
      end
      checks++;
      if (int'(npk) != got.size()) begin failures++; $display("packet counter %0d vs %0d read", npk, got.size()); end
    end
    // ---- latency of the first packet
    f_first_spike = int'((exp_pk[0].t + GROUP_DELAY) / NS) - 1000;
    checks++;
    if (first_pkt_frame != f_first_spike + TOTAL_LATENCY + 2) begin
      failures++; $display("first packet readable with frame %0d, expected %0d", first_pkt_frame, f_first_spike + TOTAL_LATENCY + 2);
    end
    // ---- mechanisms
    begin
      string names [8] = '{"baseline re-seed", "rejected baseline frame", "trigger primitive",
                           "trigger region", "tap reload", "refused reload", "multi-peak frame",
                           "FIFO overflow"};
      int    counts [8];
      counts = '{n_reseed, n_reject, n_trig, n_regions, (swap_frame < NF) ? 1 : 0,
                 cfg_err ? 1 : 0, n_multi, int'(ovf)};
      for (int m = 0; m < 8; m++) begin
        checks++;
        $display("mechanism %-24s : %0d", names[m], counts[m]);
        if (counts[m] == 0) begin failures++; $display("  never happened"); end
      end
      checks++;
      if (n_reseed != n_reseed_model) begin failures++; $display("re-seeds dut %0d model %0d", n_reseed, n_reseed_model); end
    end
    // ---- hit counting per event type (informative, plus a loose check on singles)
    begin
      int ok [5], tot [5];
      ok = '{0,0,0,0,0}; tot = '{0,0,0,0,0};
      for (int e = 0; e < ev_first.size(); e++) begin
        int lo, hi, nh;
        if (ev_first[e] / NS >= WIN1_AT - 200) break;
        lo = 1000 * NS + ev_first[e] - 10; hi = lo + 80;
        nh = 0;
        foreach (exp_pk[p]) if (exp_pk[p].t >= lo && exp_pk[p].t < hi) nh++;
        tot[ev_kind[e]]++;
        if (nh == (ev_kind[e] == 0 ? 1 : 2)) ok[ev_kind[e]]++;
      end
      for (int kk = 0; kk < 5; kk++)
        $display("events %s: %0d of %0d with the right number of hits",
                 kk == 0 ? "single   " : $sformatf("pair %0dns", spacing[kk]), ok[kk], tot[kk]);
      checks++;
      if (ok[0] * 10 < tot[0] * 9) begin failures++; $display("single hits found in under 90%% of events"); end
    end
    $display("packets expected=%0d read=%0d", exp_pk.size(), got.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
