// tb_noise_ratio: hit-separation workload at four noise levels, with the
// channel at its default sizes.
//
// The waveform is the one of the end-to-end test (8000-count offset, single
// photoelectron pulses about 145 counts high and 40 ns wide, single hits and
// pairs spaced 0.5, 0.7, 1.0 and 1.2 pulse widths), but the noise is now
// roughly Gaussian (a sum of twelve uniform draws) with an rms alpha set so
// that alpha / beta = 0.030, 0.037, 0.050 and 0.076, beta being the pulse
// height. These are the four noise-to-amplitude ratios of the published
// bench measurements; the 0.037 point is the one closest to the running
// detector. The threshold is set to 5 alpha at each level, the peak interval
// to 6 samples, and the filter taps are the defaults of tq_pkg (placeholders,
// not fitted to a PMT). With the default taps a narrower interval lets noise
// wiggles on the deconvolved signal pass as extra peaks at these noise levels.
//
// Each level is a separate run after a reset. The test reads every packet
// and checks that the packet stream is whole (sequence numbers without gaps,
// no overflow, right channel), that the reported baseline lies near the true
// offset, and that each packet's time falls inside an injected event. It
// then prints, per level and event type, the fraction of events with the
// right number of hits, and requires at least 80 % for every event type at
// every level. That bound guards the behaviour with the default taps; it is
// not a published efficiency.
module tb_noise_ratio;
  import tq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NF       = 24000;      // frames per noise level
  localparam int EV_EVERY = 75;         // frames between events
  localparam int NLEV     = 4;
  localparam real BETA    = 145.0;      // pulse height in counts
  real ratio [NLEV] = '{0.030, 0.037, 0.050, 0.076};

  logic               adc_valid = 0;
  logic [FRAME_W-1:0] adc = '0;
  logic [TIME_W-1:0]  tcnt = '0;
  logic [15:0]        bl_d = 16'd3, thr = 16'd20;
  logic [3:0]         pwin = 4'd6;
  logic               cfg_full, cfg_busy, cfg_done, cfg_err;
  logic               trigger, tq_rd_en = 0, tq_empty, bvalid, reseed, in_region;
  logic [NS-1:0]      overthrd;
  tq_packet_t         tq_out;
  logic [15:0]        baseline;
  logic [31:0]        ovf, npk;
  logic [9:0]         tq_count;

  tq_reco dut (
    .clk, .rst_n, .adc_valid, .adc_raw_data(adc), .time_cnt(tcnt),
    .channel_id(8'd9), .baseline_d(bl_d), .thrd_value_rel(thr), .peak_win(pwin),
    .cfg_wr_en(1'b0), .cfg_wr_data('0), .cfg_full, .cfg_start(1'b0), .cfg_sel(SEL_WIENER),
    .cfg_busy, .cfg_reload_done(cfg_done), .cfg_error(cfg_err),
    .trigger, .overthrd, .tq_rd_en, .tq_fifo_out(tq_out), .tq_empty,
    .baseline, .baseline_valid(bvalid), .tq_overflow(ovf), .tq_packets(npk),
    .tq_count, .baseline_reseed(reseed), .in_region
  );

  int raw [NS*NF];
  int ev_kind [$], ev_first [$];
  int spacing [5] = '{0, 20, 28, 40, 48};

  function automatic real pulse(input real t);
    if (t < 0) return 0.0;
    return 250.0 * (1.0 - $exp(-t / 2.0)) * $exp(-t / 10.0);
  endfunction

  // roughly unit-variance Gaussian: sum of twelve uniforms on [0,1) minus 6
  function automatic real gauss();
    real g;
    g = -6.0;
    for (int k = 0; k < 12; k++) g += real'($urandom_range(9999)) / 10000.0;
    return g;
  endfunction

  task automatic build_waveform(input real alpha);
    ev_kind.delete(); ev_first.delete();
    for (int n = 0; n < NS*NF; n++) raw[n] = 8000 + int'(alpha * gauss());
    for (int e = 0; 40 + e * EV_EVERY < NF - 20; e++) begin
      int s0, kind;
      s0   = (40 + e * EV_EVERY) * NS + int'($urandom_range(7));
      kind = e % 5;
      ev_kind.push_back(kind);
      ev_first.push_back(s0);
      for (int h = 0; h < (kind == 0 ? 1 : 2); h++) begin
        int st;
        st = s0 + h * spacing[kind];
        for (int k = 0; k < 160; k++)
          if (st + k < NS*NF) raw[st + k] -= int'(pulse(real'(k)));
      end
    end
  endtask

  // packets of the current level
  longint pk_t [$];
  int     pk_b [$], pk_seq [$];
  always @(posedge clk) if (rst_n && tq_rd_en && !tq_empty) begin
    pk_t.push_back(longint'(tq_out.hit_time));
    pk_b.push_back(int'(tq_out.baseline));
    pk_seq.push_back(int'(tq_out.seq));
    checks++;
    if (tq_out.channel != 8'd9) begin failures++; $display("bad channel"); end
  end

  initial begin
    repeat ((NF + 800) * NLEV + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int lv = 0; lv < NLEV; lv++) begin
      real alpha;
      int  ok [5], tot [5], stray, bad_b;
      alpha = ratio[lv] * BETA;
      build_waveform(alpha);
      pk_t.delete(); pk_b.delete(); pk_seq.delete();
      thr = 16'(int'(5.0 * alpha));
      rst_n = 0; adc_valid = 0; tq_rd_en = 0;
      repeat (4) @(negedge clk);
      rst_n = 1;
      for (int f = 0; f < NF; f++) begin
        adc_valid = 1;
        for (int i = 0; i < NS; i++) adc[i*16 +: 16] = 16'(raw[f*NS + i]);
        tcnt     = 48'(f);
        tq_rd_en = !tq_empty;
        @(negedge clk);
      end
      adc_valid = 0;
      repeat (40) begin tq_rd_en = !tq_empty; @(negedge clk); end
      tq_rd_en = 0;
      // stream integrity
      checks++;
      if (ovf != 0 || int'(npk) != pk_t.size()) begin
        failures++; $display("level %0d: overflow %0d, written %0d, read %0d", lv, ovf, npk, pk_t.size());
      end
      foreach (pk_seq[p]) begin
        checks++;
        if (pk_seq[p] != p) begin failures++; $display("level %0d: seq %0d at %0d", lv, pk_seq[p], p); break; end
      end
      // baseline and time of every packet
      stray = 0; bad_b = 0;
      foreach (pk_t[p]) begin
        bit in_ev;
        in_ev = 0;
        foreach (ev_first[e])
          if (pk_t[p] >= ev_first[e] - 10 && pk_t[p] < ev_first[e] + 70) in_ev = 1;
        if (!in_ev) stray++;
        if (pk_b[p] < 8000 - int'(4.0 * alpha) - 2 || pk_b[p] > 8000 + int'(4.0 * alpha) + 2) bad_b++;
      end
      checks++;
      if (bad_b != 0) begin failures++; $display("level %0d: %0d packets with a baseline off the offset", lv, bad_b); end
      checks++;
      if (stray * 20 > pk_t.size()) begin failures++; $display("level %0d: %0d of %0d packets outside any event", lv, stray, pk_t.size()); end
      // hits per event
      ok = '{0,0,0,0,0}; tot = '{0,0,0,0,0};
      foreach (ev_first[e]) begin
        int nh;
        nh = 0;
        foreach (pk_t[p]) if (pk_t[p] >= ev_first[e] - 10 && pk_t[p] < ev_first[e] + 70) nh++;
        tot[ev_kind[e]]++;
        if (nh == (ev_kind[e] == 0 ? 1 : 2)) ok[ev_kind[e]]++;
      end
      $display("alpha/beta %0.3f (rms %0.1f, threshold %0d): packets %0d, outside events %0d",
               ratio[lv], alpha, thr, pk_t.size(), stray);
      for (int kk = 0; kk < 5; kk++)
        $display("  %s: %0d of %0d with the right number of hits",
                 kk == 0 ? "single   " : $sformatf("pair %0dns", spacing[kk]), ok[kk], tot[kk]);
      for (int kk = 0; kk < 5; kk++) begin
        checks++;
        if (ok[kk] * 100 < tot[kk] * 80) begin failures++; $display("  event type %0d under 80%%", kk); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
