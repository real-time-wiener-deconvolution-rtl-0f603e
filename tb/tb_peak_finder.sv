// tb_peak_finder: feeds a stream of random spikes on noise with random
// trigger regions (hit/stop) and several interval widths, and checks every
// clock the peak_valid/charge/hit_time/multi outputs against a reference
// written from the rules: inside a region (plus the frame before a hit) a
// sample is a peak when the win samples before strictly rise to it and the
// win samples after strictly fall; one peak per frame, the largest.
// Latency 4 clocks.
module tb_peak_finder;
  import tq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NF = 3000;

  logic       in_valid = 0, hit = 0, stop = 0;
  sample_t    din [NS];
  logic [3:0] win = 4'd3;
  logic       pv, multi, searching;
  sample_t    charge;
  logic [2:0] ht;

  peak_finder dut (.clk, .rst_n, .in_valid, .din, .hit, .stop, .win, .peak_valid(pv),
                   .charge, .hit_time(ht), .multi, .searching);

  int  y    [NS*(NF+2)];
  bit  fhit [NF+2], fstop [NF+2];
  int  fwin [NF+2];
  bit  e_valid [NF], e_multi [NF];
  int  e_q [NF], e_t [NF];
  int  n_peaks = 0, n_multi = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit in_reg;
    bit region [NF+2];
    // --- build the stimulus ---
    foreach (y[n]) y[n] = int'($urandom_range(6)) - 3;
    for (int n = 20; n < NS*NF - 40; n += 6 + int'($urandom_range(30))) begin
      int h;
      h = 20 + int'($urandom_range(300));
      for (int k = -5; k <= 5; k++) y[n+k] += h * (6 - (k < 0 ? -k : k)) / 6;
    end
    in_reg = 0;
    for (int f = 0; f < NF + 2; f++) begin
      fwin[f] = (f < 600) ? 1 : (f < 1200) ? 2 : (f < 1800) ? 3 : (f < 2400) ? 5 : 8;
      fhit[f] = 0; fstop[f] = 0;
      if (!in_reg && ($urandom % 4 == 0)) begin fhit[f] = 1; in_reg = 1; end
      else if (in_reg && ($urandom % 3 == 0)) begin fstop[f] = 1; in_reg = 0; end
    end
    // --- reference ---
    in_reg = 0;
    for (int f = 0; f < NF + 2; f++) begin
      region[f] = fhit[f] || in_reg;
      if (fhit[f]) in_reg = 1; else if (fstop[f]) in_reg = 0;
    end
    for (int f = 0; f < NF; f++) begin
      int cnt, best, bi, w;
      cnt = 0; best = 0; bi = 0;
      w = fwin[f + 1];          // the interval in force when the frame is tested
      if (region[f] || fhit[f+1]) begin
        for (int i = 0; i < NS; i++) begin
          int j;
          bit ok;
          j = f * NS + i;
          ok = 1;
          for (int k = 1; k <= w; k++) begin
            int a, b, c, d;
            a = (j - k >= 0) ? y[j-k] : 0;
            b = (j - k + 1 >= 0) ? y[j-k+1] : 0;
            c = y[j+k];
            d = y[j+k-1];
            if (!(a < b) || !(c < d)) ok = 0;
          end
          if (ok) begin
            if (cnt == 0 || y[j] > best) begin best = y[j]; bi = i; end
            cnt++;
          end
        end
      end
      e_valid[f] = (cnt > 0); e_q[f] = best; e_t[f] = bi; e_multi[f] = (cnt > 1);
      if (cnt > 0) n_peaks++;
      if (cnt > 1) n_multi++;
    end
    // --- drive and compare ---
    for (int i = 0; i < NS; i++) din[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF + 2; f++) begin
      @(negedge clk);
      in_valid = 1;
      hit = fhit[f]; stop = fstop[f]; win = 4'(fwin[f]);
      for (int i = 0; i < NS; i++) din[i] = sample_t'(y[f*NS + i]);
      if (f >= 4) begin
        int g;
        g = f - 4;
        checks++;
        if (pv !== e_valid[g] || (e_valid[g] && (int'(charge) != e_q[g] || int'(ht) != e_t[g])) || multi !== e_multi[g]) begin
          failures++;
          if (failures < 10) $display("frame %0d: dut v=%b q=%0d t=%0d m=%b  exp v=%b q=%0d t=%0d m=%b",
                                      g, pv, charge, ht, multi, e_valid[g], e_q[g], e_t[g], e_multi[g]);
        end
      end
    end
    checks++;
    if (n_peaks < 200 || n_multi < 5) begin failures++; $display("coverage peaks=%0d multi=%0d", n_peaks, n_multi); end
    $display("peaks=%0d multi=%0d", n_peaks, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
