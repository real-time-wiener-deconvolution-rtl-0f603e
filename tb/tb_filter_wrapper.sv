// tb_filter_wrapper: streams pulse-like and random samples through the
// Wiener + deconvolution chain and checks every output sample against two
// cascaded reference convolutions (with the shifts and 16-bit saturation in
// between), the 4-clock latency, and that a deconvolution tap reload done
// mid-stream changes the output from the swap onwards without a gap.
module tb_filter_wrapper;
  import tq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic     in_valid = 0, out_valid;
  sample_t  din [NS], dout [NS];
  logic     wr_en = 0, start = 0, full, busy, done, err;
  coef_t    wr_data = '0;
  fir_sel_e sel = SEL_DECONV;

  filter_wrapper dut (.clk, .rst_n, .in_valid, .adc_check(din), .out_valid, .adc_filt(dout),
                      .cfg_wr_en(wr_en), .cfg_wr_data(wr_data), .cfg_full(full), .cfg_start(start),
                      .cfg_sel(sel), .cfg_busy(busy), .cfg_reload_done(done), .cfg_error(err));

  int xs [$], ws [$];
  int dtaps [DECONV_TAPS];
  int swap_frame = -1;   // frame index (at the deconv input) from which new taps apply
  int newtaps [DECONV_TAPS] = '{1, 0, 0, 0, 0, 0, -1};

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int f;
  // done rises on the clock edge that installs the new taps; it is sampled
  // one edge later, so the first frame using them is swap_frame - 1.
  always @(posedge clk) if (rst_n && done) swap_frame = f;

  initial begin
    int nchk_new = 0;
    for (int i = 0; i < NS; i++) din[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (f = 0; f < 800; f++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < NS; i++) begin
        int x, t;
        t = (f * NS + i) % 200;
        x = int'($urandom_range(8)) - 4;
        if (t >= 50) x += int'(150.0 * $exp(-real'(t - 50) / 12.0) * (1.0 - $exp(-real'(t - 50) / 2.0)));
        if (f >= 600 && f < 604) x = 32000;            // saturate the chain
        din[i] = sample_t'(x);
        xs.push_back(x);
        // Wiener reference
        begin
          longint acc;
          int n;
          acc = 0;
          n = xs.size() - 1;
          for (int k = 0; k < WIENER_TAPS; k++)
            acc += (n - k >= 0 ? longint'(xs[n-k]) : 0) * longint'(WIENER_DEFAULT[k]);
          ws.push_back(sat(acc >>> WIENER_SHIFT));
        end
      end
      // slow-control reload of the deconvolution taps around frame 400
      if (f == 380) fork begin
        for (int k = 0; k < DECONV_TAPS; k++) begin
          @(negedge clk); wr_en = 1; wr_data = coef_t'(newtaps[k]);
        end
        @(negedge clk); wr_en = 0; start = 1; sel = SEL_DECONV;
        @(negedge clk); start = 0;
      end join_none
      if (f >= 4) begin
        // output belongs to frame f-4; the deconv filter saw it at frame f-2
        for (int i = 0; i < NS; i++) begin
          int n, e;
          longint acc;
          bit use_new;
          acc = 0;
          n = (f - 4) * NS + i;
          use_new = (swap_frame >= 0) && (f - 2 >= swap_frame - 1);
          for (int k = 0; k < DECONV_TAPS; k++) begin
            int tap;
            tap = use_new ? newtaps[k] : int'(DECONV_DEFAULT[k]);
            acc += (n - k >= 0 ? longint'(ws[n-k]) : 0) * longint'(tap);
          end
          e = sat(acc >>> DECONV_SHIFT);
          if (use_new) nchk_new++;
          checks++;
          if (!out_valid || int'(dout[i]) != e) begin
            failures++;
            if (failures < 8) $display("f=%0d n=%0d out=%0d exp=%0d new=%b", f, n, dout[i], e, use_new);
          end
        end
      end
    end
    checks++;
    if (nchk_new < 100 || err) begin failures++; $display("reload not exercised (%0d) or error", nchk_new); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
