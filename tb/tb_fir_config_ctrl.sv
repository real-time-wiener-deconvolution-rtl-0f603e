// tb_fir_config_ctrl: checks the default taps after reset, a Wiener reload
// and a deconvolution reload through the FIFO (taps in order, the other
// filter untouched, old taps kept until the swap, 1 + N + 1 clocks from
// start to done), and the error flag when the FIFO holds too few words.
module tb_fir_config_ctrl;
  import tq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic     wr_en = 0, start = 0, full, busy, done, err;
  coef_t    wr_data = '0;
  fir_sel_e sel = SEL_WIENER;
  coef_t    wc [WIENER_TAPS], dc [DECONV_TAPS];

  fir_config_ctrl dut (.clk, .rst_n, .cfg_wr_en(wr_en), .cfg_wr_data(wr_data), .cfg_full(full),
                       .cfg_start(start), .cfg_sel(sel), .wiener_coef(wc), .deconv_coef(dc),
                       .busy, .reload_done(done), .cfg_error(err));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic push(input int v);
    @(negedge clk); wr_en = 1; wr_data = coef_t'(v);
    @(negedge clk); wr_en = 0;
  endtask

  task automatic reload(input fir_sel_e s, input int n, output int cycles);
    @(negedge clk); start = 1; sel = s;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done && cycles < 100) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < WIENER_TAPS; k++) check(wc[k] == WIENER_DEFAULT[k], "wiener default");
    for (int k = 0; k < DECONV_TAPS; k++) check(dc[k] == DECONV_DEFAULT[k], "deconv default");
    check(!busy && !err, "idle after reset");
    // too few words: error, nothing changes
    for (int k = 0; k < 5; k++) push(100 + k);
    reload(SEL_WIENER, WIENER_TAPS, cyc);
    check(err, "error flag on short FIFO");
    check(wc[0] == WIENER_DEFAULT[0], "taps unchanged after error");
    // complete the Wiener set: 11 words 100..110
    for (int k = 5; k < WIENER_TAPS; k++) push(100 + k);
    @(negedge clk); start = 1; sel = SEL_WIENER;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 100) begin
      check(wc[0] == WIENER_DEFAULT[0], "old taps kept while loading");
      @(negedge clk); cyc++;
    end
    // done is seen one clock after the CONFIG state, i.e. start + 1 + N + 1
    check(cyc == WIENER_TAPS + 2, $sformatf("wiener reload cycles %0d", cyc));
    for (int k = 0; k < WIENER_TAPS; k++) check(int'(wc[k]) == 100 + k, $sformatf("wiener tap %0d = %0d", k, wc[k]));
    for (int k = 0; k < DECONV_TAPS; k++) check(dc[k] == DECONV_DEFAULT[k], "deconv untouched");
    // deconvolution reload with negative taps
    for (int k = 0; k < DECONV_TAPS; k++) push(-50 * k + 7);
    reload(SEL_DECONV, DECONV_TAPS, cyc);
    check(cyc == DECONV_TAPS + 2, $sformatf("deconv reload cycles %0d", cyc));
    for (int k = 0; k < DECONV_TAPS; k++) check(int'(dc[k]) == -50 * k + 7, "deconv tap");
    for (int k = 0; k < WIENER_TAPS; k++) check(int'(wc[k]) == 100 + k, "wiener kept");
    @(negedge clk);
    check(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
