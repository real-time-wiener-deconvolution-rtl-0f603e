// tb_over_check: random frames around a baseline with random negative
// pulses; checks every clock the over-threshold mask, the trigger, the
// baseline-subtracted and inverted samples and the hit/stop pulses against a
// model of the rules (sample < baseline - threshold; hit on the first frame
// over threshold, stop on the first frame after with none), one clock later.
module tb_over_check;
  import tq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic               in_valid = 0, bvalid = 0;
  logic [FRAME_W-1:0] adc = '0;
  logic [15:0]        baseline = 16'd8000, thr = 16'd30;
  logic               out_valid, trigger, hit, stop;
  sample_t            adc_check [NS];
  logic [NS-1:0]      overthrd;

  over_check dut (.clk, .rst_n, .in_valid, .adc_raw_data(adc), .baseline,
                  .baseline_valid(bvalid), .thrd_value_rel(thr), .out_valid,
                  .adc_check, .overthrd, .trigger, .hit, .stop);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NS-1:0] e_over;
  int            e_sub [NS];
  bit            e_hit, e_stop, in_charge = 0;
  int            n_hit = 0, n_stop = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      bvalid   = (n > 2);
      in_valid = 1;
      baseline = 16'(8000 + (n / 500));
      thr      = 16'(20 + (n % 7));
      for (int i = 0; i < 8; i++) begin
        int v;
        v = int'(baseline) + int'($urandom_range(10)) - 5;
        if ((n % 13) inside {[4:6]}) v -= int'($urandom_range(60));
        if (n == 1000 && i == 3) v = 0;       // far below: large positive result
        adc[i*16 +: 16] = 16'(v);
      end
      // model
      e_hit = 0; e_stop = 0;
      for (int i = 0; i < 8; i++) begin
        int s;
        s = int'(adc[i*16 +: 16]);
        e_over[i] = bvalid && (s < int'(baseline) - int'(thr));
        e_sub[i]  = int'(baseline) - s;
        if (e_sub[i] > 32767) e_sub[i] = 32767;
      end
      if (!in_charge && |e_over) begin e_hit = 1; in_charge = 1; n_hit++; end
      else if (in_charge && !(|e_over)) begin e_stop = 1; in_charge = 0; n_stop++; end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (overthrd !== e_over || trigger !== |e_over || hit !== e_hit || stop !== e_stop || !out_valid) begin
        failures++;
        if (failures < 8) $display("frame %0d: mask %b/%b hit %b/%b stop %b/%b", n, overthrd, e_over, hit, e_hit, stop, e_stop);
      end
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(adc_check[i]) != e_sub[i]) begin
          failures++;
          if (failures < 8) $display("frame %0d lane %0d: sub %0d exp %0d", n, i, adc_check[i], e_sub[i]);
        end
      end
    end
    checks++;
    if (n_hit < 100 || n_stop < 100) begin failures++; $display("too few hits %0d/%0d", n_hit, n_stop); end
    $display("hits=%0d stops=%0d", n_hit, n_stop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
