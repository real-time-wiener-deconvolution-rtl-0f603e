// tb_fir_parallel: streams random samples through an 11-tap and a 7-tap
// instance with random taps and compares every output sample with a direct
// convolution over the sample stream (y[n] = sum coef[k] x[n-k], arithmetic
// shift right, saturation to 16 bits).  Checks the 2-clock latency, an
// impulse response equal to the taps, and that saturation occurs.
module tb_fir_parallel;
  import tq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic    in_valid = 0;
  sample_t din [NS];
  coef_t   c11 [11], c7 [7];
  logic    v11, v7;
  sample_t y11 [NS], y7 [NS];

  fir_parallel #(.NTAPS(11), .SHIFT(7)) dut11 (.clk, .rst_n, .in_valid, .din, .coef(c11), .out_valid(v11), .dout(y11));
  fir_parallel #(.NTAPS(7),  .SHIFT(0)) dut7  (.clk, .rst_n, .in_valid, .din, .coef(c7),  .out_valid(v7),  .dout(y7));

  int xs [$];           // all input samples
  int nsat = 0;

  function automatic int ref_y(input int n, input int ntaps, input int shift, input bit use11);
    longint acc = 0;
    for (int k = 0; k < ntaps; k++) begin
      int x;
      x = (n - k >= 0) ? xs[n-k] : 0;
      acc += longint'(x) * longint'(use11 ? int'(c11[k]) : int'(c7[k]));
    end
    acc = acc >>> shift;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NS; i++) din[i] = '0;
    for (int k = 0; k < 11; k++) c11[k] = coef_t'(int'($urandom_range(2000)) - 1000);
    for (int k = 0; k < 7; k++)  c7[k]  = coef_t'(k + 1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 600; f++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < NS; i++) begin
        int x;
        if (f == 5) x = (i == 0) ? 1 : 0;               // unit impulse
        else if (f < 9) x = 0;
        else if (f >= 300 && f < 310) x = 30000;        // drives the 7-tap into saturation
        else x = int'($urandom_range(4000)) - 2000;
        din[i] = sample_t'(x);
        xs.push_back(x);
      end
      if (f >= 2) begin
        // outputs now belong to frame f-2
        for (int i = 0; i < NS; i++) begin
          int n, e11, e7;
          n = (f - 2) * NS + i;
          e11 = ref_y(n, 11, 7, 1);
          e7  = ref_y(n, 7, 0, 0);
          if (e7 == 32767) nsat++;
          checks++;
          if (!v11 || !v7 || int'(y11[i]) != e11 || int'(y7[i]) != e7) begin
            failures++;
            if (failures < 8) $display("n=%0d y11=%0d exp %0d y7=%0d exp %0d", n, y11[i], e11, y7[i], e7);
          end
        end
      end
      // impulse response of the 7-tap (shift 0) equals its taps
      if (f >= 7 && f <= 8) begin
        for (int i = 0; i < NS; i++) begin
          int n;
          n = (f - 2) * NS + i - 5 * NS;     // offset from the impulse
          if (n >= 0 && n < 7) begin
            checks++;
            if (int'(y7[i]) != int'(c7[n])) begin failures++; $display("impulse tap %0d: %0d", n, y7[i]); end
          end
        end
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
