// tb_baseline_finder: drives flat noisy frames, pulse frames and a slow
// drift, and compares the tracked baseline each clock with a reference model
// written from the algorithm's definition (8-sample mean, +-delta window,
// mean of old and new, re-seed every 1000 samples).  Also checks that a pulse
// does not move the baseline and that re-seeds happen every 125 frames.
module tb_baseline_finder;
  import tq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic               in_valid = 0;
  logic [FRAME_W-1:0] adc = '0;
  logic [15:0]        delta = 16'd3;
  logic [15:0]        baseline;
  logic               bvalid, reseed;

  baseline_finder dut (.clk, .rst_n, .in_valid, .adc_raw_data(adc), .baseline_d(delta),
                       .baseline, .baseline_valid(bvalid), .reseed);

  // reference model state
  int  m_b = 0, m_frames = 0, n_reseed = 0, n_update = 0, n_reject = 0;
  bit  m_valid = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mean8(input logic [FRAME_W-1:0] f);
    int s = 0;
    for (int i = 0; i < 8; i++) s += int'(f[i*16 +: 16]);
    return s / 8;
  endfunction

  initial begin
    int level = 8000;
    int b_before;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // compare with the model (state after all earlier frames)
      checks++;
      if (bvalid !== m_valid || (m_valid && baseline !== 16'(m_b))) begin
        failures++;
        if (failures < 8) $display("frame %0d: dut b=%0d v=%b  model b=%0d v=%b", n, baseline, bvalid, m_b, m_valid);
      end
      // stimulus: slow drift of 1 count every 200 frames, noise +-2,
      // a negative pulse of 200 counts in frames 300..304 and 1700..1703
      if (n % 200 == 199) level += 1;
      for (int i = 0; i < 8; i++) begin
        int v;
        v = level + int'($urandom_range(4)) - 2;
        if ((n >= 300 && n < 305) || (n >= 1700 && n < 1704)) v -= 200;
        adc[i*16 +: 16] = 16'(v);
      end
      in_valid = (n % 97 != 50);   // an occasional idle clock
      if (n == 300) b_before = m_b;
      @(posedge clk);
      if (in_valid) begin
        int a;
        a = mean8(adc);
        if (!m_valid || m_frames == 124) begin
          if (m_valid) n_reseed++;
          m_b = a; m_valid = 1; m_frames = 0;
        end else begin
          m_frames++;
          if (a >= m_b - int'(delta) && a <= m_b + int'(delta)) begin
            m_b = (m_b + a) / 2; n_update++;
          end else n_reject++;
        end
      end
      if (n == 305) begin
        checks++;
        if (m_b != b_before && !(m_frames <= 5)) begin failures++; $display("pulse moved baseline"); end
      end
    end
    checks++;
    if (dut_reseeds != n_reseed) begin
      failures++; $display("reseed pulses dut=%0d model=%0d", dut_reseeds, n_reseed);
    end
    checks++;
    if (n_reseed < 20 || n_reject < 5 || n_update < 1000) begin
      failures++; $display("coverage: reseed=%0d reject=%0d update=%0d", n_reseed, n_reject, n_update);
    end
    $display("reseeds=%0d rejected frames=%0d updates=%0d", n_reseed, n_reject, n_update);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // periodic re-seed pulse must line up with the model's count
  int dut_reseeds = 0;
  always @(posedge clk) if (rst_n && reseed) dut_reseeds++;

endmodule
