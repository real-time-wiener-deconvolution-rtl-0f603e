// tb_shift_reg: checks that the delay line returns every input exactly DEPTH
// clocks later, for a 1-bit and a 16-bit instance, against a queue model.
module tb_shift_reg;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] d16, q16;
  logic        d1, q1;
  logic [15:0] hist16 [$];
  logic        hist1  [$];

  shift_reg #(.W(16), .DEPTH(5)) dut16 (.clk, .rst_n, .din(d16), .dout(q16));
  shift_reg #(.W(1),  .DEPTH(3)) dut1  (.clk, .rst_n, .din(d1),  .dout(q1));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d16 = 0; d1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // after reset the chains hold zeros
    for (int i = 0; i < 5; i++) hist16.push_back(16'h0);
    for (int i = 0; i < 3; i++) hist1.push_back(1'b0);
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      checks++;
      if (q16 !== hist16[0] || q1 !== hist1[0]) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d: q16=%h exp=%h q1=%b exp=%b", n, q16, hist16[0], q1, hist1[0]);
      end
      d16 = 16'($urandom);
      d1  = 1'($urandom);
      @(posedge clk);
      void'(hist16.pop_front()); hist16.push_back(d16);
      void'(hist1.pop_front());  hist1.push_back(d1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
