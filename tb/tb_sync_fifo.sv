// tb_sync_fifo: random writes and reads against a queue model; also fills the
// FIFO to check full, that a write when full is dropped, and empty.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DEPTH = 8;
  logic        wr_en = 0, rd_en = 0, full, empty;
  logic [31:0] wr_data = 0, rd_data;
  logic [3:0]  count;
  logic [31:0] model [$];

  sync_fifo #(.W(32), .DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_en, .wr_data, .rd_en,
                                          .rd_data, .full, .empty, .count);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full && count == 0, "empty after reset");
    // random traffic
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      check(count == 4'(model.size()), "count");
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == DEPTH), "full flag");
      if (model.size() > 0) check(rd_data == model[0], "read data");
      wr_en   = ($urandom % 2) && !full;
      rd_en   = ($urandom % 2) && !empty;
      wr_data = $urandom;
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    // drain, then fill until full
    @(negedge clk); wr_en = 0; rd_en = 0;
    while (!empty) begin
      @(negedge clk); rd_en = 1; @(posedge clk); void'(model.pop_front());
    end
    @(negedge clk); rd_en = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); wr_en = 1; wr_data = 32'h100 + i; @(posedge clk); model.push_back(wr_data);
    end
    @(negedge clk); wr_en = 0;
    check(full && count == 4'(DEPTH), "full after DEPTH writes");
    for (int i = 0; i < DEPTH; i++) begin
      check(rd_data == 32'h100 + i, "in-order read after fill");
      @(negedge clk); rd_en = 1; @(posedge clk); @(negedge clk); rd_en = 0;
    end
    check(empty, "empty after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
