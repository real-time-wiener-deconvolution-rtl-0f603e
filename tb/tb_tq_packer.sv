// tb_tq_packer: random peaks with a running time counter; checks every
// written packet field (channel, flags, hit time = 8*(time_cnt - 9) +
// hit_time - 8, charge, baseline, sequence number), the one-clock write
// latency, and that a peak arriving while the FIFO is full is counted as
// an overflow and not written.
module tb_tq_packer;
  import tq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [TIME_W-1:0] tcnt = '0;
  logic       pv = 0, multi = 0, full = 0, wr;
  sample_t    charge = '0;
  logic [2:0] ht = '0;
  logic [15:0] bl = '0;
  tq_packet_t pkt;
  logic [31:0] ovf, npk;

  tq_packer dut (.clk, .rst_n, .channel_id(8'h2c), .time_cnt(tcnt), .peak_valid(pv), .charge,
                 .hit_time(ht), .multi, .baseline_reg(bl), .fifo_full(full), .fifo_wr(wr),
                 .packet(pkt), .overflow(ovf), .n_packets(npk));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit   exp_wr;
    int   exp_ovf = 0, exp_seq = 0;
    longint exp_time;
    int   exp_q, exp_b; bit exp_m;
    repeat (3) @(posedge clk);
    rst_n = 1;
    tcnt = 48'h0000_1234_5600;
    exp_wr = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // check the result of the previous clock's input
      checks++;
      if (wr !== exp_wr) begin failures++; if (failures < 8) $display("n=%0d wr=%b exp %b", n, wr, exp_wr); end
      if (exp_wr) begin
        checks++;
        if (pkt.channel != 8'h2c || pkt.hit_time != TIME_W'(exp_time) || int'($signed(pkt.charge)) != exp_q ||
            int'(pkt.baseline) != exp_b || pkt.flags != {7'd0, exp_m} || int'(pkt.seq) != exp_seq - 1 ||
            pkt.reserved != 0) begin
          failures++;
          if (failures < 8) $display("n=%0d packet %p time exp %0h", n, pkt, exp_time);
        end
      end
      checks++;
      if (int'(ovf) != exp_ovf || int'(npk) != exp_seq) begin failures++; $display("counters %0d %0d", ovf, npk); end
      // new input
      tcnt   = tcnt + 1;
      pv     = ($urandom % 3 == 0);
      full   = (n > 1500) && ($urandom % 2 == 0);
      charge = sample_t'(int'($urandom_range(4000)) - 100);
      ht     = 3'($urandom);
      bl     = 16'(8000 + $urandom_range(20));
      multi  = ($urandom % 5 == 0);
      exp_wr = pv && !full;
      if (pv && full) exp_ovf++;
      if (exp_wr) begin
        exp_time = (longint'(tcnt) - 9) * 8 + longint'(ht) - 8;
        exp_q = int'(charge); exp_b = int'(bl); exp_m = multi;
        exp_seq++;
      end
    end
    checks++;
    if (exp_ovf < 10) begin failures++; $display("overflow not exercised"); end
    $display("packets=%0d overflows=%0d", exp_seq, exp_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
