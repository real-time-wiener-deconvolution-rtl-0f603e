// tq_packer: output logic that turns a found peak into a 128-bit TQ packet.
//
// For each peak the absolute hit time is computed as
//     start_time_int = NS * (time_cnt - PIPE_DELAY) + hit_time - GROUP_DELAY
// in 1 ns sample units: time_cnt counts clocks (frames) and labels the raw
// frame entering the pipeline, PIPE_DELAY removes the clocks the frame spent
// in the pipeline, hit_time is the lane inside the frame and GROUP_DELAY
// removes the signal delay of the two FIR filters.  The packet (tq_packet_t
// in tq_pkg) carries channel, flags, time, charge, the baseline of that
// moment and a running sequence number.  The paper gives the time formula's
// ingredients and the packet's contents and width; the field layout and
// the sequence number are this design's own.
//
// If the output FIFO is full the packet is dropped and 'overflow' counts it.
// Flag bits 7..1 and the 16-bit reserved field are written as zero: they
// keep the packet at the 128 bits the paper gives and leave room for later
// use, so these 23 packet bits are constant by design.
//
// Timing: the packet is written one clock after peak_valid.
module tq_packer
  import tq_pkg::*;
#(
  parameter int PIPE_DELAY  = TOTAL_LATENCY,
  parameter int GROUP_DELAY_SAMPLES = GROUP_DELAY
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [7:0]          channel_id,
  input  logic [TIME_W-1:0]   time_cnt,
  input  logic                peak_valid,
  input  sample_t             charge,
  input  logic [2:0]          hit_time,
  input  logic                multi,
  input  logic [SAMPLE_W-1:0] baseline_reg,
  input  logic                fifo_full,
  output logic                fifo_wr,
  output tq_packet_t          packet,
  output logic [31:0]         overflow,
  output logic [31:0]         n_packets
);

  logic [15:0]        seq;
  logic [TIME_W-1:0]  start_time_int;

  assign start_time_int = ((time_cnt - TIME_W'(PIPE_DELAY)) << $clog2(NS))
                        + TIME_W'(hit_time) - TIME_W'(GROUP_DELAY_SAMPLES);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fifo_wr   <= 1'b0;
      packet    <= '0;
      seq       <= '0;
      overflow  <= '0;
      n_packets <= '0;
    end else begin
      fifo_wr <= 1'b0;
      if (peak_valid) begin
        if (fifo_full) begin
          overflow <= overflow + 1'b1;
        end else begin
          fifo_wr           <= 1'b1;
          packet.channel    <= channel_id;
          packet.flags      <= {7'd0, multi};
          packet.hit_time   <= start_time_int;
          packet.charge     <= charge;
          packet.baseline   <= baseline_reg;
          packet.seq        <= seq;
          packet.reserved   <= '0;
          seq               <= seq + 1'b1;
          n_packets         <= n_packets + 1'b1;
        end
      end
    end
  end

endmodule
