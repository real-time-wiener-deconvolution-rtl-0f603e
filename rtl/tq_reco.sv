// tq_reco: real-time Wiener deconvolution (RTWD) time/charge reconstruction
// for one flash-ADC channel.
//
// The channel delivers eight 16-bit samples per clock (1 GS/s at 125 MHz).
// baseline_finder tracks the baseline; over_check subtracts it, inverts the
// polarity and raises hit/stop around each over-threshold region (and the
// trigger primitive); filter_wrapper runs the Wiener and deconvolution FIR
// filters; peak_finder looks for spikes in the deconvolved stream inside
// each region; the output logic packs every spike into a 128-bit TQ packet
// and writes it to the output FIFO, which the readout drains through
// tq_rd_en / tq_fifo_out.  Shift registers (sr_hit, sr_stop, sr_baseline)
// delay the control flags and the baseline so they meet the filtered
// samples.  This is the structure of the paper's TQ_reco entity; the FIFO
// depth, the register interface and all timing details are this design's.
//
// Run-time settings (slow control): baseline_d, thrd_value_rel, peak_win,
// and the tap reload port cfg_*.  time_cnt is the board's coarse clock
// counter; it must advance by one per clock.
//
// Timing: a hit's packet can be read from the output FIFO TOTAL_LATENCY + 2
// = 11 clocks after the raw frame holding its spike entered the input (9 in
// the pipeline, 1 in the packer, 1 for the FIFO write).  The stream is
// expected to be continuous: the latency-based alignment of flags, baseline
// and time stamps assumes adc_valid high on every clock.
module tq_reco
  import tq_pkg::*;
#(
  parameter int RESET_SAMPLES  = 1000,
  parameter int OUT_FIFO_DEPTH = 512,
  parameter int CFG_FIFO_DEPTH = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  // FADC data, eight samples per clock, sample 0 in bits [15:0]
  input  logic                adc_valid,
  input  logic [FRAME_W-1:0]  adc_raw_data,
  input  logic [TIME_W-1:0]   time_cnt,
  // settings
  input  logic [7:0]          channel_id,
  input  logic [SAMPLE_W-1:0] baseline_d,
  input  logic [SAMPLE_W-1:0] thrd_value_rel,
  input  logic [3:0]          peak_win,
  // tap reload
  input  logic                cfg_wr_en,
  input  coef_t               cfg_wr_data,
  output logic                cfg_full,
  input  logic                cfg_start,
  input  fir_sel_e            cfg_sel,
  output logic                cfg_busy,
  output logic                cfg_reload_done,
  output logic                cfg_error,
  // trigger primitive to the trigger system
  output logic                trigger,
  output logic [NS-1:0]       overthrd,
  // TQ output FIFO, read side
  input  logic                tq_rd_en,
  output tq_packet_t          tq_fifo_out,
  output logic                tq_empty,
  // status
  output logic [SAMPLE_W-1:0] baseline,
  output logic                baseline_valid,
  output logic [31:0]         tq_overflow,
  output logic [31:0]         tq_packets,
  output logic [$clog2(OUT_FIFO_DEPTH):0] tq_count,
  output logic                baseline_reseed,
  output logic                in_region
);

  localparam int HIT_DELAY = FILTER_LATENCY + GROUP_DELAY / NS;

  // baseline_finder
  baseline_finder #(.RESET_SAMPLES(RESET_SAMPLES)) u_baseline_finder (
    .clk, .rst_n, .in_valid(adc_valid), .adc_raw_data, .baseline_d,
    .baseline, .baseline_valid, .reseed(baseline_reseed)
  );

  // over_check
  logic          chk_valid, hit, stop;
  sample_t       adc_check [NS];
  over_check u_over_check (
    .clk, .rst_n, .in_valid(adc_valid), .adc_raw_data, .baseline, .baseline_valid,
    .thrd_value_rel, .out_valid(chk_valid), .adc_check, .overthrd, .trigger,
    .hit, .stop
  );

  // filter_wrapper
  logic    filt_valid;
  sample_t adc_filt   [NS];
  filter_wrapper #(.CFG_FIFO_DEPTH(CFG_FIFO_DEPTH)) u_filter_wrapper (
    .clk, .rst_n, .in_valid(chk_valid), .adc_check, .out_valid(filt_valid),
    .adc_filt,
    .cfg_wr_en, .cfg_wr_data, .cfg_full, .cfg_start, .cfg_sel,
    .cfg_busy, .cfg_reload_done, .cfg_error
  );

  // sync logic
  logic hit_reg, stop_reg;
  logic [SAMPLE_W-1:0] baseline_reg;
  shift_reg #(.W(1), .DEPTH(HIT_DELAY)) sr_hit (
    .clk, .rst_n, .din(hit), .dout(hit_reg));
  shift_reg #(.W(1), .DEPTH(HIT_DELAY)) sr_stop (
    .clk, .rst_n, .din(stop), .dout(stop_reg));
  shift_reg #(.W(SAMPLE_W), .DEPTH(TOTAL_LATENCY)) sr_baseline (
    .clk, .rst_n, .din(baseline), .dout(baseline_reg));

  // peak_finder
  logic       peak_valid, multi;
  sample_t    charge;
  logic [2:0] hit_time;
  peak_finder u_peak (
    .clk, .rst_n, .in_valid(filt_valid), .din(adc_filt), .hit(hit_reg),
    .stop(stop_reg), .win(peak_win), .peak_valid, .charge, .hit_time, .multi,
    .searching(in_region)
  );

  // output logic
  logic       fifo_wr, fifo_full;
  tq_packet_t packet;
  tq_packer #(.PIPE_DELAY(TOTAL_LATENCY)) u_output_logic (
    .clk, .rst_n, .channel_id, .time_cnt, .peak_valid, .charge, .hit_time,
    .multi, .baseline_reg, .fifo_full, .fifo_wr, .packet,
    .overflow(tq_overflow), .n_packets(tq_packets)
  );

  sync_fifo #(.W(PACKET_W), .DEPTH(OUT_FIFO_DEPTH)) u_tq_fifo (
    .clk, .rst_n, .wr_en(fifo_wr), .wr_data(packet), .rd_en(tq_rd_en),
    .rd_data(tq_fifo_out), .full(fifo_full), .empty(tq_empty), .count(tq_count)
  );

endmodule
