// over_check: over-threshold check, trigger primitive and baseline subtraction.
//
// PMT pulses are negative-going, so a sample is "over threshold" when it lies
// below baseline - thrd_value_rel.  For every frame the block produces
//   * overthrd: one bit per sample (8-bit mask);
//   * trigger:  any bit of the mask set (the trigger primitive);
//   * hit/stop: a two-state FSM (IDLE, CHARGE) pulses hit on the first frame
//     with a sample over threshold and stop on the first frame after it with
//     none; between them the pipeline is in a trigger region;
//   * adc_check: baseline - sample for each sample, i.e. baseline removed and
//     polarity inverted so pulses are positive, saturated to 16 bits.
// The paper gives the threshold form, the mask, the subtraction with
// inversion and the idle/charge behaviour.  A strict "<" comparison, the
// frame granularity of hit/stop and the saturation are this design's own.
// Nothing is flagged until the baseline is valid.
//
// Timing: all outputs are registered, one clock after the input frame.
module over_check
  import tq_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [FRAME_W-1:0]  adc_raw_data,
  input  logic [SAMPLE_W-1:0] baseline,
  input  logic                baseline_valid,
  input  logic [SAMPLE_W-1:0] thrd_value_rel,
  output logic                out_valid,
  output sample_t             adc_check [NS],
  output logic [NS-1:0]       overthrd,
  output logic                trigger,
  output logic                hit,
  output logic                stop
);

  typedef enum logic {IDLE, CHARGE} state_e;
  state_e state;

  logic signed [SAMPLE_W+1:0] thr;
  logic [NS-1:0]              over_c;
  sample_t                    sub_c [NS];

  always_comb begin
    thr = $signed({2'b00, baseline}) - $signed({2'b00, thrd_value_rel});
    for (int i = 0; i < NS; i++) begin
      logic signed [SAMPLE_W+1:0] s;
      s = $signed({2'b00, adc_raw_data[i*SAMPLE_W +: SAMPLE_W]});
      over_c[i] = baseline_valid && (s < thr);
      sub_c[i]  = sat16(48'($signed({2'b00, baseline}) - s));
    end
  end

  wire any_over = |over_c;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= IDLE;
      out_valid <= 1'b0;
      overthrd  <= '0;
      trigger   <= 1'b0;
      hit       <= 1'b0;
      stop      <= 1'b0;
      for (int i = 0; i < NS; i++) adc_check[i] <= '0;
    end else begin
      out_valid <= in_valid;
      hit       <= 1'b0;
      stop      <= 1'b0;
      if (in_valid) begin
        overthrd <= over_c;
        trigger  <= any_over;
        for (int i = 0; i < NS; i++) adc_check[i] <= sub_c[i];
        unique case (state)
          IDLE:   if (any_over)  begin state <= CHARGE; hit  <= 1'b1; end
          CHARGE: if (!any_over) begin state <= IDLE;   stop <= 1'b1; end
        endcase
      end else begin
        trigger <= 1'b0;
      end
    end
  end

  a_hit_stop_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(hit && stop));

endmodule
