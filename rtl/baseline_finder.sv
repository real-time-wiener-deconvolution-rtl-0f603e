// baseline_finder: tracks the FADC baseline while ignoring photoelectron pulses.
//
// Each 128-bit frame carries eight samples.  Their mean <a> (sum >> 3) is
// compared with the current baseline b:
//   * first frame after reset, or every RESET_SAMPLES samples: b <= <a>
//     (re-seed, so a bad start or a stuck value cannot last);
//   * |<a> - b| <= delta_b:  b <= (b + <a>) >> 1  (follow slow drift);
//   * otherwise the frame holds a pulse and b is kept.
// This follows the paper's description (8-sample mean, +-delta_b window of 3
// ADC counts, mean of old baseline and frame mean, re-seed every 1000
// samples).  Floor rounding of both means, an inclusive window and the
// re-seed counter starting at the first frame are this design's choices.
//
// Timing: baseline/valid are registered; the value seen in clock t includes
// all frames up to t-1.  in_valid marks a frame; without it nothing changes.
module baseline_finder
  import tq_pkg::*;
#(
  parameter int RESET_SAMPLES = 1000
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [FRAME_W-1:0]  adc_raw_data,
  input  logic [SAMPLE_W-1:0] baseline_d,     // delta window, ADC counts
  output logic [SAMPLE_W-1:0] baseline,
  output logic                baseline_valid,
  output logic                reseed          // pulses on each re-seed (status)
);

  localparam int FRAMES_PER_RESET = RESET_SAMPLES / NS;   // 125 at default
  localparam int CW = $clog2(FRAMES_PER_RESET + 1);

  logic [SAMPLE_W+2:0] sum;
  logic [SAMPLE_W-1:0] avg;
  logic [CW-1:0]       frame_cnt;
  logic                in_window;

  always_comb begin
    sum = '0;
    for (int i = 0; i < NS; i++) sum += (SAMPLE_W+3)'(adc_raw_data[i*SAMPLE_W +: SAMPLE_W]);
    avg = sum[SAMPLE_W+2:3];
    in_window = ({1'b0, avg} + {1'b0, baseline_d} >= {1'b0, baseline}) &&
             ({1'b0, avg} <= {1'b0, baseline} + {1'b0, baseline_d});
  end

  wire seed = !baseline_valid || (frame_cnt == CW'(FRAMES_PER_RESET - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      baseline       <= '0;
      baseline_valid <= 1'b0;
      frame_cnt      <= '0;
      reseed         <= 1'b0;
    end else begin
      reseed <= 1'b0;
      if (in_valid) begin
        frame_cnt <= seed ? '0 : frame_cnt + 1'b1;
        if (seed) begin
          baseline       <= avg;
          baseline_valid <= 1'b1;
          reseed         <= baseline_valid;
        end else if (in_window) begin
          baseline <= SAMPLE_W'(({1'b0, baseline} + {1'b0, avg}) >> 1);
        end
      end
    end
  end

endmodule
