// fir_parallel: FIR filter that handles eight samples per clock.
//
// The ADC delivers 1 GS/s as eight samples per 125 MHz clock, so every output
// sample needs its own set of NTAPS multipliers (a fully parallel filter,
// NS x NTAPS products per clock).  Output sample n is
//     y[n] = (sum_k coef[k] * x[n-k]) >>> SHIFT, saturated to 16 bits,
// where the shift and saturation are the "bit resizing" that keeps the
// stream at 16-bit samples.  The last NTAPS-1 input samples are kept from
// the previous frame so the filter is continuous across frame borders.
// In the design it is instantiated as the 11-tap Wiener filter and the
// 7-tap deconvolution filter.  The taps come in on a port, so they can be
// reloaded while the filter runs.  The paper builds these filters with a
// vendor FIR generator; this is a plain direct-form equivalent (no use of
// tap symmetry), with one register after the products and one after the sum.
//
// Timing: latency 2 clocks, one frame per clock; the history advances only
// on in_valid.
module fir_parallel
  import tq_pkg::*;
#(
  parameter int NTAPS = 11,
  parameter int SHIFT = 7
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t din  [NS],
  input  coef_t   coef [NTAPS],
  output logic    out_valid,
  output sample_t dout [NS]
);

  localparam int HIST  = NTAPS - 1;
  localparam int PW    = SAMPLE_W + COEF_W;            // product width
  localparam int AW    = PW + $clog2(NTAPS);           // accumulator width

  sample_t                hist [HIST > 0 ? HIST : 1];  // hist[HIST-1] is the newest
  sample_t                win  [HIST + NS];
  logic signed [PW-1:0]   prod [NS][NTAPS];
  logic                   v1;

  always_comb begin
    for (int j = 0; j < HIST; j++) win[j] = hist[j];
    for (int i = 0; i < NS; i++)   win[HIST + i] = din[i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < (HIST > 0 ? HIST : 1); j++) hist[j] <= '0;
      for (int i = 0; i < NS; i++)
        for (int k = 0; k < NTAPS; k++) prod[i][k] <= '0;
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        for (int j = 0; j < HIST; j++) hist[j] <= win[NS + j];
        for (int i = 0; i < NS; i++)
          for (int k = 0; k < NTAPS; k++)
            prod[i][k] <= PW'(win[i + HIST - k]) * PW'(coef[k]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < NS; i++) dout[i] <= '0;
    end else begin
      out_valid <= v1;
      for (int i = 0; i < NS; i++) begin
        logic signed [AW-1:0] acc;
        acc = '0;
        for (int k = 0; k < NTAPS; k++) acc += AW'(prod[i][k]);
        dout[i] <= sat16(48'(acc >>> SHIFT));
      end
    end
  end

endmodule
