// filter_wrapper: the real-time Wiener deconvolution filter chain.
//
// Baseline-subtracted samples pass through two parallel FIR filters in
// series: the 11-tap symmetric (Type I) Wiener filter, which smooths away
// noise, and the 7-tap antisymmetric (Type III) deconvolution filter, a
// differentiator that turns each photoelectron pulse into a narrow spike
// whose height measures its charge.  Each filter ends in a shift and a
// saturation back to 16-bit samples (the bit resizing between stages).  The
// taps of both filters live in fir_config_ctrl and can be reloaded through
// its FIFO while the chain keeps running.
// The chain, the tap counts and filter types and the reload FSM follow the
// paper; the shifts (WIENER_SHIFT, DECONV_SHIFT) and default taps are this
// design's own.
//
// Timing: FILTER_LATENCY = 4 clocks (tq_pkg) from adc_check to adc_filt; one frame per clock.
// The filters add GROUP_DELAY = 8 samples of signal delay on top.
module filter_wrapper
  import tq_pkg::*;
#(
  parameter int W_SHIFT         = WIENER_SHIFT,
  parameter int D_SHIFT         = DECONV_SHIFT,
  parameter int CFG_FIFO_DEPTH  = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  sample_t  adc_check [NS],
  output logic     out_valid,
  output sample_t  adc_filt  [NS],
  // coefficient reload (slow control side)
  input  logic     cfg_wr_en,
  input  coef_t    cfg_wr_data,
  output logic     cfg_full,
  input  logic     cfg_start,
  input  fir_sel_e cfg_sel,
  output logic     cfg_busy,
  output logic     cfg_reload_done,
  output logic     cfg_error
);

  coef_t   wiener_coef [WIENER_TAPS];
  coef_t   deconv_coef [DECONV_TAPS];
  logic    w_valid;
  sample_t adc_wiener [NS];

  fir_config_ctrl #(.FIFO_DEPTH(CFG_FIFO_DEPTH)) u_cfg (
    .clk, .rst_n,
    .cfg_wr_en, .cfg_wr_data, .cfg_full, .cfg_start, .cfg_sel,
    .wiener_coef, .deconv_coef,
    .busy(cfg_busy), .reload_done(cfg_reload_done), .cfg_error
  );

  fir_parallel #(.NTAPS(WIENER_TAPS), .SHIFT(W_SHIFT)) wiener_filter (
    .clk, .rst_n, .in_valid, .din(adc_check), .coef(wiener_coef),
    .out_valid(w_valid), .dout(adc_wiener)
  );

  fir_parallel #(.NTAPS(DECONV_TAPS), .SHIFT(D_SHIFT)) deconv_filter (
    .clk, .rst_n, .in_valid(w_valid), .din(adc_wiener), .coef(deconv_coef),
    .out_valid, .dout(adc_filt)
  );

endmodule
