// tq_pkg: types and constants shared by the TQ (time/charge) reconstruction
// pipeline.
//
// The front end delivers one 128-bit frame per 125 MHz clock: eight 16-bit
// samples of a 1 GS/s, 14-bit flash ADC.  Sample 0 sits in bits [15:0] and is
// the earliest in time (this ordering is a choice of this design).  All
// pipeline stages keep 16-bit samples; the FIR taps are 16-bit signed
// integers whose scale is removed by a right shift after each filter.
//
// The paper fixes: 8 samples per frame, 16 bits per sample, 14-bit ADC (carried in 16-bit words),
// 11-tap Type I (symmetric) Wiener FIR, 7-tap Type III (antisymmetric)
// deconvolution FIR, baseline delta of 3 ADC counts, baseline re-seed every
// 1000 samples, 128-bit TQ packets.  The default tap values, shifts and the
// packet layout are this design's own: the paper prints no tap values and
// no packet format, and the taps are meant to be reloaded at start-up.
package tq_pkg;

  localparam int NS        = 8;    // samples per frame
  localparam int SAMPLE_W  = 16;   // bits per sample word
  localparam int FRAME_W   = NS * SAMPLE_W;  // 128-bit ADC_raw_data
  localparam int COEF_W    = 16;   // FIR tap width
  localparam int TIME_W    = 48;   // coarse time counter width
  localparam int PACKET_W  = 128;  // TQ packet width

  localparam int WIENER_TAPS = 11;
  localparam int DECONV_TAPS = 7;

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic        [SAMPLE_W-1:0] raw_t;
  typedef logic signed [COEF_W-1:0]   coef_t;

  // Default taps.  Wiener: symmetric, sum 128, used with a shift of 7 so the
  // DC gain is one.  Deconvolution: antisymmetric with a zero centre tap, a
  // differentiator that is positive on a rising edge, used with a shift of 2.
  localparam coef_t WIENER_DEFAULT [WIENER_TAPS] =
    '{16'sd0, 16'sd2, 16'sd8, 16'sd17, 16'sd24, 16'sd26,
      16'sd24, 16'sd17, 16'sd8, 16'sd2, 16'sd0};
  localparam int    WIENER_SHIFT = 7;
  localparam coef_t DECONV_DEFAULT [DECONV_TAPS] =
    '{16'sd4, 16'sd2, 16'sd1, 16'sd0, -16'sd1, -16'sd2, -16'sd4};
  localparam int    DECONV_SHIFT = 2;

  // Delay of each filter in samples at its centre tap: (N-1)/2.
  localparam int GROUP_DELAY = (WIENER_TAPS - 1) / 2 + (DECONV_TAPS - 1) / 2;

  // Pipeline latencies in clocks (one frame per clock).
  localparam int CHECK_LATENCY  = 1;   // over_check
  localparam int FILTER_LATENCY = 4;   // filter_wrapper (2 per FIR)
  localparam int PEAK_LATENCY   = 4;   // peak_finder (look-ahead frame + 3 stages)
  // Clocks from a raw frame at the input to the peak-finder result for it.
  localparam int TOTAL_LATENCY  = CHECK_LATENCY + FILTER_LATENCY + PEAK_LATENCY;

  // Coefficient reload target.
  typedef enum logic {SEL_WIENER = 1'b0, SEL_DECONV = 1'b1} fir_sel_e;

  // One TQ packet.  Field order from MSB to LSB.
  typedef struct packed {
    logic [7:0]          channel;     // input channel identifier
    logic [7:0]          flags;       // [0] another peak in the same frame was dropped
    logic [TIME_W-1:0]   hit_time;    // absolute hit time in samples (ns)
    logic [SAMPLE_W-1:0] charge;      // deconvolved peak value
    logic [SAMPLE_W-1:0] baseline;    // baseline at the time of the hit
    logic [15:0]         seq;         // running packet number
    logic [15:0]         reserved;    // always zero, pads the packet to 128 bits
  } tq_packet_t;

  // Saturate a wide signed value to a 16-bit sample.
  function automatic sample_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return sample_t'(v);
  endfunction

endpackage
