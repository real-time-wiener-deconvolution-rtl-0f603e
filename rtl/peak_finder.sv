// peak_finder: locates photoelectron spikes in the deconvolved stream.
//
// A search runs only inside a trigger region: it opens on hit and closes
// after the frame flagged by stop (both already delayed to line up with the
// filtered samples), and one frame before the hit frame is searched as well,
// because the deconvolution spike sits on the rising edge of the pulse and
// can precede the first over-threshold sample.  Inside the region a sample
// x[j] is a peak when the win samples before it strictly increase towards it
// and the win samples after it strictly decrease, i.e. it is the maximum of
// the programmable interval [j-win, j+win] with a single-hump shape.
//
// Pipeline (names follow the paper's peak_find1..3 and identify steps):
//   frame buffer - the previous two frames are kept, so the frame under test
//                  has a full frame of context on each side (win <= 8);
//   peak_find1   - rise/fall flags between neighbouring samples;
//   peak_find2   - identify: AND of the flags over the interval, per lane;
//   peak_find3   - if several lanes qualify the largest is reported (lowest
//                  lane on a tie) and multi flags that others were dropped.
// Outputs: charge = the spike height, hit_time = its lane 0..7 in the frame.
// The shape test and the charge/time outputs follow the paper; the one-frame
// pre-search, one report per frame and the 1..8 interval range are this
// design's choices.
//
// Timing: PEAK_LATENCY = 4 clocks from a frame at din to its result, for a
// continuous stream.
module peak_finder
  import tq_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  sample_t       din [NS],
  input  logic          hit,          // aligned with din
  input  logic          stop,         // aligned with din
  input  logic [3:0]    win,          // half-width of the interval, 1..8
  output logic          peak_valid,
  output sample_t       charge,
  output logic [2:0]    hit_time,
  output logic          multi,
  output logic          searching
);

  localparam int WL = 3 * NS;   // p2 | p1 | din

  sample_t      p1 [NS], p2 [NS];
  logic         region_p1;        // p1 lies in a trigger region
  sample_t      w [WL];
  logic         gate_p1;

  // peak_find1 registers
  logic [WL-1:0] rise1, fall1;
  sample_t       val1 [NS];
  logic          g1, v1;
  // peak_find2 registers
  logic [NS-1:0] mask2;
  sample_t       val2 [NS];
  logic          v2;

  logic [3:0] win_c;
  assign win_c = (win == 0) ? 4'd1 : (win > 4'd8) ? 4'd8 : win;

  always_comb begin
    for (int i = 0; i < NS; i++) begin
      w[i]        = p2[i];
      w[NS + i]   = p1[i];
      w[2*NS + i] = din[i];
    end
  end

  // p1 is searched if it was in the region or the next frame (din) is a hit.
  assign gate_p1 = region_p1 || (in_valid && hit);

  // Region tracking: 'searching' is high from the hit frame up to and
  // including the stop frame.
  wire region_cur = hit || searching;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      searching <= 1'b0;
      region_p1 <= 1'b0;
      for (int i = 0; i < NS; i++) begin p1[i] <= '0; p2[i] <= '0; end
    end else if (in_valid) begin
      if (hit)       searching <= 1'b1;
      else if (stop) searching <= 1'b0;
      region_p1 <= region_cur;
      p2 <= p1;
      p1 <= din;
    end
  end

  // peak_find1: neighbour comparisons over the 24-sample window.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rise1 <= '0; fall1 <= '0; g1 <= 1'b0; v1 <= 1'b0;
      for (int i = 0; i < NS; i++) val1[i] <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        rise1[0] <= 1'b0;
        fall1[0] <= 1'b0;
        for (int j = 1; j < WL; j++) begin
          rise1[j] <= w[j] > w[j-1];
          fall1[j] <= w[j] < w[j-1];
        end
        for (int i = 0; i < NS; i++) val1[i] <= p1[i];
        g1 <= gate_p1;
      end
    end
  end

  // peak_find2 / identify: strict rise over win samples before, strict fall
  // over win samples after, for each lane of the middle frame.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mask2 <= '0; v2 <= 1'b0;
      for (int i = 0; i < NS; i++) val2[i] <= '0;
    end else begin
      v2 <= v1;
      for (int i = 0; i < NS; i++) begin
        logic ok;
        ok = g1 && v1;
        for (int k = 1; k <= NS; k++) begin
          if (k <= int'(win_c)) begin
            ok = ok && rise1[NS + i - k + 1] && fall1[NS + i + k];
          end
        end
        mask2[i] <= ok;
        val2[i]  <= val1[i];
      end
    end
  end

  // peak_find3: choose one peak per frame.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      peak_valid <= 1'b0; charge <= '0; hit_time <= '0; multi <= 1'b0;
    end else begin
      logic    found;
      sample_t best;
      logic [2:0] best_i;
      found  = 1'b0;
      best   = '0;
      best_i = '0;
      for (int i = 0; i < NS; i++) begin
        if (mask2[i] && (!found || val2[i] > best)) begin
          found  = 1'b1;
          best   = val2[i];
          best_i = 3'(i);
        end
      end
      peak_valid <= v2 && found;
      charge     <= best;
      hit_time   <= best_i;
      multi      <= v2 && ($countones(mask2) > 1);
    end
  end

endmodule
