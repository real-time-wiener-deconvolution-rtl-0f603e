// fir_config_ctrl: run-time reload of the FIR taps.
//
// Slow control writes tap words into fir_config_fifo (cfg_wr_en/cfg_wr_data)
// and then pulses cfg_start with cfg_sel naming the filter.  A three-state
// FSM does the reload:
//   IDLE   - waits for cfg_start; if the FIFO holds at least as many words as
//            the chosen filter has taps it goes to LOAD, otherwise it raises
//            the sticky cfg_error and stays idle;
//   LOAD   - pops one word per clock into a shadow tap set, tap 0 first;
//   CONFIG - copies the whole shadow set into the live tap registers in one
//            clock, pulses reload_done and returns to IDLE.
// The filters keep running on the old taps until the CONFIG clock, so the
// data path is never halted and never sees a half-written tap set.  The
// paper names the FIFO and the idle/load/config states; the word order, the
// single-clock swap and the error flag are this design's choices.  After
// reset the live taps hold the defaults of tq_pkg.
//
// Timing: a reload of N taps takes 1 + N + 1 clocks from cfg_start.
module fir_config_ctrl
  import tq_pkg::*;
#(
  parameter int FIFO_DEPTH = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cfg_wr_en,
  input  coef_t    cfg_wr_data,
  output logic     cfg_full,
  input  logic     cfg_start,
  input  fir_sel_e cfg_sel,
  output coef_t    wiener_coef [WIENER_TAPS],
  output coef_t    deconv_coef [DECONV_TAPS],
  output logic     busy,
  output logic     reload_done,
  output logic     cfg_error
);

  localparam int MAXT = (WIENER_TAPS > DECONV_TAPS) ? WIENER_TAPS : DECONV_TAPS;
  localparam int TW   = $clog2(MAXT + 1);
  localparam int CNTW = $clog2(FIFO_DEPTH) + 1;

  typedef enum logic [1:0] {IDLE, LOAD, CONFIG} state_e;
  state_e   state;
  fir_sel_e sel;
  logic [TW-1:0] idx, ntaps;
  coef_t    shadow [MAXT];

  coef_t           fifo_dout;
  logic            fifo_empty, fifo_rd;
  logic [CNTW-1:0] fifo_count;

  sync_fifo #(.W(COEF_W), .DEPTH(FIFO_DEPTH)) fir_config_fifo (
    .clk, .rst_n,
    .wr_en(cfg_wr_en), .wr_data(cfg_wr_data),
    .rd_en(fifo_rd),   .rd_data(fifo_dout),
    .full(cfg_full),   .empty(fifo_empty), .count(fifo_count)
  );

  wire [TW-1:0] start_taps = (cfg_sel == SEL_WIENER) ? TW'(WIENER_TAPS) : TW'(DECONV_TAPS);

  assign fifo_rd = (state == LOAD);
  assign busy    = (state != IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= IDLE;
      sel         <= SEL_WIENER;
      idx         <= '0;
      ntaps       <= '0;
      reload_done <= 1'b0;
      cfg_error   <= 1'b0;
      for (int k = 0; k < MAXT; k++)        shadow[k]      <= '0;
      for (int k = 0; k < WIENER_TAPS; k++) wiener_coef[k] <= WIENER_DEFAULT[k];
      for (int k = 0; k < DECONV_TAPS; k++) deconv_coef[k] <= DECONV_DEFAULT[k];
    end else begin
      reload_done <= 1'b0;
      unique case (state)
        IDLE: if (cfg_start) begin
          if (32'(fifo_count) >= 32'(start_taps)) begin
            state <= LOAD;
            sel   <= cfg_sel;
            ntaps <= start_taps;
            idx   <= '0;
          end else begin
            cfg_error <= 1'b1;
          end
        end
        LOAD: begin
          shadow[idx] <= fifo_dout;
          idx         <= idx + 1'b1;
          if (idx == ntaps - 1'b1) state <= CONFIG;
        end
        CONFIG: begin
          if (sel == SEL_WIENER)
            for (int k = 0; k < WIENER_TAPS; k++) wiener_coef[k] <= shadow[k];
          else
            for (int k = 0; k < DECONV_TAPS; k++) deconv_coef[k] <= shadow[k];
          reload_done <= 1'b1;
          state       <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_load_not_empty: assert property (@(posedge clk) disable iff (!rst_n) state == LOAD |-> !fifo_empty);

endmodule
