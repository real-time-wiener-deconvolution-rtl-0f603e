// sync_fifo: single-clock first-in first-out buffer.
//
// Used twice: as the coefficient FIFO that slow control fills before a filter
// reload (fir_config_fifo) and as the output FIFO that holds 128-bit TQ
// packets until the readout reads them.  Storage is a plain array (block RAM
// on an FPGA).  A write when full and a read when empty are ignored; the
// caller is expected to look at full/empty first, and assertions flag the
// misuse in simulation.
//
// Interface: wr_en/wr_data write on the clock edge; rd_data always shows the
// oldest word (first-word fall-through) and rd_en removes it.  count is the
// number of words held.  Depth must be a power of two.
module sync_fifo #(
  parameter int W     = 128,
  parameter int DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  output logic [W-1:0]             rd_data,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, rptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  assign count   = wptr - rptr;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rptr[AW-1:0]];

  initial assert (DEPTH == (1 << AW)) else $error("sync_fifo: DEPTH must be a power of two");

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !rd_en))
    else $warning("sync_fifo: write while full dropped");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $warning("sync_fifo: read while empty ignored");

endmodule
