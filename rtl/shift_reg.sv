// shift_reg: fixed-length delay line used as the pipeline's sync logic.
//
// The hit/stop flags and the baseline leave the front stages several clocks
// before the filtered samples they belong to reach the peak finder and the
// output packer.  Instances of this register chain (sr_hit, sr_stop,
// sr_baseline in the top level) delay them by DEPTH clocks so that they meet
// their samples again.  DEPTH = 0 is a plain wire.  The register contents are
// cleared by reset.
//
// Timing: dout(t) = din(t - DEPTH).
module shift_reg #(
  parameter int W     = 1,
  parameter int DEPTH = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  if (DEPTH == 0) begin : g_wire
    assign dout = din;
  end else begin : g_chain
    logic [W-1:0] sr [DEPTH];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) sr[i] <= '0;
      end else begin
        sr[0] <= din;
        for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
      end
    end
    assign dout = sr[DEPTH-1];
  end

endmodule
