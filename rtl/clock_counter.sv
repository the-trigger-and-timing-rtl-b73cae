// clock_counter -- run-time clock counter and OV sync signal.
//
// Counts 16 ns system clock cycles while data taking runs (run = inhibit
// released) and is held at 0 otherwise. It wraps to 0 after 2^W-1; the
// wrap gives the one-cycle ov_sync pulse, which with W=32 comes every
// 2^32 x 16 ns = 68.72 s, the period of the sync signal sent to the outer
// veto, which keeps its own clock. Holding the counter at 0 during the
// inhibit is this design's choice. ov_sync is registered and comes with
// the counter's return to 0.
module clock_counter #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         run,
  output logic [W-1:0] count,
  output logic         ov_sync
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; ov_sync <= 1'b0;
    end else if (!run) begin
      count <= '0; ov_sync <= 1'b0;
    end else begin
      count   <= count + 1'b1;
      ov_sync <= (count == '1);
    end
  end
endmodule
