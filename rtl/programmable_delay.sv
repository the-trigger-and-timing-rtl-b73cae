// programmable_delay -- W-bit delay line with a software-selected tap.
//
// A chain of DEPTH registers clocked by the 16 ns system clock; sel picks
// how many of them the signal passes, so the delay is sel x 16 ns
// (0 = straight through, combinational). sel beyond DEPTH is clipped to
// DEPTH. Used for the Trigger Board output and NIM delays, the input status
// delay line whose tap selects what goes into the FIFO, the external input
// delays and the trigger 1 delay (DEPTH 17 = 272 ns) of the master board.
// Lint note: when DEPTH+1 is a power of two, sel cannot exceed DEPTH and
// the clipping compare is constant; it is kept for the other depths.
module programmable_delay #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 17,
  localparam int unsigned SW   = $clog2(DEPTH+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [W-1:0]  din,
  input  logic [SW-1:0] sel,
  output logic [W-1:0]  dout
);
  logic [DEPTH:0][W-1:0] taps;   // taps[k] = din delayed by k cycles

  assign taps[0] = din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) taps[DEPTH:1] <= '0;
    else        taps[DEPTH:1] <= taps[DEPTH-1:0];
  end

  always_comb begin
    if (int'(sel) > DEPTH) dout = taps[DEPTH];
    else                   dout = taps[sel];
  end
endmodule
