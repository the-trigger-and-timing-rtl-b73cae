// trigger_word -- CAM part (bits 0..27) of the 32-bit trigger word.
//
// The outputs of CAM 0..27 pass through a shift register of STAGES-1
// further 16 ns stages, so the current and the three previous cycles are
// available. Each stage k has its own mask (TWmask k+1, 1 = bit kept); the
// masked stages are ORed bit by bit, so a bit of the trigger word is set
// if its CAM was active in any enabled one of the last four cycles (64 ns).
// The result is registered, one cycle after the CAM outputs, which puts
// it in step with the trigger 1 decision of high_level_logic. The special
// trigger bits 28..31 are added by the master board.
module trigger_word #(
  parameter int unsigned N      = 28,
  parameter int unsigned STAGES = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N-1:0]             cam,
  input  logic [STAGES-1:0][N-1:0] mask,
  output logic [N-1:0]             tw_bits
);
  logic [STAGES-1:0][N-1:0] hist;   // hist[0] = cam now, hist[k] = k cycles ago
  logic [STAGES-1:1][N-1:0] hist_q;
  logic [N-1:0]             tw_d;

  always_comb begin
    hist[0] = cam;
    for (int k = 1; k < STAGES; k++) hist[k] = hist_q[k];
    tw_d = '0;
    for (int k = 0; k < STAGES; k++) tw_d |= hist[k] & mask[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist_q <= '0; tw_bits <= '0;
    end else begin
      for (int k = 1; k < STAGES; k++) hist_q[k] <= hist[k-1];
      tw_bits <= tw_d;
    end
  end
endmodule
