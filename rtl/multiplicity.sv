// multiplicity -- M multiplicity conditions on N group sync signals.
//
// Condition m counts the sync signals selected by ch_mask[m] that are
// active and is true when that number is at least thr[m]. A threshold of
// 0 switches the condition off. On the Trigger Board one instance with M=1
// works on the A (low) discriminators and one with M=3 on the B (high)
// discriminators. The channel mask is this design's way of building
// conditions on a subset of groups, such as the inner veto topology bit
// ("at least 3 lateral groups", "at least 1 down group", "the bottom
// group"). Output registered: one 16 ns cycle after the sync signals.
module multiplicity #(
  parameter int unsigned N = 18,
  parameter int unsigned M = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        sync,
  input  logic [M-1:0][N-1:0] ch_mask,
  input  logic [M-1:0][4:0]   thr,
  output logic [M-1:0]        mult_out
);
  logic [M-1:0] hit;

  always_comb begin
    for (int m = 0; m < M; m++) begin
      int unsigned n_act;
      n_act = 0;
      for (int i = 0; i < N; i++) n_act += (sync[i] & ch_mask[m][i]) ? 1 : 0;
      hit[m] = (thr[m] != '0) && (n_act >= int'(thr[m]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mult_out <= '0;
    else        mult_out <= hit;
  end
endmodule
