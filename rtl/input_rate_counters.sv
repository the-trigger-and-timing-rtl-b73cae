// input_rate_counters -- one W-bit Input Rate Counter (IRC) per
// discriminator, counting how often it switched since the last trigger
// acknowledge (TA).
//
// count_en is one cycle per discriminator pulse (the ISS rate enable
// qualified by the sync clock enable). clr is the accepted TA: the
// trigger board stores the live counts in its event record in that cycle
// and the counters restart (at 1 if a pulse is counted in the same cycle).
// Counters saturate at 2^W-1 instead of wrapping; this is a choice of this
// design. Latency: a count is visible the cycle after count_en.
module input_rate_counters #(
  parameter int unsigned N = 40,
  parameter int unsigned W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                hold,      // inhibit: counters held at 0
  input  logic [N-1:0]        count_en,
  input  logic                clr,
  output logic [N-1:0][W-1:0] counts
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) counts <= '0;
    else begin
      for (int i = 0; i < N; i++) begin
        if (hold)
          counts[i] <= '0;
        else if (clr)
          counts[i] <= W'(count_en[i]);
        else if (count_en[i] && counts[i] != '1)
          counts[i] <= counts[i] + 1'b1;
      end
    end
  end
endmodule
