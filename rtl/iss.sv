// iss -- Input Signal Synchronisation for N discriminator channels.
//
// A discriminator output is asynchronous to the system clock and may be
// shorter than a clock period. Each channel therefore has three stages:
//   latched : a flip-flop set asynchronously while the discriminator is
//             active and cleared on a sync clock edge at which the
//             discriminator has gone back inactive, so even a few-ns pulse
//             is held until the next sync edge (at least one sync period);
//   sync    : the latched signal sampled on the sync clock and stretched by
//             one more sync cycle, so every pulse gives a sync signal of at
//             least two sync periods (64 ns on the Trigger Board, where the
//             sync clock is 32 ns); this feeds the trigger logic and the
//             input status;
//   irc_en  : active for the first sync cycle of each sync pulse; the input
//             rate counters count it once per pulse.
// The sync clock is an enable (sync_ce) on the 16 ns system clock: the
// Trigger Board toggles it every cycle (32 ns), the Trigger Master Board
// holds it at 1 (16 ns). The latch/sync rule follows the original design;
// the one-cycle width of irc_en is this design's choice. A discriminator
// held active continuously keeps sync active and counts once.
// Circuit note: `latched` has the discriminator as asynchronous set; this is
// intended, it is what captures pulses shorter than a clock period.
// Lint note: rst_n clears `latched` synchronously (its asynchronous pin
// belongs to the discriminator) and resets the other stages
// asynchronously, so a linter reports it used both ways.
module iss #(
  parameter int unsigned N = 18
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sync_ce,
  input  logic [N-1:0] disc,
  output logic [N-1:0] latched,
  output logic [N-1:0] sync,
  output logic [N-1:0] irc_en
);
  logic [N-1:0] sync_a;   // latched sampled on the last sync edge

  for (genvar i = 0; i < N; i++) begin : g_ch
    logic lat_q, set_i;
    assign set_i = disc[i];
    always_ff @(posedge clk or posedge set_i) begin
      if (set_i)        lat_q <= 1'b1;
      else if (!rst_n || sync_ce) lat_q <= 1'b0;
    end
    assign latched[i] = lat_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_a <= '0;
      sync   <= '0;
      irc_en <= '0;
    end else if (sync_ce) begin
      sync_a <= latched;
      sync   <= latched | sync_a;
      irc_en <= latched & ~sync;
    end
  end
endmodule
