// tb_iss -- self-checking testbench of the input signal synchronisation.
// Random asynchronous discriminator pulses (a few ns up to ~300 ns) on four
// channels, 32 ns sync clock (enable every 2nd 16 ns cycle). A reference
// model kept in the testbench (pulse seen since the last sync edge, sync =
// that OR its previous value) predicts sync and irc_en every cycle; also
// checked: every sync pulse lasts at least 64 ns (4 cycles), and the
// number of irc_en pulses equals the number of sync pulses.
`timescale 1ns/1ps
module tb_iss;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, ce = 0;
  logic [N-1:0] disc = '0, latched, sync, irc_en;
  int checks = 0, failures = 0;

  iss #(.N(N)) dut (.clk, .rst_n, .sync_ce(ce), .disc, .latched, .sync, .irc_en);

  always #8 clk = ~clk;
  always_ff @(posedge clk) if (rst_n) ce <= ~ce;

  // reference model
  logic [N-1:0] seen = '0, m_lat_prev = '0, m_sync = '0, m_irc = '0;
  for (genvar i = 0; i < N; i++) begin : g_seen
    always @(posedge disc[i]) seen[i] = 1'b1;
  end
  always @(posedge clk) begin
    if (rst_n && ce) begin
      logic [N-1:0] lat_s;
      lat_s = seen | disc;
      m_irc = lat_s & ~m_sync;
      m_sync = lat_s | m_lat_prev;
      m_lat_prev = lat_s;
      seen = disc;
    end
  end

  // width / count bookkeeping
  int width [N] = '{default: 0};
  int n_sync [N] = '{default: 0};
  int n_irc [N] = '{default: 0};
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (sync !== m_sync || irc_en !== m_irc) begin
      failures++;
      if (failures < 10) $display("t=%0t sync %b exp %b irc %b exp %b", $time, sync, m_sync, irc_en, m_irc);
    end
    for (int i = 0; i < N; i++) begin
      if (sync[i]) width[i]++;
      else if (width[i] != 0) begin
        checks++;
        if (width[i] < 4) begin failures++; $display("short sync pulse ch%0d %0d cycles", i, width[i]); end
        n_sync[i]++; width[i] = 0;
      end
    end
  end
  logic [N-1:0] irc_q = '0;
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) if (rst_n && irc_en[i] && !irc_q[i]) n_irc[i]++;
    irc_q <= irc_en;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #45 rst_n = 1;
    // one short isolated pulse: check exact shape
    #50; // t = 87, between edges
    disc[0] = 1; #3; disc[0] = 0;
    repeat (12) @(posedge clk);
    for (int k = 0; k < 400; k++) begin
      int ch, len, gap;
      ch  = $urandom_range(0, N-1);
      // rise 3 ns after a clock edge, fall 4..7 ns after one: no
      // discriminator edge coincides with a clock edge
      len = 8*$urandom_range(0, 36) + $urandom_range(1, 4);
      gap = 16*$urandom_range(0, 12) + 3;
      @(posedge clk); #(gap);
      disc[ch] = 1; #(len); disc[ch] = 0;
    end
    #500;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (n_sync[i] != n_irc[i]) begin
        failures++; $display("ch%0d sync pulses %0d irc pulses %0d", i, n_sync[i], n_irc[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
