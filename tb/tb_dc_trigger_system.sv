// tb_dc_trigger_system -- end-to-end test of the full Double Chooz trigger
// system (three Trigger Boards and the Trigger Master Board) with every
// parameter at its default value.
//
// Configuration, as the experiment runs it:
//   TB A and TB B (inner detector, ID): 13 of 18 group inputs (0..12)
//     used, multiplicity A = at least 2 of the 13; sum thresholds
//     0 = neutron like, 1 = muon like, 2 = prescaled, 3 = neutrino like;
//     TB output bit 0 = prescaled, 1 = neutrino like AND multiplicity,
//     2 = neutron like, 3 = muon like.
//   TB V (inner veto, IV): 18 groups, channel 0 = top, 1..4 = up,
//     5..10 = lateral, 11..16 = down, 17 = bottom (this split is the
//     design's choice; the paper gives the regions, not the numbers);
//     output bit 0 = prescaled, 1 = neutron like, 2 = muon like AND at
//     least 10 active A groups, 3 = topology (at least 3 lateral OR at
//     least 1 down OR the bottom group active, on the B discriminators).
//   TMB: trigger word bits 0..3 and 6..9 = TB A / TB B outputs, bits
//     12..14 = TB V outputs, 15..17 = passing / stopping / crossing muon
//     (IVMPR), 20..25 = external inputs 0..5; the masked OR is "muon like
//     in the ID" (TB A bit 3 OR TB B bit 3). Trigger 1 from the prescaled
//     bits (scaled 1/1000), the neutrino bits, the IV neutron bit and the
//     external bits; dead time 128 ns after each trigger; trigger 2 from
//     the IV neutron bit.
//
// Stimulus is given at the discriminator outputs, as pulses of physics-
// like events: neutrino candidates, low-multiplicity noise, neutrons, ID
// muons, passing / stopping / crossing muons (three topologies), prescaled
// pulses, external triggers, pairs of dead-time monitor pulses 2 us
// apart, pile-up within the dead time. Later phases
// switch on the close-in-time window, the follow-up trigger, the inhibit-
// release trigger and the fixed-rate trigger (period code 0, 16.384 us;
// the experiment uses 1/s, which is too long to simulate). At the end the
// FIFOs of all four boards are read: every board must hold the same event
// numbers, the TMB records carry trigger word and clock counter; then the
// fixed rate is left running without reading until every FIFO is full.
//
// Every mechanism is counted; a mechanism that never happened counts as a
// failure. The OV sync pulse needs 2^32 cycles (68.7 s) with the default
// 32-bit counter and is not part of this run; it is checked in the clock
// counter and master board tests with a short counter.
`timescale 1ns/1ps
module tb_dc_trigger_system;
  import dc_trigger_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [2:0][N_CH-1:0]  disc_a = '0, disc_b = '0;
  logic [2:0][N_SUM-1:0] disc_sum = '0;
  logic [2:0]            tb_nim_in = '0;
  logic [N_TBOUT-1:0]    free_tb_in = '0;
  logic [N_EXT-1:0]      ext_in = '0;
  tb_cfg_t [2:0]         tb_cfg;
  tmb_cfg_t              tmb_cfg;
  logic tr1, tr2, inh, ov_sync, free_ta;
  logic [31:0] tw, evno, clk_count;
  logic [2:0][N_TBOUT-1:0] tb_out;
  logic [2:0][2:0]         tb_nim_out;
  logic [2:0][31:0]        tb_evno;
  logic [2:0]              tb_fifo_rd = '0, tb_fifo_empty, tb_fifo_full;
  logic [2:0][TB_REC_W-1:0] tb_fifo_data;
  logic [2:0][15:0]        tb_fifo_dropped;
  logic                    tmb_fifo_rd = 0, tmb_fifo_empty, tmb_fifo_full;
  logic [TMB_REC_W-1:0]    tmb_fifo_data;
  logic [15:0]             tmb_fifo_dropped;
  logic [N_CAM-1:0]        tmb_cam;

  dc_trigger_system dut (.*);

  always #8 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_tr1 = 0, n_tr2 = 0, n_tr2_with_tr1 = 0;
  logic tr2_q = 0;
  logic [31:0] tw_q [$];
  int          tr1_cyc [$];
  logic [31:0] evno_q [$];

  always @(posedge clk) begin
    cyc++;
    #1;
    if (tr1) begin n_tr1++; tw_q.push_back(tw); evno_q.push_back(evno); tr1_cyc.push_back(cyc); end
    if (tr2 && !tr2_q) begin n_tr2++; if (tr1) n_tr2_with_tr1++; end
    tr2_q = tr2;
  end

  initial begin #20ms; failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, what); end
  endtask

  // Mechanism counters.
  typedef enum int { M_NEUTRINO, M_MULT_REJECT, M_NEUTRON, M_ID_MUON, M_PASSING, M_STOPPING,
                     M_CROSSING, M_EXTERNAL, M_PRESCALE, M_DEAD_TIME, M_CIT, M_FOLLOWUP,
                     M_INH_RELEASE, M_FIXED_RATE, M_TRIGGER2, M_TA_RECORD, M_IRC,
                     M_CLOCK_STAMP, M_FIFO_FULL, M_DTM_PAIR, M_NMECH } mech_e;
  int mech [M_NMECH];
  string mech_name [M_NMECH] = '{"neutrino trigger", "multiplicity reject", "neutron flag",
    "ID muon flag", "IVMPR passing", "IVMPR stopping", "IVMPR crossing", "external trigger",
    "prescale 1/1000", "dead time loss", "close-in-time", "follow-up", "inhibit release",
    "fixed rate", "trigger 2", "TA record on all boards", "input rate counter",
    "clock counter time stamp", "FIFO full", "dead-time monitor pair"};

  // ---- stimulus helpers: pulses start 3 ns after a clock edge ----
  int n_presc = 0;  // prescaled pulses given to TB A and TB B
  task automatic fire_disc(input logic [2:0][N_CH-1:0] a, input logic [2:0][N_CH-1:0] b,
                           input logic [2:0][N_SUM-1:0] s, input logic [N_EXT-1:0] e = '0);
    @(posedge clk); #3;
    disc_a = a; disc_b = b; disc_sum = s; ext_in = e;
    #48;
    disc_a = '0; disc_b = '0; disc_sum = '0; ext_in = '0;
  endtask

  // Wait for the event to pass and return the triggers it produced.
  task automatic collect(output int n, output logic [31:0] tw_or, input int wait_cyc = 60);
    int n0;
    n0 = n_tr1;
    repeat (wait_cyc) @(posedge clk);
    n = n_tr1 - n0;
    tw_or = '0;
    for (int i = tw_q.size() - n; i < tw_q.size(); i++) tw_or |= tw_q[i];
  endtask

  function automatic logic [31:0] bits(input int b0, input int b1 = -1, input int b2 = -1,
      input int b3 = -1, input int b4 = -1, input int b5 = -1, input int b6 = -1,
      input int b7 = -1, input int b8 = -1, input int b9 = -1, input int b10 = -1);
    int l [11] = '{b0, b1, b2, b3, b4, b5, b6, b7, b8, b9, b10};
    logic [31:0] r = '0;
    foreach (l[i]) if (l[i] >= 0) r[l[i]] = 1'b1;
    return r;
  endfunction

  // ID event on both ID boards: sums (bit mask) and the first ng groups.
  function automatic logic [N_CH-1:0] first(int n, int off = 0);
    logic [N_CH-1:0] r = '0;
    for (int i = 0; i < n; i++) r[off + i] = 1'b1;
    return r;
  endfunction

  task automatic id_event(input logic [3:0] sums, input int ng, input logic [N_CH-1:0] iv_a,
                          input logic [N_CH-1:0] iv_b, input logic [3:0] iv_sums,
                          output int n, output logic [31:0] t);
    logic [2:0][N_CH-1:0] a, b;
    logic [2:0][N_SUM-1:0] s;
    a = '0; b = '0; s = '0;
    a[0] = first(ng); a[1] = first(ng); b[0] = first(ng); b[1] = first(ng);
    s[0] = sums; s[1] = sums;
    a[2] = iv_a; b[2] = iv_b; s[2] = iv_sums;
    if (sums[2]) n_presc++;
    fire_disc(a, b, s);
    collect(n, t);
  endtask

  // ---- configuration ----
  localparam int S_NEUTRON = 0, S_MUON = 1, S_PRESC = 2, S_NU = 3;

  task automatic cam_tb(int b, int cam, int in_idx, bit pol = 1);
    tb_cfg[b].cam_use[cam][in_idx] = 1'b1;
    tb_cfg[b].cam_pol[cam][in_idx] = pol;
  endtask
  task automatic cam_tmb(int cam, int in_idx, bit pol = 1);
    tmb_cfg.cam_use[cam][in_idx] = 1'b1;
    tmb_cfg.cam_pol[cam][in_idx] = pol;
  endtask

  task automatic configure();
    tb_cfg = '0;
    for (int b = 0; b < 3; b++) tb_cfg[b].ta_src = TA_EXTERNAL;
    for (int b = 0; b < 2; b++) begin
      tb_cfg[b].mult_mask[0] = first(13);
      tb_cfg[b].mult_thr[0]  = 5'd2;
      cam_tb(b, 0,  TLU_SUM + S_PRESC);
      cam_tb(b, 4,  TLU_SUM + S_NU);  cam_tb(b, 4, TLU_MULTA);
      cam_tb(b, 8,  TLU_SUM + S_NEUTRON);
      cam_tb(b, 12, TLU_SUM + S_MUON);
    end
    tb_cfg[2].mult_mask[0] = '1;            tb_cfg[2].mult_thr[0] = 5'd10;
    tb_cfg[2].mult_mask[1] = first(6, 5);   tb_cfg[2].mult_thr[1] = 5'd3;   // lateral
    tb_cfg[2].mult_mask[2] = first(6, 11);  tb_cfg[2].mult_thr[2] = 5'd1;   // down
    tb_cfg[2].mult_mask[3] = first(1, 17);  tb_cfg[2].mult_thr[3] = 5'd1;   // bottom
    cam_tb(2, 0,  TLU_SUM + S_PRESC);
    cam_tb(2, 4,  TLU_SUM + S_NEUTRON);
    cam_tb(2, 8,  TLU_SUM + S_MUON); cam_tb(2, 8, TLU_MULTA);
    cam_tb(2, 12, TLU_MULTB); cam_tb(2, 13, TLU_MULTB + 1); cam_tb(2, 14, TLU_MULTB + 2);

    tmb_cfg = '0;
    tmb_cfg.inhibit = 1'b1;
    for (int i = 0; i < 4; i++) begin cam_tmb(i, i); cam_tmb(6 + i, 8 + i); end
    for (int i = 0; i < 3; i++) cam_tmb(12 + i, 16 + i);
    tmb_cfg.or_mask[3] = 1'b1; tmb_cfg.or_mask[11] = 1'b1;      // muon like (ID)
    cam_tmb(15, 18); cam_tmb(15, N_IS_TMB, 0);                   // passing
    cam_tmb(16, 18); cam_tmb(16, N_IS_TMB); cam_tmb(16, 19, 0);  // stopping
    cam_tmb(17, 18); cam_tmb(17, N_IS_TMB); cam_tmb(17, 19);     // crossing
    for (int i = 0; i < 6; i++) cam_tmb(20 + i, 32 + i);
    tmb_cfg.scale[0] = 16'd1000; tmb_cfg.scale[6] = 16'd1000; tmb_cfg.scale[12] = 16'd1000;
    tmb_cfg.tr1_mask = bits(0, 1, 6, 7, 12, 13, 20, 21, 22, 23, 24) | bits(25);
    tmb_cfg.tr2_mask = bits(13);
    tmb_cfg.tw_mask = '1;
    tmb_cfg.hll.win_mode = WIN_DEAD;
    tmb_cfg.hll.window   = 5'd7;                                 // 128 ns
    tmb_cfg.tr1_delay    = 5'd2;   // lets flags one register late enter the TW
  endtask

  // ---- the run ----
  logic [31:0] t;
  int n, nfix, n0;
  logic [31:0] nu_bits, id_mu_bits;
  logic [TB_REC_W-1:0] tbrec;
  logic [TMB_REC_W-1:0] tmbrec;
  logic [31:0] tb_ev [3][$];
  logic [31:0] tmb_ev [$], tmb_tw [$], tmb_clk [$];

  initial begin
    mech = '{default: 0};
    configure();
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    check(inh === 1'b1, "INH active after reset");
    fire_disc('0, '0, {4'b0, 4'b1000, 4'b1000}, '0);    // nothing while inhibited
    collect(n, t);
    check(n == 0, "no trigger while inhibited");
    tmb_cfg.inhibit = 1'b0;
    repeat (10) @(posedge clk);
    check(inh === 1'b0, "INH released");

    nu_bits    = bits(0, 1, 6, 7);
    id_mu_bits = bits(0, 1, 2, 3, 6, 7, 8, 9);

    // neutrino candidates with 2..13 groups
    for (int k = 0; k < 8; k++) begin
      int ng = 2 + $urandom_range(0, 11);
      id_event(4'b1100, ng, '0, '0, '0, n, t);
      check(n == 1 && t == nu_bits, $sformatf("neutrino ng=%0d n=%0d tw=%h", ng, n, t));
      if (n == 1 && t == nu_bits) mech[M_NEUTRINO]++;
    end
    // energy without multiplicity: no trigger
    for (int k = 0; k < 4; k++) begin
      id_event(4'b1000, k & 1, '0, '0, '0, n, t);
      check(n == 0, $sformatf("low multiplicity rejected n=%0d", n));
      if (n == 0) mech[M_MULT_REJECT]++;
    end
    // neutron like
    for (int k = 0; k < 3; k++) begin
      id_event(4'b1101, 6, '0, '0, '0, n, t);
      check(n == 1 && t == bits(0, 1, 2, 6, 7, 8), $sformatf("neutron tw=%h", t));
      if (n == 1 && t[2] && t[8]) mech[M_NEUTRON]++;
    end
    // ID muon without IV activity
    for (int k = 0; k < 3; k++) begin
      id_event(4'b1111, 13, '0, '0, '0, n, t);
      check(n == 1 && t == id_mu_bits, $sformatf("ID muon tw=%h", t));
      if (n == 1 && t[3] && t[9]) mech[M_ID_MUON]++;
    end
    // passing muon: IV muon with top/up groups only, nothing in the ID
    for (int k = 0; k < 3; k++) begin
      id_event(4'b0000, 0, first(12), first(5), 4'b0011, n, t);
      check(n == 1 && t == bits(13, 14, 15), $sformatf("passing tw=%h", t));
      if (n == 1 && t[15]) mech[M_PASSING]++;
    end
    // stopping muon: IV and ID muon, no topology
    for (int k = 0; k < 3; k++) begin
      id_event(4'b1111, 13, first(12), first(5), 4'b0011, n, t);
      check(n == 1 && t == (id_mu_bits | bits(13, 14, 16)), $sformatf("stopping tw=%h", t));
      if (n == 1 && t[16]) mech[M_STOPPING]++;
    end
    // crossing muon: three lateral, one down, or the bottom group
    for (int k = 0; k < 3; k++) begin
      logic [N_CH-1:0] ivb;
      ivb = (k == 0) ? first(3, 5) : (k == 1) ? first(1, 13) : first(1, 17);
      id_event(4'b1111, 13, first(12), ivb, 4'b0011, n, t);
      check(n == 1 && t == (id_mu_bits | bits(13, 14, 17)), $sformatf("crossing %0d tw=%h", k, t));
      if (n == 1 && t[17]) mech[M_CROSSING]++;
    end
    // two lateral groups only: still no topology
    id_event(4'b1111, 13, first(12), first(2, 5), 4'b0011, n, t);
    check(n == 1 && t[16] && !t[17], $sformatf("two lateral = stopping tw=%h", t));
    // external triggers
    for (int k = 0; k < 6; k++) begin
      fire_disc('0, '0, '0, N_EXT'(1) << k);
      collect(n, t);
      check(n == 1 && t == bits(20 + k), $sformatf("external %0d tw=%h", k, t));
      if (n == 1) mech[M_EXTERNAL]++;
    end
    // asynchronous dead-time monitor: two NIM pulses 2 us apart on one
    // external input, both must give a trigger
    for (int k = 0; k < 2; k++) begin
      n0 = n_tr1;
      fire_disc('0, '0, '0, 7'h10);
      #(2000 - 51);
      fire_disc('0, '0, '0, 7'h10);
      collect(n, t);
      n = n_tr1 - n0;
      check(n == 2 && tr1_cyc[$] - tr1_cyc[$-1] inside {[124:126]},
            $sformatf("dead-time monitor pair n=%0d", n));
      if (n == 2) mech[M_DTM_PAIR]++;
    end
    // external input 6 is not enabled for trigger 1
    fire_disc('0, '0, '0, 7'h40);
    collect(n, t);
    check(n == 0, "external 6 masked");
    // pile-up within the 128 ns dead time: second trigger lost
    for (int k = 0; k < 3; k++) begin
      n0 = n_tr1;
      fork
        fire_disc('0, '0, '0, 7'h01);
        begin repeat (4) @(posedge clk); fire_disc('0, '0, '0, 7'h02); end
      join
      collect(n, t);
      n = n_tr1 - n0;
      check(n == 1, $sformatf("dead time n=%0d", n));
      if (n == 1) mech[M_DEAD_TIME]++;
    end
    // same pair 12 cycles apart: both trigger
    n0 = n_tr1;
    fork
      fire_disc('0, '0, '0, 7'h01);
      begin repeat (12) @(posedge clk); fire_disc('0, '0, '0, 7'h02); end
    join
    collect(n, t);
    n = n_tr1 - n0;
    check(n == 2, $sformatf("after dead time n=%0d", n));

    // prescaled pulses only (TB A and TB B together): 1 trigger per 1000
    begin
      int n_before, expect_n;
      logic [2:0][N_SUM-1:0] s;
      s = '0; s[0][S_PRESC] = 1; s[1][S_PRESC] = 1;
      n_before = n_presc;
      n0 = n_tr1;
      for (int k = 0; k < 2100; k++) begin
        fire_disc('0, '0, s);
        n_presc++;
        repeat (6) @(posedge clk);
      end
      repeat (40) @(posedge clk);
      expect_n = n_presc / 1000 - n_before / 1000;
      check(n_tr1 - n0 == expect_n, $sformatf("prescale %0d triggers, expected %0d", n_tr1 - n0, expect_n));
      for (int i = tw_q.size() - (n_tr1 - n0); i < tw_q.size(); i++)
        check(tw_q[i] == bits(0, 6), $sformatf("prescale tw=%h", tw_q[i]));
      if (n_tr1 - n0 == expect_n) mech[M_PRESCALE] += expect_n;
    end

    // close-in-time window: second trigger with bit 30
    tmb_cfg.hll.win_mode = WIN_CIT; tmb_cfg.hll.window = 5'd10;
    repeat (5) @(posedge clk);
    for (int k = 0; k < 2; k++) begin
      n0 = n_tr1;
      fork
        fire_disc('0, '0, '0, 7'h01);
        begin repeat (5) @(posedge clk); fire_disc('0, '0, '0, 7'h02); end
      join
      collect(n, t);
      n = n_tr1 - n0;
      check(n == 2 && tw_q[$][SP_CIT + 28] && !tw_q[$-1][SP_CIT + 28],
            $sformatf("close-in-time n=%0d", n));
      if (n == 2 && tw_q[$][SP_CIT + 28]) mech[M_CIT]++;
    end
    tmb_cfg.hll.win_mode = WIN_DEAD; tmb_cfg.hll.window = 5'd7;

    // follow-up trigger: a neutrino-like condition held for 640 ns
    tmb_cfg.hll.followup_en = 1'b1; tmb_cfg.hll.followup = 5'd20;
    repeat (5) @(posedge clk);
    for (int k = 0; k < 2; k++) begin
      n0 = n_tr1;
      @(posedge clk); #3;
      disc_a[0] = first(4); disc_sum[0][S_NU] = 1'b1;
      #640;
      disc_a = '0; disc_sum = '0;
      collect(n, t);
      n = n_tr1 - n0;
      check(n == 2 && tw_q[$][SP_FOLLOW + 28] && tr1_cyc[$] - tr1_cyc[$-1] == 22,
            $sformatf("follow-up n=%0d", n));
      if (n == 2 && tw_q[$][SP_FOLLOW + 28]) mech[M_FOLLOWUP]++;
    end
    tmb_cfg.hll.followup_en = 1'b0;

    // inhibit and inhibit-release trigger
    tmb_cfg.hll.inh_release_en = 1'b1;
    tmb_cfg.inhibit = 1'b1;
    repeat (20) @(posedge clk);
    id_event(4'b1000, 4, '0, '0, '0, n, t);
    check(n == 0 && tb_out == '0, "no trigger while inhibited");
    n0 = n_tr1;
    tmb_cfg.inhibit = 1'b0;
    repeat (20) @(posedge clk);
    check(n_tr1 - n0 == 1 && tw_q[$][SP_INHREL + 28], "inhibit release trigger");
    if (n_tr1 - n0 == 1 && tw_q[$][SP_INHREL + 28]) mech[M_INH_RELEASE]++;
    tmb_cfg.hll.inh_release_en = 1'b0;

    // fixed-rate trigger, shortest period (1024 cycles)
    tmb_cfg.hll.fixed_en = 1'b1; tmb_cfg.hll.fixed_period = 16'd0;
    n0 = n_tr1;
    repeat (1024 * 5 + 10) @(posedge clk);
    tmb_cfg.hll.fixed_en = 1'b0;
    nfix = n_tr1 - n0;
    check(nfix >= 4 && nfix <= 6, $sformatf("fixed rate count %0d", nfix));
    for (int i = tw_q.size() - nfix; i < tw_q.size(); i++) begin
      check(tw_q[i] == bits(28), $sformatf("fixed rate tw=%h", tw_q[i]));
      if (i > tw_q.size() - nfix)
        check(tr1_cyc[i] - tr1_cyc[i-1] == 1024, $sformatf("fixed period %0d", tr1_cyc[i] - tr1_cyc[i-1]));
      if (tw_q[i][SP_FIXED + 28]) mech[M_FIXED_RATE]++;
    end
    repeat (50) @(posedge clk);

    // trigger 2 follows the IV neutron bit and leaves with trigger 1
    check(n_tr2 > 0 && n_tr2 == n_tr2_with_tr1, $sformatf("trigger 2 %0d/%0d", n_tr2_with_tr1, n_tr2));
    if (n_tr2 == n_tr2_with_tr1) mech[M_TRIGGER2] = n_tr2;

    // ---- read all FIFOs ----
    for (int b = 0; b < 3; b++)
      check(tb_evno[b] == evno + 1 && tb_evno[b] == n_tr1,
            $sformatf("TB %0d event number %0d vs TMB %0d (%0d triggers)", b, tb_evno[b], evno, n_tr1));
    for (int b = 0; b < 3; b++)
      while (!tb_fifo_empty[b]) begin
        @(negedge clk); tbrec = tb_fifo_data[b];
        tb_ev[b].push_back(tbrec[TB_REC_W-1 -: 32]);
        if (b == 0 && tbrec[40 +: IRC_W] != 0) mech[M_IRC]++;
        tb_fifo_rd[b] = 1; @(negedge clk); tb_fifo_rd[b] = 0;
      end
    while (!tmb_fifo_empty) begin
      @(negedge clk); tmbrec = tmb_fifo_data;
      tmb_tw.push_back(tmbrec[TMB_REC_W-1 -: 32]);
      tmb_ev.push_back(tmbrec[TMB_REC_W-33 -: 32]);
      tmb_clk.push_back(tmbrec[TMB_REC_W-65 -: 32]);
      tmb_fifo_rd = 1; @(negedge clk); tmb_fifo_rd = 0;
    end
    check(tmb_ev.size() == n_tr1, $sformatf("TMB records %0d of %0d", tmb_ev.size(), n_tr1));
    for (int i = 0; i < tmb_ev.size(); i++) begin
      bit ok;
      ok = tmb_ev[i] == i && tmb_ev[i] == evno_q[i] && tmb_tw[i] == tw_q[i];
      for (int b = 0; b < 3; b++) ok &= (tb_ev[b].size() > i) && tb_ev[b][i] == i;
      check(ok, $sformatf("record %0d: TMB evno %0d/%0d tw %h/%h TB %0d %0d %0d", i, tmb_ev[i],
            evno_q[i], tmb_tw[i], tw_q[i], tb_ev[0][i], tb_ev[1][i], tb_ev[2][i]));
      if (ok) mech[M_TA_RECORD]++;
      if (tmb_tw[i][SP_INHREL + 28]) begin
        // the clock counter restarts at the inhibit release
        check(tmb_clk[i] < 40, $sformatf("clock restart %0d", tmb_clk[i]));
        if (tmb_clk[i] < 40) mech[M_CLOCK_STAMP]++;
      end else if (i > 0) begin
        check(tmb_clk[i] - tmb_clk[i-1] == tr1_cyc[i] - tr1_cyc[i-1],
              $sformatf("clock stamp %0d", i));
        if (tmb_clk[i] - tmb_clk[i-1] == tr1_cyc[i] - tr1_cyc[i-1]) mech[M_CLOCK_STAMP]++;
      end
    end

    // ---- fill every FIFO with fixed-rate triggers ----
    tmb_cfg.hll.fixed_en = 1'b1;
    repeat (1024 * (FIFO_DEPTH + 3)) @(posedge clk);
    tmb_cfg.hll.fixed_en = 1'b0;
    repeat (50) @(posedge clk);
    check(tmb_fifo_full && tmb_fifo_dropped > 0, "TMB FIFO full");
    for (int b = 0; b < 3; b++) check(tb_fifo_full[b] && tb_fifo_dropped[b] > 0, $sformatf("TB %0d FIFO full", b));
    if (tmb_fifo_full && &tb_fifo_full) mech[M_FIFO_FULL]++;


    for (int m = 0; m < M_NMECH; m++) begin
      $display("MECH %-26s %0d", mech_name[m], mech[m]);
      check(mech[m] > 0, $sformatf("mechanism %s never happened", mech_name[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
