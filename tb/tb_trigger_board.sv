// tb_trigger_board -- end-to-end test of one Trigger Board.
// Settings: multiplicity A = at least 2 of 18 groups; CAM 0 = multA AND
// SUM D (neutrino-like), giving output bit 0; CAM 4 = SUM C (prescale),
// bit 1. Checked:
//   * bit 0 needs both the sum and two groups (one group is not enough);
//   * the output delay setting shifts TB_Out by exactly that many cycles;
//   * each TA writes one record: event numbers 0,1,2..., time difference
//     counter = cycles between TAs, rate counter = pulses injected on
//     each discriminator since the previous TA, input status shows the
//     discriminator held active at the TA;
//   * the FIFO keeps 128 events, drops the rest and flags full;
//   * INH forces the outputs to 0 and ignores TA;
//   * stand-alone TA from the gate timer (records 200 cycles apart);
//   * software-set discriminators drive the trigger logic.
`timescale 1ns/1ps
module tb_trigger_board;
  import dc_trigger_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [N_CH-1:0] disc_a = '0, disc_b = '0;
  logic [N_SUM-1:0] disc_sum = '0;
  logic nim_in = 0, ta_in = 0, inh = 0, fifo_rd = 0;
  tb_cfg_t cfg;
  logic [N_TBOUT-1:0] tb_out;
  logic [2:0] nim_out;
  logic [N_CAM-1:0] cam_out;
  logic [TB_REC_W-1:0] rec;
  logic fifo_empty, fifo_full;
  logic [15:0] dropped;
  logic [31:0] evno;
  int checks = 0, failures = 0, cyc = 0;

  trigger_board dut (.clk, .rst_n, .disc_a, .disc_b, .disc_sum, .nim_in, .ta_in, .inh, .cfg,
    .tb_out, .nim_out, .cam_out, .fifo_rd, .fifo_data(rec), .fifo_empty, .fifo_full,
    .fifo_dropped(dropped), .evno);

  always #8 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin #20ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, what); end
  endtask

  // asynchronous pulse, 3 ns after a clock edge
  task automatic pulse_a(int ch, int len_ns);
    @(posedge clk); #3; disc_a[ch] = 1; #(len_ns); disc_a[ch] = 0;
  endtask

  // first cycle (relative count) in which tb_out[bit] is high, within n cycles
  task automatic first_high(int b, int n, output int at);
    at = -1;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      if (tb_out[b] && at < 0) at = i;
    end
  endtask

  task automatic ta_pulse(output int at);
    @(negedge clk); ta_in = 1; at = cyc; @(negedge clk); @(negedge clk); ta_in = 0;
  endtask

  task automatic read_rec(output logic [TB_REC_W-1:0] r);
    @(negedge clk); r = rec; fifo_rd = 1; @(negedge clk); fifo_rd = 0;
  endtask

  function automatic int f_evno(logic [TB_REC_W-1:0] r); return int'(r[TB_REC_W-32 +: 32]); endfunction
  function automatic int f_tdc(logic [TB_REC_W-1:0] r);  return int'(r[TB_REC_W-64 +: 32]); endfunction
  function automatic int f_irc(logic [TB_REC_W-1:0] r, int i); return int'(r[N_IS_TB + 16*i +: 16]); endfunction

  initial begin
    int a0, a1, t_ta [$];
    logic [TB_REC_W-1:0] r;
    cfg = '0;
    cfg.mult_mask[0] = '1; cfg.mult_thr[0] = 5'd2;
    cfg.cam_use[0][TLU_MULTA] = 1; cfg.cam_pol[0][TLU_MULTA] = 1;
    cfg.cam_use[0][TLU_SUM+3] = 1; cfg.cam_pol[0][TLU_SUM+3] = 1;
    cfg.cam_use[4][TLU_SUM+2] = 1; cfg.cam_pol[4][TLU_SUM+2] = 1;
    cfg.ta_src = TA_EXTERNAL;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);

    // ---- coincidence of sum and multiplicity ----
    fork
      begin @(posedge clk); #3; disc_sum[3] = 1; #40; disc_sum[3] = 0; end
      pulse_a(5, 40);
      pulse_a(11, 30);
      first_high(0, 12, a0);
    join
    check(a0 >= 0, "sum + 2 groups gives output bit 0");
    repeat (10) @(posedge clk);
    fork
      begin @(posedge clk); #3; disc_sum[3] = 1; #40; disc_sum[3] = 0; end
      pulse_a(5, 40);
      first_high(0, 12, a1);
    join
    check(a1 < 0, "sum + 1 group gives no output");
    repeat (10) @(posedge clk);
    // ---- output delay (both pulses at the same phase of the 32 ns sync clock) ----
    cfg.out_delay = 4'd5;
    while (cyc % 2) @(posedge clk);
    fork
      begin @(posedge clk); #3; disc_sum[2] = 1; #40; disc_sum[2] = 0; end
      first_high(1, 20, a1);
    join
    cfg.out_delay = 4'd0;
    repeat (10) @(posedge clk);
    while (cyc % 2) @(posedge clk);
    fork
      begin @(posedge clk); #3; disc_sum[2] = 1; #40; disc_sum[2] = 0; end
      first_high(1, 20, a0);
    join
    check(a0 >= 0 && a1 - a0 == 5, $sformatf("output delay 5 cycles (got %0d vs %0d)", a1, a0));
    repeat (10) @(posedge clk);

    // ---- TA records: rate counters, TDC, EvNo, IS ----
    // flush the pulses above into an event, then start counting
    ta_pulse(a0); t_ta.push_back(a0);
    for (int ev = 0; ev < 4; ev++) begin
      for (int k = 0; k <= ev; k++) begin pulse_a(ev, 10); repeat (8) @(posedge clk); end
      for (int k = 0; k < 2*ev; k++) begin @(posedge clk); #3; disc_b[17] = 1; #20; disc_b[17] = 0; repeat (8) @(posedge clk); end
      @(posedge clk); #3; disc_sum[0] = (ev == 2);   // held across the TA of event 2
      repeat (6) @(posedge clk);
      ta_pulse(a0); t_ta.push_back(a0);
      repeat (3) @(posedge clk); #3; disc_sum[0] = 0;
      repeat (10 + 7*ev) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    read_rec(r);
    check(f_evno(r) == 0, "first event number 0");
    for (int ev = 0; ev < 4; ev++) begin
      read_rec(r);
      check(f_evno(r) == ev + 1, $sformatf("event number %0d", f_evno(r)));
      check(f_tdc(r) == t_ta[ev+1] - t_ta[ev], $sformatf("TDC %0d exp %0d", f_tdc(r), t_ta[ev+1] - t_ta[ev]));
      check(f_irc(r, ev) == ev + 1, $sformatf("IRC A%0d = %0d exp %0d", ev, f_irc(r, ev), ev + 1));
      check(f_irc(r, TLU_B + 17) == 2*ev, $sformatf("IRC B17 = %0d exp %0d", f_irc(r, TLU_B + 17), 2*ev));
      check(r[TLU_SUM] == (ev == 2), "input status of SUM C at the TA");
    end
    check(fifo_empty, "FIFO empty after reading");

    // ---- FIFO full ----
    for (int i = 0; i < 130; i++) ta_pulse(a0);
    @(negedge clk);
    check(fifo_full && dropped == 16'd2, $sformatf("FIFO full, dropped %0d", dropped));
    for (int i = 0; i < 128; i++) begin
      read_rec(r);
      if (i == 0 || i == 127) check(f_evno(r) == 5 + i, "event numbers continue across the FIFO");
    end
    check(fifo_empty, "FIFO drained");

    // ---- inhibit ----
    @(negedge clk); inh = 1;
    fork
      begin @(posedge clk); #3; disc_sum[2] = 1; #40; disc_sum[2] = 0; end
      first_high(1, 12, a0);
      begin ta_pulse(a1); end
    join
    check(a0 < 0, "no output while INH");
    check(fifo_empty, "TA ignored while INH");
    @(negedge clk); inh = 0;

    // ---- gate timer ----
    cfg.ta_src = TA_GATE; cfg.gate_period = 200;
    repeat (650) @(posedge clk);
    cfg.ta_src = TA_EXTERNAL; cfg.gate_period = 0;
    repeat (5) @(posedge clk);
    read_rec(r); read_rec(r);
    check(f_tdc(r) == 200, $sformatf("gate timer spacing %0d", f_tdc(r)));
    while (!fifo_empty) read_rec(r);

    // ---- software discriminators ----
    cfg.sw_disc_en = 1; cfg.sw_disc = '0; cfg.sw_disc[TLU_SUM+2] = 1;
    first_high(1, 10, a0);
    cfg.sw_disc = '0; cfg.sw_disc_en = 0;
    check(a0 >= 0, "software discriminator drives output bit 1");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
