// tb_trigger_master_board -- end-to-end test of the master board with the
// fixed-rate unit shortened to 16 cycles and a 12-bit clock counter.
// CAM 0 = TB A bit 0, CAM 1 = TB A bit 1 (scaling factor 3), CAM 2 =
// external input 1, CAM 5 = TB B bit 0 (trigger word only), CAM 3 = the
// masked OR (trigger 2 only). Checked: one TR1 per activation, TA in the
// cycle before TR1, TW and EvNo valid before TR1, trigger 1 delay, trigger
// 2 leaving together with trigger 1, prescaling 1 of 3, short asynchronous
// external pulses, the trigger word shift register and its masks, FIFO
// records (event number, trigger word, CAM bits, clock counter), the
// inhibit and inhibit-release trigger, the fixed rate trigger and the OV
// sync pulse at every counter wrap, and the masked OR input of the CAMs
// with an input enabled and masked.
`timescale 1ns/1ps
module tb_trigger_master_board;
  import dc_trigger_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [N_TB-1:0][N_TBOUT-1:0] tb_in = '0;
  logic [N_EXT-1:0] ext_in = '0;
  tmb_cfg_t cfg;
  logic tr1, tr2, inh, ov_sync, fifo_rd = 0, fifo_empty, fifo_full;
  logic [N_TB-1:0] ta;
  logic [31:0] tw, evno;
  logic [N_CAM-1:0] cam_out;
  logic [11:0] clk_count;
  logic [TMB_REC_W-1:0] rec;
  logic [15:0] dropped;
  int checks = 0, failures = 0, cyc = 0;
  int tr1_c [$], tr2_c [$], ta_c [$], ov_c [$];
  logic [31:0] tw_at [$], evno_at [$], tw_before [$];

  trigger_master_board #(.FR_UNIT_CYC(16), .CLK_W(12)) dut (.clk, .rst_n, .tb_in, .ext_in, .cfg,
    .tr1, .tr2, .ta, .inh, .tw, .evno, .ov_sync, .cam_out, .clk_count,
    .fifo_rd, .fifo_data(rec), .fifo_empty, .fifo_full, .fifo_dropped(dropped));

  always #8 clk = ~clk;
  logic [31:0] tw_prev;
  always @(posedge clk) begin
    cyc++;
    #1;
    if (tr1) begin tr1_c.push_back(cyc); tw_at.push_back(tw); evno_at.push_back(evno); tw_before.push_back(tw_prev); end
    if (tr2 && !tr2_c.size()) tr2_c.push_back(cyc);
    else if (tr2) tr2_c.push_back(cyc);
    if (ta[0]) ta_c.push_back(cyc);
    if (ov_sync) ov_c.push_back(cyc);
    tw_prev = tw;
  end

  initial begin #5ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t %s", $time, what); end
  endtask
  task automatic clear();
    tr1_c.delete(); tr2_c.delete(); ta_c.delete(); tw_at.delete(); evno_at.delete(); tw_before.delete();
  endtask
  task automatic tbpulse(int b, int bitn, int n);
    @(negedge clk); tb_in[b][bitn] = 1; repeat (n) @(negedge clk); tb_in[b][bitn] = 0;
  endtask
  task automatic read_rec(output logic [TMB_REC_W-1:0] r);
    @(negedge clk); r = rec; fifo_rd = 1; @(negedge clk); fifo_rd = 0;
  endtask

  initial begin
    int t0, d0, d7;
    logic [TMB_REC_W-1:0] r;
    int n_rec;
    cfg = '0;
    cfg.inhibit = 1;
    cfg.or_mask = '1;
    cfg.cam_use[0][0] = 1;  cfg.cam_pol[0][0] = 1;
    cfg.cam_use[1][1] = 1;  cfg.cam_pol[1][1] = 1;  cfg.scale[1] = 16'd3;
    cfg.cam_use[2][33] = 1; cfg.cam_pol[2][33] = 1;
    cfg.cam_use[3][39] = 1; cfg.cam_pol[3][39] = 1;
    cfg.cam_use[5][8] = 1;  cfg.cam_pol[5][8] = 1;
    cfg.tr1_mask = 32'h7;
    cfg.tr2_mask = 32'h1;
    cfg.tw_mask = '1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    check(inh == 1, "INH active after reset");
    @(negedge clk); cfg.inhibit = 0;
    repeat (5) @(posedge clk);
    clear();

    // 1. one trigger, TR1 delay 0 then 7, TR2 alignment
    tbpulse(0, 0, 3); t0 = cyc;
    repeat (25) @(posedge clk);
    check(tr1_c.size() == 1, $sformatf("one TR1 per activation (%0d)", tr1_c.size()));
    d0 = tr1_c[0] - t0;
    check(ta_c.size() == 1 && ta_c[0] == tr1_c[0] - 1, "TA one cycle before TR1 at zero delay");
    check(tw_at[0][0] && tw_before[0][0], "TW bit 0 set, and already the cycle before TR1");
    check(evno_at[0] == 0, "first event number 0");
    check(tr2_c.size() >= 1 && tr2_c[0] == tr1_c[0], "TR2 together with TR1");
    clear();
    cfg.tr1_delay = 5'd7;
    tbpulse(0, 0, 3); t0 = cyc;
    repeat (30) @(posedge clk);
    d7 = tr1_c.size() ? tr1_c[0] - t0 : -1;
    check(d7 - d0 == 7, $sformatf("trigger 1 delay 7 cycles (%0d vs %0d)", d7, d0));
    check(tr2_c.size() >= 1 && tr2_c[0] == tr1_c[0], "TR2 together with delayed TR1");
    check(evno_at[0] == 1, "event number 1");
    cfg.tr1_delay = 5'd0;
    clear();

    // 2. prescale 1 of 3
    for (int i = 0; i < 9; i++) begin tbpulse(0, 1, 2); repeat (5) @(negedge clk); end
    repeat (10) @(posedge clk);
    check(tr1_c.size() == 3, $sformatf("prescaled: %0d of 9", tr1_c.size()));
    clear();

    // 3. short asynchronous external pulse (5 ns)
    @(posedge clk); #4; ext_in[1] = 1; #5; ext_in[1] = 0;
    repeat (15) @(posedge clk);
    check(tr1_c.size() == 1 && tw_at[0][2], "external trigger with TW bit 2");
    clear();

    // 4. trigger word history: CAM 5 active 2 cycles before CAM 0
    tbpulse(1, 0, 1); @(negedge clk); tbpulse(0, 0, 2);
    repeat (15) @(posedge clk);
    check(tr1_c.size() == 1 && tw_at[0][5] && tw_at[0][0], "TW keeps CAM 5 from 2 cycles before");
    clear();
    cfg.tw_mask = '0; cfg.tw_mask[0] = '1;   // only the current cycle
    tbpulse(1, 0, 1); @(negedge clk); tbpulse(0, 0, 2);
    repeat (15) @(posedge clk);
    check(tr1_c.size() == 1 && !tw_at[0][5] && tw_at[0][0], "TWmask 2-4 off removes CAM 5");
    cfg.tw_mask = '1;
    clear();

    // 5. inhibit and inhibit release trigger
    cfg.hll.inh_release_en = 1;
    @(negedge clk); cfg.inhibit = 1;
    repeat (3) @(posedge clk);
    tbpulse(0, 0, 3);
    repeat (5) @(posedge clk);
    check(tr1_c.size() == 0 && inh, "no trigger while inhibit");
    check(clk_count == 0, "clock counter held during inhibit");
    @(negedge clk); cfg.inhibit = 0;
    repeat (10) @(posedge clk);
    check(tr1_c.size() == 1 && tw_at[0][31], "inhibit release trigger, TW bit 31");
    cfg.hll.inh_release_en = 0;
    clear();

    // 6. fixed rate: every 16 cycles
    @(negedge clk); cfg.hll.fixed_en = 1; cfg.hll.fixed_period = 0;
    repeat (16*6 + 6) @(posedge clk);
    @(negedge clk); cfg.hll.fixed_en = 0;
    check(tr1_c.size() == 6 && tw_at[0][28] && tr1_c[1] - tr1_c[0] == 16, $sformatf("fixed rate (%0d)", tr1_c.size()));
    clear();

    // 7. FIFO records
    n_rec = 0;
    while (!fifo_empty) begin
      read_rec(r);
      check(r[TMB_REC_W-64 +: 32] == n_rec, $sformatf("record event number %0d", r[TMB_REC_W-64 +: 32]));
      n_rec++;
    end
    check(n_rec == 1 + 1 + 3 + 1 + 2 + 1 + 6, $sformatf("%0d records", n_rec));

    // 8. OV sync: 12-bit counter wraps every 4096 cycles
    ov_c.delete();
    repeat (9000) @(posedge clk);
    check(ov_c.size() == 2 && ov_c[1] - ov_c[0] == 4096, $sformatf("OV sync pulses %0d", ov_c.size()));

    // 9. masked OR: CAM 3 uses only input 39, the OR of the enabled inputs
    for (int k = 0; k < 2; k++) begin
      bit seen;
      cfg.or_mask = (k == 0) ? '1 : ~(N_IS_TMB'(1) << 8);   // k = 1: TB B bit 0 masked
      seen = 0;
      fork
        tbpulse(1, 0, 3);
        repeat (10) @(posedge clk) if (cam_out[3]) seen = 1;
      join
      repeat (5) @(negedge clk);
      check(seen == (k == 0), $sformatf("masked OR with input %0s", k ? "masked" : "enabled"));
    end
    cfg.or_mask = '1;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
