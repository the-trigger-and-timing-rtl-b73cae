// high_level_logic -- trigger 1 decision of the master board.
//
// req[i] is CAM i after prescaling and the trigger 1 mask. A trigger is
// made when a CAM becomes active that did not take part in the previous
// trigger: every CAM active at a trigger is "blocked" until it goes
// inactive again, so one long condition gives one trigger. On top of that:
//  * follow-up trigger: if the conditions of the last trigger are still
//    active (followup+2) cycles after it (32..528 ns), fire again;
//  * window after each trigger, one of
//      close-in-time (win_mode=WIN_CIT): a new activation inside the
//        (window+2)-cycle window (32..528 ns) is delayed to its end,
//      dead time (WIN_DEAD): activations inside the (window+1)-cycle dead
//        time (16..512 ns) are lost;
//  * fixed rate trigger every (fixed_period+1) x FR_UNIT cycles
//    (FR_UNIT = 1024 cycles = 16.384 us, so up to 1.0738 s);
//  * inhibit release trigger when the inhibit signal is released.
// Fixed-rate and inhibit-release requests wait for the end of a window.
// No trigger is made while inhibit is active. fire is a one-cycle pulse,
// registered, one cycle after the request; special[3:0] (fixed rate,
// follow-up, close-in-time, inhibit release) comes with it and forms bits
// 28..31 of the trigger word. The trigger types and their ranges follow
// the original system; the register encodings, the waiting of the special
// triggers and the suppression during inhibit are this design's choices.
// Lint note: rst_n also appears in the assertion's disable condition, so
// a linter sees it used both as an asynchronous reset and as data.
module high_level_logic
  import dc_trigger_pkg::*;
#(
  parameter int unsigned N       = 32,
  parameter int unsigned FR_UNIT_CYC = FR_UNIT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         inh,
  input  hll_cfg_t     cfg,
  output logic         fire,
  output logic [3:0]   special,
  output logic [N-1:0] blocked
);
  localparam int unsigned PW = $clog2(FR_UNIT_CYC);

  logic [5:0]  win_cnt, fu_cnt;
  logic        cit_pend, fu_armed, fr_pend, ir_pend, inh_q;
  logic [PW-1:0] fr_pre;
  logic [15:0] fr_cnt;
  logic [N-1:0] fresh, blocked_n;
  logic        in_win, allowed, cam_new, fu_due, fire_d, fr_tick;
  logic [3:0]  special_d;

  always_comb begin
    fresh   = req & ~blocked;
    cam_new = |fresh;
    in_win  = (win_cnt != '0);
    allowed = !inh && !in_win;
    fu_due  = cfg.followup_en && fu_armed && (fu_cnt >= 6'(cfg.followup) + 6'd2)
              && |(req & blocked);
    fire_d  = allowed && (cam_new || cit_pend || fu_due || fr_pend || ir_pend);
    special_d = '0;
    special_d[SP_FIXED]  = fr_pend;
    special_d[SP_FOLLOW] = fu_due;
    special_d[SP_CIT]    = cit_pend;
    special_d[SP_INHREL] = ir_pend;
    // CAMs that are active now and are consumed: by a trigger, by the dead
    // time, by a delayed close-in-time trigger, or by the inhibit
    if (fire_d || inh || (in_win && cfg.win_mode != WIN_OFF))
      blocked_n = (blocked | req) & req;
    else
      blocked_n = blocked & req;
    fr_tick = cfg.fixed_en && !inh && (int'(fr_pre) == FR_UNIT_CYC-1)
              && (fr_cnt == cfg.fixed_period);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blocked <= '0; win_cnt <= '0; fu_cnt <= '0; cit_pend <= 1'b0;
      fu_armed <= 1'b0; fr_pend <= 1'b0; ir_pend <= 1'b0; inh_q <= 1'b1;
      fr_pre <= '0; fr_cnt <= '0; fire <= 1'b0; special <= '0;
    end else begin
      fire    <= fire_d;
      special <= fire_d ? special_d : '0;
      blocked <= blocked_n;
      inh_q   <= inh;

      // window / dead time after a trigger
      if (fire_d) begin
        unique case (cfg.win_mode)
          WIN_CIT:  win_cnt <= 6'(cfg.window) + 6'd1;
          WIN_DEAD: win_cnt <= 6'(cfg.window);
          default:  win_cnt <= '0;
        endcase
      end else if (in_win) win_cnt <= win_cnt - 1'b1;

      // close in time: remember an activation inside the window
      if (fire_d) cit_pend <= 1'b0;
      else if (in_win && !inh && cfg.win_mode == WIN_CIT && cam_new) cit_pend <= 1'b1;

      // follow-up timer, counts cycles since the last trigger
      if (fire_d) begin
        fu_cnt <= 6'd1; fu_armed <= 1'b1;
      end else begin
        if (fu_cnt != '1) fu_cnt <= fu_cnt + 1'b1;
        if (!(|(req & blocked))) fu_armed <= 1'b0;
      end

      // fixed rate trigger
      if (!cfg.fixed_en || inh) begin
        fr_pre <= '0; fr_cnt <= '0;
      end else if (int'(fr_pre) == FR_UNIT_CYC-1) begin
        fr_pre <= '0;
        fr_cnt <= (fr_cnt == cfg.fixed_period) ? '0 : fr_cnt + 1'b1;
      end else fr_pre <= fr_pre + 1'b1;
      if (fire_d) fr_pend <= 1'b0;
      if (fr_tick) fr_pend <= 1'b1;

      // inhibit release trigger
      if (fire_d) ir_pend <= 1'b0;
      if (inh_q && !inh && cfg.inh_release_en) ir_pend <= 1'b1;
    end
  end

  a_fire_one_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    fire |=> !fire || $past(fire_d)) else $error("high_level_logic: fire stuck");
endmodule
