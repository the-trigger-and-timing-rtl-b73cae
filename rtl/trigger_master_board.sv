// trigger_master_board -- FPGA firmware of the Trigger Master Board (TMB).
//
// The TMB takes the 8-bit outputs of up to four Trigger Boards and seven
// external trigger inputs and makes the trigger decision. Data flow, one
// 16 ns clock:
//   * external inputs: iss with a 16 ns sync clock, then a settable delay
//     (0..15 cycles) per input; TB inputs are registered once;
//   * input status (39 bits: TB0[8] TB1[8] TB2[8] TB3[8] EXT[7]) goes to a
//     31-stage delay line whose selected tap is stored with each event;
//     the record is written when the trigger leaves the trigger 1 delay,
//     so the tap that shows the deciding cycle grows with tr1_delay and,
//     as on the original board, is found by tuning;
//   * masked OR: the OR of the inputs enabled by or_mask is added to the
//     39 inputs as a 40th CAM input; 32 CAMs (cam_tlu) follow. This is how
//     a CAM (an AND) can use an OR of several inputs, for example
//     "muon in TB A or TB B";
//   * trigger 1: per-CAM prescaler (cam_scaler), trigger 1 mask, OR and
//     the high level logic (re-arm rule, follow-up, close-in-time or dead
//     time, fixed rate, inhibit release), then a 0..17 cycle delay
//     (up to 272 ns) to the TR1 output;
//   * trigger 2: masked OR of the CAMs, delayed to leave with TR1;
//   * trigger word: CAM 0..27 over the last four cycles with four masks,
//     plus the four special trigger bits 28..31;
//   * with every trigger 1: the TA outputs pulse for one cycle, the trigger
//     word and event number outputs take the event's values and one record
//     goes to the 128-event FIFO. Record layout, LSB first:
//     IS[39] | CAM[32] | SCALER[32x16] | CLOCK[32] | EvNo[32] | TW[32];
//   * clock counter since the inhibit release and the OV sync pulse at its
//     wrap (every 68.72 s); INH output from a software register.
// Timing from a CAM output change (cycle t): decision in t, the high level
// logic's registered fire in t+1. The fire pulse and its special bits go
// through the trigger 1 delay (tr1_delay cycles); when they come out, in
// t+1+tr1_delay, the trigger word is taken from the shift registers, so
// the delay also lets flags that settle a few cycles after the decision
// (for example a multiplicity condition one register later) enter the
// word. TA, TW and EvNo change in t+2+tr1_delay, TR1 pulses in
// t+3+tr1_delay: TA, TW and EvNo lead TR1 by one 16 ns cycle. The
// structure follows the original board; the register encodings, delay
// depths, record layout, pulse widths, the sampling point of the trigger
// word and its one-cycle lead over TR1 are choices of this design.
// Lint notes: the ISS latched and rate outputs of the external inputs,
// the OR-of-four CAM outputs and the high level logic's blocked vector
// are left unconnected on purpose (the master board has no rate counters
// or 8-bit CAM output); rst_n is reported as both synchronous and
// asynchronous because of the submodules above.
module trigger_master_board
  import dc_trigger_pkg::*;
#(
  parameter int unsigned DEPTH   = FIFO_DEPTH,
  parameter int unsigned FR_UNIT_CYC = FR_UNIT,
  parameter int unsigned CLK_W   = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [N_TB-1:0][N_TBOUT-1:0]   tb_in,
  input  logic [N_EXT-1:0]               ext_in,
  input  tmb_cfg_t                       cfg,
  output logic                           tr1,
  output logic                           tr2,
  output logic [N_TB-1:0]                ta,
  output logic                           inh,
  output logic [31:0]                    tw,
  output logic [31:0]                    evno,
  output logic                           ov_sync,
  output logic [N_CAM-1:0]               cam_out,
  output logic [CLK_W-1:0]               clk_count,
  input  logic                           fifo_rd,
  output logic [TMB_REC_W-1:0]           fifo_data,
  output logic                           fifo_empty,
  output logic                           fifo_full,
  output logic [15:0]                    fifo_dropped
);
  // ---------------- inputs and input status ----------------
  logic [N_TB-1:0][N_TBOUT-1:0] tb_q;
  logic [N_EXT-1:0]             ext_latched, ext_sync, ext_irc, ext_d;
  logic [N_IS_TMB-1:0]          is_vec, is_del;
  logic                         masked_or;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tb_q <= '0; inh <= 1'b1;
    end else begin
      tb_q <= tb_in; inh <= cfg.inhibit;
    end
  end

  iss #(.N(N_EXT)) u_iss (
    .clk, .rst_n, .sync_ce(1'b1), .disc(ext_in),
    .latched(ext_latched), .sync(ext_sync), .irc_en(ext_irc)
  );

  for (genvar e = 0; e < N_EXT; e++) begin : g_ext
    programmable_delay #(.W(1), .DEPTH(TB_OUT_DEPTH)) u_dly (
      .clk, .rst_n, .din(ext_sync[e]), .sel(cfg.ext_delay[e]), .dout(ext_d[e])
    );
  end

  assign is_vec = {ext_d, tb_q};

  programmable_delay #(.W(N_IS_TMB), .DEPTH(TMB_IS_DEPTH)) u_is_dly (
    .clk, .rst_n, .din(is_vec), .sel(cfg.is_delay), .dout(is_del)
  );

  // ---------------- masked OR and CAMs ----------------
  logic [N_CAM/CAM_GROUP-1:0] cam_grp;

  assign masked_or = |(is_vec & cfg.or_mask);

  cam_tlu #(.N_IN(N_TLU_TMB), .N_CAM(N_CAM), .GROUP(CAM_GROUP)) u_cam (
    .clk, .rst_n, .in_sig({masked_or, is_vec}),
    .cam_use(cfg.cam_use), .cam_pol(cfg.cam_pol), .cam_inv(cfg.cam_inv),
    .cam_out, .grp_out(cam_grp)
  );

  // ---------------- trigger 1 ----------------
  logic [N_CAM-1:0]        scaled, blocked;
  logic [N_CAM-1:0][15:0]  scaler_cnt;
  logic                    fire;
  logic [3:0]              special;

  cam_scaler #(.N(N_CAM), .W(16)) u_scaler (
    .clk, .rst_n, .cam(cam_out), .factor(cfg.scale), .pass(scaled), .count(scaler_cnt)
  );

  high_level_logic #(.N(N_CAM), .FR_UNIT_CYC(FR_UNIT_CYC)) u_hll (
    .clk, .rst_n, .req(scaled & cfg.tr1_mask), .inh, .cfg(cfg.hll),
    .fire, .special, .blocked
  );

  // the decision and its special bits through the trigger 1 delay
  logic       fire_d, tr1_q;
  logic [3:0] special_d;

  programmable_delay #(.W(5), .DEPTH(TR1_DEPTH)) u_tr1_dly (
    .clk, .rst_n, .din({special, fire}), .sel(cfg.tr1_delay), .dout({special_d, fire_d})
  );

  // ---------------- trigger 2 ----------------
  trigger2_path #(.N(N_CAM), .DEPTH(TR1_DEPTH+HLL_LAT+1)) u_tr2 (
    .clk, .rst_n, .cam(cam_out), .mask(cfg.tr2_mask),
    .delay(5'(cfg.tr1_delay) + 5'(HLL_LAT)), .tr2
  );

  // ---------------- trigger word, event number, clock ----------------
  logic [N_TW_CAM-1:0] tw_bits;
  logic [31:0]         tw_word, evno_cnt;
  logic [N_CAM-1:0]    cam_d1;

  trigger_word #(.N(N_TW_CAM), .STAGES(TW_STAGES)) u_tw (
    .clk, .rst_n, .cam(cam_out[N_TW_CAM-1:0]), .mask(cfg.tw_mask), .tw_bits
  );
  assign tw_word = {special_d, tw_bits};

  clock_counter #(.W(CLK_W)) u_clk (
    .clk, .rst_n, .run(!inh), .count(clk_count), .ov_sync
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tw <= '0; evno <= '0; evno_cnt <= '0; ta <= '0; cam_d1 <= '0;
      tr1_q <= 1'b0; tr1 <= 1'b0;
    end else begin
      cam_d1 <= cam_out;
      ta     <= {N_TB{fire_d}};
      tr1_q  <= fire_d;
      tr1    <= tr1_q;
      if (fire_d) begin
        tw       <= tw_word;
        evno     <= evno_cnt;
        evno_cnt <= evno_cnt + 1'b1;
      end
    end
  end

  event_fifo #(.W(TMB_REC_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en(fire_d),
    .wr_data({tw_word, evno_cnt, 32'(clk_count), scaler_cnt, cam_d1, is_del}),
    .rd_en(fifo_rd), .rd_data(fifo_data), .empty(fifo_empty), .full(fifo_full),
    .dropped(fifo_dropped)
  );
endmodule
