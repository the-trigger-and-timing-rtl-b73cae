// trigger_board -- FPGA firmware of one Trigger Board (TB).
//
// Inputs are the asynchronous outputs of the board's discriminators: for
// each of the 18 group inputs a low (A) and a high (B) threshold, and four
// thresholds on the analogue sum, plus the external NIM input EX. Data flow
// (one 16 ns system clock, clk):
//   1. iss: 41 channels (40 discriminators + EX) synchronised on a 32 ns
//      sync clock (enable toggling every cycle) -> sync signals >= 64 ns;
//   2. multiplicity: one condition on the A channels, three on the B
//      channels (settable channel mask and minimum number of groups);
//   3. cam_tlu: 32 CAMs over 45 inputs (A[18] B[18] SUM[4] multA multB[3]
//      EX), CAM 4k..4k+3 ORed into output bit k;
//   4. the 8-bit TB output goes to the master board after a delay of
//      0..15 x 16 ns; its lowest three bits go to the NIM outputs N1..N3
//      with their own delay;
//   5. on every trigger acknowledge (TA, rising edge) one event record is
//      written to a 128-event FIFO: the input status from a settable tap of
//      a 31-stage delay line, the 40 input rate counters (16 bit, counts
//      since the previous TA), the time difference counter (cycles since
//      the previous TA, 32 bit) and the event number (32 bit).
//   Record layout, LSB first: IS[40] | IRC[40x16] | TDC[32] | EvNo[32].
// TA comes from the master board, or in stand-alone use from a chosen NIM
// output or from the gate timer (a TA every gate_period cycles). While INH
// is active the board is disabled: outputs 0, TA ignored, counters held at
// 0. Test modes: software values replace the discriminators, or the ISS
// side of the TLU inputs is disconnected (forced 0).
// Latency from a discriminator edge to TB_Out with zero delay: up to one
// 32 ns sync period to the sync signal, one cycle for the CAM register
// (two for a multiplicity term). The structure follows the original board;
// delay depths, the record layout, the event-number convention (first
// event 0), the saturation of the rate counters and the INH behaviour are
// choices of this design.
// Lint notes: the latched signals of the ISS (front-panel indication on
// the original board) and the rate enable of the EX input are not used
// here; rst_n is reported as both synchronous and asynchronous because
// of the submodules above.
module trigger_board
  import dc_trigger_pkg::*;
#(
  parameter int unsigned DEPTH = FIFO_DEPTH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_CH-1:0]     disc_a,
  input  logic [N_CH-1:0]     disc_b,
  input  logic [N_SUM-1:0]    disc_sum,
  input  logic                nim_in,
  input  logic                ta_in,
  input  logic                inh,
  input  tb_cfg_t             cfg,
  output logic [N_TBOUT-1:0]  tb_out,
  output logic [2:0]          nim_out,
  output logic [N_CAM-1:0]    cam_out,
  input  logic                fifo_rd,
  output logic [TB_REC_W-1:0] fifo_data,
  output logic                fifo_empty,
  output logic                fifo_full,
  output logic [15:0]         fifo_dropped,
  output logic [31:0]         evno
);
  // ---------------- input synchronisation ----------------
  logic                 sync_ce;
  logic [N_IS_TB-1:0]   disc_src;
  logic [N_IS_TB:0]     iss_latched, iss_sync, iss_irc;
  logic [N_IS_TB-1:0]   sync_is;
  logic                 ex_sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_ce <= 1'b0;
    else        sync_ce <= ~sync_ce;
  end

  assign disc_src = cfg.sw_disc_en ? cfg.sw_disc : {disc_sum, disc_b, disc_a};

  iss #(.N(N_IS_TB+1)) u_iss (
    .clk, .rst_n, .sync_ce,
    .disc({nim_in, disc_src}),
    .latched(iss_latched), .sync(iss_sync), .irc_en(iss_irc)
  );
  assign sync_is = iss_sync[N_IS_TB-1:0];

  // ---------------- multiplicities ----------------
  logic [0:0] mult_a;
  logic [2:0] mult_b;
  logic [N_CH-1:0] tlu_a, tlu_b;
  logic [N_SUM-1:0] tlu_sum;

  assign tlu_a   = cfg.iss_disconnect ? '0 : sync_is[TLU_A +: N_CH];
  assign tlu_b   = cfg.iss_disconnect ? '0 : sync_is[TLU_B +: N_CH];
  assign tlu_sum = cfg.iss_disconnect ? '0 : sync_is[TLU_SUM +: N_SUM];

  multiplicity #(.N(N_CH), .M(1)) u_mult_a (
    .clk, .rst_n, .sync(tlu_a), .ch_mask(cfg.mult_mask[0]), .thr(cfg.mult_thr[0]),
    .mult_out(mult_a)
  );
  multiplicity #(.N(N_CH), .M(3)) u_mult_b (
    .clk, .rst_n, .sync(tlu_b), .ch_mask(cfg.mult_mask[3:1]), .thr(cfg.mult_thr[3:1]),
    .mult_out(mult_b)
  );

  // external NIM input: through the ISS, then a settable delay
  programmable_delay #(.W(1), .DEPTH(TB_OUT_DEPTH)) u_ex_dly (
    .clk, .rst_n, .din(iss_sync[N_IS_TB]), .sel(cfg.ex_delay), .dout(ex_sync)
  );

  // ---------------- trigger logic unit ----------------
  logic [N_TLU_TB-1:0] tlu_in;
  logic [N_TBOUT-1:0]  grp;

  assign tlu_in = {ex_sync, mult_b, mult_a, tlu_sum, tlu_b, tlu_a};

  cam_tlu #(.N_IN(N_TLU_TB), .N_CAM(N_CAM), .GROUP(CAM_GROUP)) u_tlu (
    .clk, .rst_n, .in_sig(tlu_in),
    .cam_use(cfg.cam_use), .cam_pol(cfg.cam_pol), .cam_inv(cfg.cam_inv),
    .cam_out, .grp_out(grp)
  );

  // ---------------- outputs ----------------
  logic [N_TBOUT-1:0] out_d;
  logic [2:0]         nim_d;

  programmable_delay #(.W(N_TBOUT), .DEPTH(TB_OUT_DEPTH)) u_out_dly (
    .clk, .rst_n, .din(grp), .sel(cfg.out_delay), .dout(out_d)
  );
  programmable_delay #(.W(3), .DEPTH(TB_OUT_DEPTH)) u_nim_dly (
    .clk, .rst_n, .din(grp[2:0]), .sel(cfg.nim_delay), .dout(nim_d)
  );
  assign tb_out  = inh ? '0 : out_d;
  assign nim_out = inh ? '0 : nim_d;

  // ---------------- trigger acknowledge ----------------
  logic [31:0] gate_cnt;
  logic        gate_tick, ta_sel, ta_q, ta_evt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gate_cnt <= '0;
    else if (inh || cfg.gate_period == '0 || gate_tick) gate_cnt <= '0;
    else gate_cnt <= gate_cnt + 1'b1;
  end
  assign gate_tick = !inh && cfg.gate_period != '0 && gate_cnt == cfg.gate_period - 1;

  always_comb begin
    unique case (cfg.ta_src)
      TA_NIM:  ta_sel = (cfg.ta_nim_sel == 2'd3) ? 1'b0 : nim_out[cfg.ta_nim_sel];
      TA_GATE: ta_sel = gate_tick;
      default: ta_sel = ta_in;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ta_q <= 1'b0;
    else        ta_q <= ta_sel;
  end
  assign ta_evt = ta_sel && !ta_q && !inh;

  // ---------------- event data ----------------
  logic [N_IS_TB-1:0]            is_del;
  logic [N_IS_TB-1:0][IRC_W-1:0] irc;
  logic [31:0]                   tdc;

  programmable_delay #(.W(N_IS_TB), .DEPTH(TB_IS_DEPTH)) u_is_dly (
    .clk, .rst_n, .din(sync_is), .sel(cfg.is_delay), .dout(is_del)
  );

  input_rate_counters #(.N(N_IS_TB), .W(IRC_W)) u_irc (
    .clk, .rst_n, .hold(inh),
    .count_en(iss_irc[N_IS_TB-1:0] & {N_IS_TB{sync_ce}}),
    .clr(ta_evt), .counts(irc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tdc <= '0; evno <= '0;
    end else if (inh) begin
      tdc <= '0;
    end else begin
      tdc <= ta_evt ? 32'd1 : tdc + 1'b1;
      if (ta_evt) evno <= evno + 1'b1;
    end
  end

  event_fifo #(.W(TB_REC_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en(ta_evt), .wr_data({evno, tdc, irc, is_del}),
    .rd_en(fifo_rd), .rd_data(fifo_data), .empty(fifo_empty), .full(fifo_full),
    .dropped(fifo_dropped)
  );
endmodule
