// dc_trigger_system -- the Double Chooz trigger and timing system.
//
// Three Trigger Boards and one Trigger Master Board on a common 62.5 MHz
// (16 ns) clock:
//   TB A (index 0) and TB B (index 1) each see half of the inner-detector
//     photomultipliers, grouped so that both watch the same volume; they
//     are two independent copies of the same trigger, ORed on the TMB;
//   TB V (index 2) sees the 18 PMT groups of the inner veto;
//   the TMB takes their 8-bit outputs on inputs 0..2 and seven external
//     trigger inputs; its fourth TB input is free and comes out as a port.
// The TMB's trigger acknowledge (TA) outputs 0..2 and its inhibit (INH)
// go back to the three boards; TA 3 comes out for the free slot. Trigger 1
// (TR1), trigger 2 (TR2), trigger word (TW), event number (EvNo), INH and
// the OV sync pulse go to the data acquisition. The clock itself comes
// from outside (oscillator and fan-outs are not logic). All settings are
// ports (tb_cfg per board, tmb_cfg) standing for the VME registers, and so
// are the FIFO read ports. The discriminators and analogue sums are
// outside this RTL: their outputs are the disc_* inputs.
// Lint notes: the per-CAM outputs of the Trigger Boards are not needed at
// this level and stay unconnected; rst_n is reported as both synchronous
// and asynchronous because of the submodules.
module dc_trigger_system
  import dc_trigger_pkg::*;
(
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [2:0][N_CH-1:0]                disc_a,
  input  logic [2:0][N_CH-1:0]                disc_b,
  input  logic [2:0][N_SUM-1:0]               disc_sum,
  input  logic [2:0]                          tb_nim_in,
  input  logic [N_TBOUT-1:0]                  free_tb_in,
  input  logic [N_EXT-1:0]                    ext_in,
  input  tb_cfg_t [2:0]                       tb_cfg,
  input  tmb_cfg_t                            tmb_cfg,
  output logic                                tr1,
  output logic                                tr2,
  output logic [31:0]                         tw,
  output logic [31:0]                         evno,
  output logic                                inh,
  output logic                                ov_sync,
  output logic                                free_ta,
  output logic [2:0][N_TBOUT-1:0]             tb_out,
  output logic [2:0][2:0]                     tb_nim_out,
  output logic [2:0][31:0]                    tb_evno,
  input  logic [2:0]                          tb_fifo_rd,
  output logic [2:0][TB_REC_W-1:0]            tb_fifo_data,
  output logic [2:0]                          tb_fifo_empty,
  output logic [2:0]                          tb_fifo_full,
  output logic [2:0][15:0]                    tb_fifo_dropped,
  input  logic                                tmb_fifo_rd,
  output logic [TMB_REC_W-1:0]                tmb_fifo_data,
  output logic                                tmb_fifo_empty,
  output logic                                tmb_fifo_full,
  output logic [15:0]                         tmb_fifo_dropped,
  output logic [N_CAM-1:0]                    tmb_cam,
  output logic [31:0]                         clk_count
);
  logic [N_TB-1:0] ta;
  logic [2:0][N_CAM-1:0] tb_cam;

  for (genvar b = 0; b < 3; b++) begin : g_tb
    trigger_board u_tb (
      .clk, .rst_n,
      .disc_a(disc_a[b]), .disc_b(disc_b[b]), .disc_sum(disc_sum[b]),
      .nim_in(tb_nim_in[b]), .ta_in(ta[b]), .inh,
      .cfg(tb_cfg[b]),
      .tb_out(tb_out[b]), .nim_out(tb_nim_out[b]), .cam_out(tb_cam[b]),
      .fifo_rd(tb_fifo_rd[b]), .fifo_data(tb_fifo_data[b]),
      .fifo_empty(tb_fifo_empty[b]), .fifo_full(tb_fifo_full[b]),
      .fifo_dropped(tb_fifo_dropped[b]), .evno(tb_evno[b])
    );
  end

  trigger_master_board u_tmb (
    .clk, .rst_n,
    .tb_in({free_tb_in, tb_out[2], tb_out[1], tb_out[0]}),
    .ext_in, .cfg(tmb_cfg),
    .tr1, .tr2, .ta, .inh, .tw, .evno, .ov_sync,
    .cam_out(tmb_cam), .clk_count,
    .fifo_rd(tmb_fifo_rd), .fifo_data(tmb_fifo_data),
    .fifo_empty(tmb_fifo_empty), .fifo_full(tmb_fifo_full),
    .fifo_dropped(tmb_fifo_dropped)
  );

  assign free_ta = ta[3];
endmodule
