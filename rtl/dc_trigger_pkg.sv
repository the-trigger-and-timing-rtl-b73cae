// dc_trigger_pkg -- constants and configuration records shared by the
// Trigger Board (TB) and Trigger Master Board (TMB) firmware.
//
// The sizes follow the Double Chooz trigger and timing system: 18 analogue
// group inputs per TB, each discriminated twice (A/low and B/high), four sum
// discriminators, 32 CAM units per board, 128-event FIFOs, a 16 ns system
// clock. The settings that the real boards expose over VME are gathered
// here into packed structs (tb_cfg_t, tmb_cfg_t, hll_cfg_t). The field
// encodings (for example "code + 2 cycles" for the follow-up time) are this
// design's own choice; only the ranges they cover come from the original
// system description.
package dc_trigger_pkg;

  // ---------------- Trigger Board ----------------
  localparam int unsigned N_CH      = 18;            // analogue group inputs
  localparam int unsigned N_SUM     = 4;             // sum discriminators
  localparam int unsigned N_IS_TB   = 2*N_CH+N_SUM;  // 40 input status bits
  localparam int unsigned N_MULT    = 4;             // 1 on A, 3 on B
  localparam int unsigned N_TLU_TB  = N_IS_TB+N_MULT+1; // + external NIM input = 45
  localparam int unsigned N_CAM     = 32;
  localparam int unsigned CAM_GROUP = 4;             // CAMs ORed per TB output bit
  localparam int unsigned N_TBOUT   = N_CAM/CAM_GROUP; // 8
  localparam int unsigned IRC_W     = 16;
  localparam int unsigned FIFO_DEPTH = 128;
  localparam int unsigned TB_IS_DEPTH  = 31;         // input status delay taps
  localparam int unsigned TB_OUT_DEPTH = 15;         // output / NIM / EX delay taps
  // TB event record: IS + IRC + TDC + EvNo
  localparam int unsigned TB_REC_W  = N_IS_TB + N_IS_TB*IRC_W + 32 + 32; // 744

  // TLU input positions on the TB
  localparam int unsigned TLU_A     = 0;
  localparam int unsigned TLU_B     = N_CH;
  localparam int unsigned TLU_SUM   = 2*N_CH;
  localparam int unsigned TLU_MULTA = N_IS_TB;
  localparam int unsigned TLU_MULTB = N_IS_TB+1;
  localparam int unsigned TLU_EX    = N_IS_TB+N_MULT;

  typedef enum logic [1:0] {
    TA_EXTERNAL = 2'd0,   // TA input from the TMB
    TA_NIM      = 2'd1,   // one of the three NIM outputs (stand-alone)
    TA_GATE     = 2'd2    // gate timer (stand-alone)
  } ta_src_e;

  typedef struct packed {
    logic [N_CAM-1:0][N_TLU_TB-1:0] cam_use;   // input takes part in the AND
    logic [N_CAM-1:0][N_TLU_TB-1:0] cam_pol;   // 1: input must be active, 0: inactive
    logic [N_CAM-1:0]               cam_inv;   // negate the CAM result
    logic [N_MULT-1:0][N_CH-1:0]    mult_mask; // [0] on A channels, [1..3] on B
    logic [N_MULT-1:0][4:0]         mult_thr;  // minimum active groups, 0 = off
    logic [3:0]                     out_delay; // TB_Out delay, 16 ns steps
    logic [3:0]                     nim_delay; // NIM N1..N3 delay
    logic [3:0]                     ex_delay;  // external NIM input delay
    logic [4:0]                     is_delay;  // input status tap for the FIFO
    ta_src_e                        ta_src;
    logic [1:0]                     ta_nim_sel;  // which NIM output gives TA
    logic [31:0]                    gate_period; // gate timer, cycles (0 = off)
    logic                           sw_disc_en;  // discriminators set by software
    logic [N_IS_TB-1:0]             sw_disc;
    logic                           iss_disconnect; // ISS inputs to the TLU forced 0
  } tb_cfg_t;

  // ---------------- Trigger Master Board ----------------
  localparam int unsigned N_TB      = 4;
  localparam int unsigned N_EXT     = 7;
  localparam int unsigned N_IS_TMB  = N_TB*N_TBOUT + N_EXT;   // 39
  localparam int unsigned N_TLU_TMB = N_IS_TMB + 1;           // + masked OR
  localparam int unsigned N_TW_CAM  = 28;
  localparam int unsigned TW_STAGES = 4;
  localparam int unsigned TMB_IS_DEPTH = 31;
  localparam int unsigned TR1_DEPTH = 17;                     // 272 ns
  localparam int unsigned FR_UNIT   = 1024;                   // 16.384 us in cycles
  localparam int unsigned HLL_LAT   = 3;                      // CAM -> TR1 at zero delay
  // TMB event record: IS + CAM + scaler counts + clock counter + EvNo + TW
  localparam int unsigned TMB_REC_W = N_IS_TMB + N_CAM + N_CAM*16 + 32 + 32 + 32; // 679

  // special trigger bits of the trigger word (bits 28..31)
  localparam int unsigned SP_FIXED  = 0;
  localparam int unsigned SP_FOLLOW = 1;
  localparam int unsigned SP_CIT    = 2;
  localparam int unsigned SP_INHREL = 3;

  typedef enum logic [1:0] {
    WIN_OFF  = 2'd0,
    WIN_CIT  = 2'd1,   // close in time: delay a second trigger to the window end
    WIN_DEAD = 2'd2    // dead time: drop triggers inside the window
  } win_mode_e;

  typedef struct packed {
    logic        followup_en;
    logic [4:0]  followup;      // (code+2) cycles: 32..528 ns
    win_mode_e   win_mode;
    logic [4:0]  window;        // CIT: (code+2) cycles 32..528 ns; dead: (code+1) 16..512 ns
    logic        fixed_en;
    logic [15:0] fixed_period;  // (code+1) x 16.384 us: up to 1.0738 s
    logic        inh_release_en;
  } hll_cfg_t;

  typedef struct packed {
    logic [N_IS_TMB-1:0]             or_mask;   // masked OR enables
    logic [N_CAM-1:0][N_TLU_TMB-1:0] cam_use;
    logic [N_CAM-1:0][N_TLU_TMB-1:0] cam_pol;
    logic [N_CAM-1:0]                cam_inv;
    logic [N_EXT-1:0][3:0]           ext_delay;
    logic [4:0]                      is_delay;
    logic [N_CAM-1:0][15:0]          scale;     // scaling factors, 0/1 = every one
    logic [N_CAM-1:0]                tr1_mask;  // 1 = CAM enabled for trigger 1
    logic [N_CAM-1:0]                tr2_mask;
    logic [TW_STAGES-1:0][N_TW_CAM-1:0] tw_mask; // TWmask 1..4, 1 = bit kept
    hll_cfg_t                        hll;
    logic [4:0]                      tr1_delay; // 0..17 cycles
    logic                            inhibit;
  } tmb_cfg_t;

endpackage
