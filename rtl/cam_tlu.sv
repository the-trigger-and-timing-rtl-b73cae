// cam_tlu -- Trigger Logic Unit made of N_CAM "content addressable memory"
// (CAM) units.
//
// Each CAM is a software-defined AND: for every input, use[c][i] says
// whether input i takes part and pol[c][i] whether it must be active (1)
// or inactive (0). inv[c] negates the result. A CAM with no input selected
// is off. Any input can go to any CAM. The CAM outputs are registered (one
// 16 ns cycle). grp_out ORs consecutive groups of GROUP CAMs: on the
// Trigger Board CAM 0-3 give output bit 0, CAM 4-7 bit 1, ... CAM 28-31
// bit 7. OR conditions are thus made by spreading terms over the CAMs of
// one group. The use/pol/inv encoding and the output register are choices
// of this design.
module cam_tlu #(
  parameter int unsigned N_IN  = 45,
  parameter int unsigned N_CAM = 32,
  parameter int unsigned GROUP = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_IN-1:0]            in_sig,
  input  logic [N_CAM-1:0][N_IN-1:0] cam_use,
  input  logic [N_CAM-1:0][N_IN-1:0] cam_pol,
  input  logic [N_CAM-1:0]           cam_inv,
  output logic [N_CAM-1:0]           cam_out,
  output logic [N_CAM/GROUP-1:0]     grp_out
);
  logic [N_CAM-1:0] cam_d;

  always_comb begin
    for (int c = 0; c < N_CAM; c++) begin
      logic match;
      // every selected input equals its required polarity
      match = ((~(in_sig ^ cam_pol[c])) & cam_use[c]) == cam_use[c];
      cam_d[c] = (cam_use[c] != '0) && (match ^ cam_inv[c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cam_out <= '0;
    else        cam_out <= cam_d;
  end

  always_comb begin
    for (int g = 0; g < N_CAM/GROUP; g++)
      grp_out[g] = |cam_out[g*GROUP +: GROUP];
  end
endmodule
