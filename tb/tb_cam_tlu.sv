// tb_cam_tlu -- 32 CAMs on 45 inputs with random use/polarity/inversion
// settings (few inputs per CAM so that conditions are met often); each
// CAM output and each OR of four is compared with a model one cycle after
// the inputs.
`timescale 1ns/1ps
module tb_cam_tlu;
  localparam int N_IN = 45, N_CAM = 32, G = 4;
  logic clk = 0, rst_n = 0;
  logic [N_IN-1:0] in_sig = '0;
  logic [N_CAM-1:0][N_IN-1:0] use_m, pol;
  logic [N_CAM-1:0] inv, cam_out, exp_cam;
  logic [N_CAM/G-1:0] grp;
  int checks = 0, failures = 0, n_on = 0;

  cam_tlu #(.N_IN(N_IN), .N_CAM(N_CAM), .GROUP(G)) dut (.clk, .rst_n, .in_sig,
    .cam_use(use_m), .cam_pol(pol), .cam_inv(inv), .cam_out, .grp_out(grp));
  always #8 clk = ~clk;

  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    use_m = '0; pol = '0; inv = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      if (cyc % 200 == 0)
        for (int c = 0; c < N_CAM; c++) begin
          use_m[c] = '0;
          if (c % 7 != 6)   // some CAMs stay empty (off)
            for (int k = 0; k < 3; k++) use_m[c][$urandom_range(0, N_IN-1)] = 1'b1;
          pol[c] = {$urandom, $urandom};
          inv[c] = ($urandom_range(0, 5) == 0);
        end
      in_sig = {$urandom, $urandom};
      for (int c = 0; c < N_CAM; c++) begin
        bit all; all = 1;
        for (int i = 0; i < N_IN; i++) if (use_m[c][i] && in_sig[i] != pol[c][i]) all = 0;
        exp_cam[c] = (use_m[c] != 0) && (all ^ inv[c]);
      end
      @(posedge clk); #1;
      checks++;
      if (cam_out != exp_cam) begin failures++; if (failures < 8) $display("cyc %0d cam %h exp %h", cyc, cam_out, exp_cam); end
      for (int g = 0; g < N_CAM/G; g++) begin
        checks++;
        if (grp[g] != |exp_cam[g*G +: G]) failures++;
      end
      n_on += $countones(exp_cam);
    end
    checks++; if (n_on == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
