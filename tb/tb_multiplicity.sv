// tb_multiplicity -- three conditions on 18 channels with random channel
// masks and thresholds (including 0 = off) against a popcount model,
// checked one cycle after the inputs.
`timescale 1ns/1ps
module tb_multiplicity;
  localparam int N = 18, M = 3;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] sync = '0;
  logic [M-1:0][N-1:0] mask;
  logic [M-1:0][4:0] thr;
  logic [M-1:0] mout, exp_q;
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0;

  multiplicity #(.N(N), .M(M)) dut (.clk, .rst_n, .sync, .ch_mask(mask), .thr, .mult_out(mout));
  always #8 clk = ~clk;

  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    mask = '0; thr = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      if (cyc % 100 == 0)
        for (int m = 0; m < M; m++) begin
          mask[m] = N'($urandom);
          thr[m]  = 5'($urandom_range(0, 12));
        end
      sync = N'($urandom) & N'($urandom);
      for (int m = 0; m < M; m++) begin
        int c; c = 0;
        for (int i = 0; i < N; i++) if (sync[i] && mask[m][i]) c++;
        exp_q[m] = (thr[m] != 0) && (c >= thr[m]);
      end
      @(posedge clk); #1;
      for (int m = 0; m < M; m++) begin
        checks++;
        if (mout[m] != exp_q[m]) begin failures++; if (failures < 8) $display("cyc %0d m %0d got %b exp %b", cyc, m, mout[m], exp_q[m]); end
        if (exp_q[m]) n_hit++; else n_miss++;
      end
    end
    checks++; if (n_hit == 0 || n_miss == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
