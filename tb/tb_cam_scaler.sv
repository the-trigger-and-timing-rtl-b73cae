// tb_cam_scaler -- random CAM activations (levels of 1..6 cycles) on 8
// channels with scaling factors 0, 1, 2, 3, 5, 10, 100, 1000; pass and
// counter values are compared with a model every cycle, and the number of
// passed activations per channel must be activations / factor.
`timescale 1ns/1ps
module tb_cam_scaler;
  localparam int N = 8, W = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] cam = '0, pass;
  logic [N-1:0][W-1:0] factor, count;
  int m_cnt [N] = '{default: 0};
  bit m_sel [N] = '{default: 0};
  bit prev [N] = '{default: 0};
  int n_act [N] = '{default: 0};
  int n_pass [N] = '{default: 0};
  int checks = 0, failures = 0;
  int remain [N] = '{default: 0};

  cam_scaler #(.N(N), .W(W)) dut (.clk, .rst_n, .cam, .factor, .pass, .count);
  always #8 clk = ~clk;

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    factor[0] = 0; factor[1] = 1; factor[2] = 2; factor[3] = 3;
    factor[4] = 5; factor[5] = 10; factor[6] = 100; factor[7] = 1000;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 40000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (remain[i] > 0) remain[i]--;
        else if (cam[i]) cam[i] = 0;
        else if ($urandom_range(0, 2) == 0) begin cam[i] = 1; remain[i] = $urandom_range(0, 5); end
      end
      #1;
      for (int i = 0; i < N; i++) begin
        bit rise, hit, expp;
        rise = cam[i] && !prev[i];
        hit  = (factor[i] <= 1) || (m_cnt[i] + 1 >= factor[i]);
        expp = cam[i] && (rise ? hit : m_sel[i]);
        checks++;
        if (pass[i] != expp || int'(count[i]) != m_cnt[i]) begin
          failures++; if (failures < 8) $display("cyc %0d ch %0d pass %b exp %b cnt %0d exp %0d", cyc, i, pass[i], expp, count[i], m_cnt[i]);
        end
        if (rise) begin
          n_act[i]++;
          if (hit) n_pass[i]++;
          m_sel[i] = hit;
          m_cnt[i] = hit ? 0 : m_cnt[i] + 1;
        end
        prev[i] = cam[i];
      end
    end
    for (int i = 0; i < N; i++) begin
      int f; f = (factor[i] <= 1) ? 1 : int'(factor[i]);
      checks++;
      if (n_pass[i] != n_act[i] / f) begin failures++; $display("ch %0d passed %0d of %0d", i, n_pass[i], n_act[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
