// tb_input_rate_counters -- random count enables, hold and clear on 8
// counters of 4 bits (to reach saturation); a testbench model of each
// counter is compared every cycle.
`timescale 1ns/1ps
module tb_input_rate_counters;
  localparam int N = 8, W = 4;
  logic clk = 0, rst_n = 0, hold = 0, clr = 0;
  logic [N-1:0] en = '0;
  logic [N-1:0][W-1:0] counts;
  int model [N] = '{default: 0};
  int checks = 0, failures = 0, n_sat = 0;

  input_rate_counters #(.N(N), .W(W)) dut (.clk, .rst_n, .hold, .count_en(en), .clr, .counts);
  always #8 clk = ~clk;

  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      en   = N'($urandom);
      clr  = ($urandom_range(0, 40) == 0);
      hold = (cyc > 2500 && cyc < 2520);
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin
        if (hold) model[i] = 0;
        else if (clr) model[i] = en[i];
        else if (en[i] && model[i] < (1 << W) - 1) model[i]++;
        if (model[i] == (1 << W) - 1) n_sat++;
        checks++;
        if (int'(counts[i]) != model[i]) begin
          failures++;
          if (failures < 8) $display("cyc %0d ch %0d got %0d exp %0d", cyc, i, counts[i], model[i]);
        end
      end
    end
    checks++; if (n_sat == 0) begin failures++; $display("saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
