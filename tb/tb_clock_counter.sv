// tb_clock_counter -- 10-bit counter (so that it wraps quickly): counts
// while run is high, is held at 0 while run is low, and gives exactly one
// ov_sync pulse per 2^10 running cycles, at the wrap.
`timescale 1ns/1ps
module tb_clock_counter;
  localparam int W = 10;
  logic clk = 0, rst_n = 0, run = 0, ov;
  logic [W-1:0] count;
  int checks = 0, failures = 0, model = 0, n_ov = 0, last_ov = -1;

  clock_counter #(.W(W)) dut (.clk, .rst_n, .run, .count, .ov_sync(ov));
  always #8 clk = ~clk;

  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      bit exp_ov;
      @(negedge clk);
      run = !(cyc >= 100 && cyc < 150);
      @(posedge clk); #1;
      exp_ov = run && (model == (1 << W) - 1);
      model = run ? (model + 1) % (1 << W) : 0;
      checks++;
      if (int'(count) != model || ov != exp_ov) begin
        failures++; if (failures < 8) $display("cyc %0d count %0d exp %0d ov %b exp %b", cyc, count, model, ov, exp_ov);
      end
      if (ov) begin
        n_ov++;
        if (last_ov >= 0) begin checks++; if (cyc - last_ov != (1 << W)) failures++; end
        last_ov = cyc;
      end
    end
    checks++; if (n_ov < 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
