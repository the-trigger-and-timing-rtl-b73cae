// tb_trigger2_path -- random CAM vectors, random trigger 2 mask and delay
// settings; tr2 must equal the masked OR of exactly `delay` cycles before.
`timescale 1ns/1ps
module tb_trigger2_path;
  localparam int N = 32, D = 20;
  logic clk = 0, rst_n = 0, tr2;
  logic [N-1:0] cam = '0, mask = '0;
  logic [4:0] delay = '0;
  bit hist [0:63];
  int checks = 0, failures = 0, n_one = 0;

  trigger2_path #(.N(N), .DEPTH(D)) dut (.clk, .rst_n, .cam, .mask, .delay, .tr2);
  always #8 clk = ~clk;

  initial begin #600000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int k = 0; k < 64; k++) hist[k] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int blk = 0; blk < 30; blk++) begin
      @(negedge clk);
      delay = 5'($urandom_range(0, D));
      mask  = $urandom & $urandom;
      for (int cyc = 0; cyc < 100; cyc++) begin
        @(negedge clk);
        cam = $urandom & $urandom & $urandom;
        for (int k = 63; k > 0; k--) hist[k] = hist[k-1];
        hist[0] = |(cam & mask);
        #1;
        if (cyc > D + 1) begin
          checks++;
          if (tr2 != hist[delay]) begin failures++; if (failures < 8) $display("delay %0d got %b", delay, tr2); end
          if (tr2) n_one++;
        end
      end
    end
    checks++; if (n_one == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
