// tb_programmable_delay -- random data through a 17-deep delay line; for
// every tap setting 0..17 (and one beyond, clipped) the output must equal
// the input of exactly sel cycles before.
`timescale 1ns/1ps
module tb_programmable_delay;
  localparam int W = 8, D = 17;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] din = '0, dout;
  logic [4:0] sel = '0;
  logic [W-1:0] hist [0:63];
  int checks = 0, failures = 0;

  programmable_delay #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .din, .sel, .dout);
  always #8 clk = ~clk;

  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s <= D + 1; s++) begin
      int eff; eff = (s > D) ? D : s;
      @(negedge clk); sel = 5'(s);
      for (int cyc = 0; cyc < 100; cyc++) begin
        @(negedge clk);
        din = W'($urandom);
        for (int k = 63; k > 0; k--) hist[k] = hist[k-1];
        hist[0] = din;
        #1;
        if (cyc > D + 1) begin
          checks++;
          if (dout !== hist[eff]) begin failures++; if (failures < 8) $display("sel %0d got %h exp %h", s, dout, hist[eff]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
