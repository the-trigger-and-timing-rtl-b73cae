// tb_trigger_word -- random CAM patterns and random TWmask 1..4; the
// registered trigger word bits must equal the OR over the last four CAM
// vectors, each ANDed with its stage mask.
`timescale 1ns/1ps
module tb_trigger_word;
  localparam int N = 28, S = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] cam = '0, tw;
  logic [S-1:0][N-1:0] mask;
  logic [N-1:0] h [0:S-1];
  int checks = 0, failures = 0;

  trigger_word #(.N(N), .STAGES(S)) dut (.clk, .rst_n, .cam, .mask, .tw_bits(tw));
  always #8 clk = ~clk;

  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    mask = '0;
    for (int k = 0; k < S; k++) h[k] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      logic [N-1:0] e;
      @(negedge clk);
      if (cyc % 100 == 0) for (int k = 0; k < S; k++) mask[k] = N'($urandom);
      cam = N'($urandom) & N'($urandom) & N'($urandom);
      for (int k = S-1; k > 0; k--) h[k] = h[k-1];
      h[0] = cam;
      e = '0;
      for (int k = 0; k < S; k++) e |= h[k] & mask[k];
      @(posedge clk); #1;
      if (cyc > 4) begin
        checks++;
        if (tw !== e) begin failures++; if (failures < 8) $display("cyc %0d tw %h exp %h", cyc, tw, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
