// tb_event_fifo -- fills the 128-deep FIFO past full (writes while full
// must be dropped and counted), drains it, then runs random read/write
// traffic; data order is checked against a queue model.
`timescale 1ns/1ps
module tb_event_fifo;
  localparam int W = 40, D = 128;
  logic clk = 0, rst_n = 0, wr = 0, rd = 0, empty, full;
  logic [W-1:0] wd = '0, rdat;
  logic [15:0] dropped;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, n_drop = 0, n_full = 0;

  event_fifo #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .wr_en(wr), .wr_data(wd), .rd_en(rd),
    .rd_data(rdat), .empty, .full, .dropped);
  always #8 clk = ~clk;

  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic step(bit w, bit r);
    @(negedge clk);
    wr = w; rd = r && (q.size() != 0); wd = {$urandom, $urandom};
    checks++;
    if (empty != (q.size() == 0) || full != (q.size() == D)) begin
      failures++; if (failures < 8) $display("flags empty %b full %b size %0d cnt %0d t %0t", empty, full, q.size(), dut.count, $time);
    end
    if (q.size() != 0) begin
      checks++;
      if (rdat !== q[0]) begin failures++; if (failures < 8) $display("data %h exp %h", rdat, q[0]); end
    end
    if (full) n_full++;
    @(posedge clk);
    if (rd) void'(q.pop_front());
    if (w) begin
      if (q.size() < D || rd) q.push_back(wd);
      else n_drop++;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < D + 10; i++) step(1, 0);
    @(negedge clk);
    checks++; if (int'(dropped) != n_drop || n_drop != 10) begin failures++; $display("dropped %0d exp %0d", dropped, n_drop); end
    for (int i = 0; i < D + 2; i++) step(0, 1);
    for (int i = 0; i < 3000; i++) step($urandom_range(0, 2) != 0, $urandom_range(0, 1));
    checks++; if (n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
