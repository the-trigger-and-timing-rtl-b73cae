// event_fifo -- DEPTH-event FIFO for the per-trigger data records.
//
// One record of W bits is written per accepted trigger. When the FIFO is
// full the board keeps working but the record is dropped (the paper's
// boards behave the same way; `full` drives the FIFO-full LED and the
// `dropped` counter tells software how many were lost -- the counter is
// this design's addition for testing). The read side stands for the VME
// read-out: rd_data always shows the oldest record (show-ahead), rd_en
// removes it. Simultaneous read and write are allowed.
// Lint note: rst_n also appears in the assertion's disable condition, so
// a linter sees it used both as an asynchronous reset and as data.
module event_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic [15:0]  dropped
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic          do_wr, do_rd;

  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && (!full || do_rd);
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0; dropped <= '0;
    end else begin
      if (do_wr) wptr <= (int'(wptr) == DEPTH-1) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (int'(rptr) == DEPTH-1) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (wr_en && !do_wr && dropped != '1) dropped <= dropped + 1'b1;
    end
  end

  // a read of an empty FIFO is ignored; flag it in simulation
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $warning("event_fifo: read while empty ignored");
endmodule
