// trigger2_path -- trigger 2 of the master board.
//
// The CAM outputs enabled by the trigger 2 mask are ORed and the result
// is delayed by `delay` cycles of 16 ns. The master board sets the delay
// to the latency of the trigger 1 path (high level logic plus the trigger
// 1 delay), so that both triggers leave the board together. Unlike
// trigger 1 there is no prescaling, re-arm rule or dead time: trigger 2
// follows the masked OR as a level.
module trigger2_path #(
  parameter int unsigned N     = 32,
  parameter int unsigned DEPTH = 20,
  localparam int unsigned SW   = $clog2(DEPTH+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  cam,
  input  logic [N-1:0]  mask,
  input  logic [SW-1:0] delay,
  output logic          tr2
);
  logic or_d;
  assign or_d = |(cam & mask);

  programmable_delay #(.W(1), .DEPTH(DEPTH)) u_dly (
    .clk, .rst_n, .din(or_d), .sel(delay), .dout(tr2)
  );
endmodule
