// cam_scaler -- per-CAM prescaler ("scaling factor") in front of the
// trigger 1 mask on the master board.
//
// Each CAM output has a W-bit counter of its activations (rising edges).
// When an activation makes the counter reach the CAM's scaling factor the
// activation is passed on and the counter is reset to 0; the others are
// suppressed. Factor 0 or 1 passes every activation. A passed activation
// stays visible as a level for as long as the CAM output stays active, so
// the trigger 1 logic can still tell when the condition ends. The counter
// values (count) are stored with every event as the rate monitor.
// Combinational from cam to pass; the counters update on the next edge.
module cam_scaler #(
  parameter int unsigned N = 32,
  parameter int unsigned W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        cam,
  input  logic [N-1:0][W-1:0] factor,
  output logic [N-1:0]        pass,
  output logic [N-1:0][W-1:0] count
);
  logic [N-1:0] cam_q, sel_q, rise, hit;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      rise[i] = cam[i] & ~cam_q[i];
      hit[i]  = (factor[i] <= W'(1)) || ((count[i] + 1'b1) >= factor[i]);
      pass[i] = cam[i] & (rise[i] ? hit[i] : sel_q[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cam_q <= '0; sel_q <= '0; count <= '0;
    end else begin
      cam_q <= cam;
      for (int i = 0; i < N; i++) begin
        if (rise[i]) begin
          sel_q[i] <= hit[i];
          count[i] <= hit[i] ? '0 : count[i] + 1'b1;
        end
      end
    end
  end
endmodule
