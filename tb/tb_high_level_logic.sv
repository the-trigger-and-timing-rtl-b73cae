// tb_high_level_logic -- directed scenarios for the trigger 1 decision,
// each checking the exact cycles of the trigger pulses and their special
// bits (fixed-rate unit shortened to 16 cycles):
//   re-arm rule, dead time (8 cycles: activations inside are lost, the
//   exact edge of the window included),
//   close-in-time (6 cycles: a second trigger is moved to the window end),
//   follow-up (every 5 cycles while the condition stays), fixed rate
//   (every 3 x 16 cycles), inhibit (no trigger) and inhibit release.
`timescale 1ns/1ps
module tb_high_level_logic;
  import dc_trigger_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, inh = 0, fire;
  logic [N-1:0] req = '0, blocked;
  logic [3:0] special;
  hll_cfg_t cfg;
  int checks = 0, failures = 0, cyc = 0;
  int fires [$];
  logic [3:0] sp [$];

  high_level_logic #(.N(N), .FR_UNIT_CYC(16)) dut (.clk, .rst_n, .req, .inh, .cfg, .fire, .special, .blocked);
  always #8 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    #1 if (fire) begin fires.push_back(cyc); sp.push_back(special); end
  end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // drive req bit b to v in the current cycle (after the negedge)
  task automatic set(int b, bit v); @(negedge clk); req[b] = v; endtask
  task automatic idle(int n); repeat (n) @(negedge clk); endtask
  function automatic int now(); return cyc; endfunction
  // compare recorded fires with the expected list, then clear
  task automatic expect_fires(string name, int exp_c [$], logic [3:0] exp_sp [$]);
    checks++;
    if (fires.size() != exp_c.size()) begin
      failures++; $display("%s: %0d fires, expected %0d", name, fires.size(), exp_c.size());
      foreach (fires[i]) $display("   fire at %0d sp %b", fires[i], sp[i]);
    end else
      foreach (exp_c[i]) begin
        checks++;
        if (fires[i] != exp_c[i] || sp[i] != exp_sp[i]) begin
          failures++; $display("%s: fire %0d at %0d sp %b, expected %0d sp %b", name, i, fires[i], sp[i], exp_c[i], exp_sp[i]);
        end
      end
    fires.delete(); sp.delete();
  endtask

  initial begin
    int t0, t1, t2;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    idle(3);

    // 1. re-arm rule, no window
    fires.delete(); sp.delete();
    set(0, 1); t0 = now();
    idle(3);  req[1] = 1; t1 = now();
    idle(5);  req[1] = 0;
    idle(5);  req[1] = 1; t2 = now();   // CAM 1 again: new trigger
    idle(4);  req = '0;
    idle(4);
    expect_fires("rearm", '{t0+1, t1+1, t2+1}, '{4'b0, 4'b0, 4'b0});

    // 2. dead time 8 cycles (code 7)
    cfg.win_mode = WIN_DEAD; cfg.window = 5'd7;
    set(0, 1); t0 = now();
    idle(3); req[1] = 1;              // inside dead time: lost
    idle(1); req[0] = 0;
    idle(10);                          // CAM 1 still active after dead time: no trigger
    req[2] = 1; t2 = now();
    idle(3); req = '0; idle(12);
    expect_fires("dead", '{t0+1, t2+1}, '{4'b0, 4'b0});
    // minimum spacing equals the dead time
    set(0, 1); t0 = now(); idle(1); req[0] = 0; idle(1); req[1] = 1; idle(10); req = '0;
    idle(2); req[3] = 1; t2 = now(); idle(2); req = '0; idle(12);
    expect_fires("dead2", '{t0+1, t2+1}, '{4'b0, 4'b0});
    // exact edge: a new CAM in the last dead cycle is lost, one in the
    // first cycle after it (8 cycles = 128 ns after the decision) fires
    set(0, 1); t0 = now(); set(0, 0);
    idle(5); set(1, 1);
    @(negedge clk); req[1] = 0; req[2] = 1; t2 = now();
    @(negedge clk); req[2] = 0; idle(12);
    checks++;
    if (t2 != t0 + 8) begin failures++; $display("dead3: stimulus at %0d, expected %0d", t2, t0 + 8); end
    expect_fires("dead3", '{t0+1, t2+1}, '{4'b0, 4'b0});

    // 3. close in time, window 6 cycles (code 4)
    cfg.win_mode = WIN_CIT; cfg.window = 5'd4;
    set(0, 1); t0 = now();
    idle(2); req[1] = 1;               // inside window -> delayed to its end
    idle(2); req = '0;
    idle(12);
    expect_fires("cit", '{t0+1, t0+7}, '{4'b0, 4'b0100});

    // 4. follow-up every 5 cycles (code 3) while CAM 0 stays active
    cfg.win_mode = WIN_OFF; cfg.followup_en = 1; cfg.followup = 5'd3;
    set(0, 1); t0 = now();
    idle(18); req[0] = 0;              // active for cycles t0..t0+17
    idle(10);
    expect_fires("follow", '{t0+1, t0+6, t0+11, t0+16}, '{4'b0, 4'b0010, 4'b0010, 4'b0010});
    cfg.followup_en = 0;

    // 5. inhibit: nothing while active, then the inhibit release trigger
    cfg.inh_release_en = 1;
    @(negedge clk); inh = 1;
    idle(2); req[2] = 1; idle(3); req[2] = 0;
    idle(5); inh = 0; t0 = now();
    idle(10);
    expect_fires("inhibit", '{t0+2}, '{4'b1000});
    cfg.inh_release_en = 0;

    // 6. fixed rate: period code 2 -> every 3 x 16 = 48 cycles
    @(negedge clk); cfg.fixed_en = 1; cfg.fixed_period = 16'd2; t0 = now();
    idle(48*5 + 5);
    @(negedge clk); cfg.fixed_en = 0;
    checks++;
    if (fires.size() != 5) begin failures++; $display("fixed: %0d fires", fires.size()); end
    else for (int i = 1; i < 5; i++) begin
      checks++;
      if (fires[i] - fires[i-1] != 48 || sp[i] != 4'b0001) begin failures++; $display("fixed spacing %0d sp %b", fires[i]-fires[i-1], sp[i]); end
    end
    fires.delete(); sp.delete();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
