// tb_l2_bypass_ctrl: self-checking test of the L2 bypass decision.
// Data lookups hit 3 of 4 times (75 %). Level 1 walk reads hit 9 of 10
// (90 %, keep caching), level 4 reads hit 1 of 4 (25 %, bypass), level 2
// exactly 75 % (not below, keep caching). Several reports arrive per cycle.
// Data requests never bypass; before any report nothing bypasses.
module tb_l2_bypass_ctrl;
  import mask_pkg::*;
  localparam int NEV = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [NEV-1:0] ev_valid, ev_hit;
  depth_t ev_depth [NEV];
  depth_t q_depth;
  logic q_bypass;
  l2_bypass_ctrl #(.NEV(NEV)) dut (.*);

  // report 'n' lookups of depth d of which 'h' hit, spread over the ports
  task automatic report(input int d, input int n, input int h);
    int k;
    k = 0;
    while (k < n) begin
      ev_valid = '0;
      for (int e = 0; e < NEV && k < n; e++) begin
        ev_valid[e] = 1; ev_depth[e] = 3'(d); ev_hit[e] = (k < h); k++;
      end
      @(posedge clk); #1;
    end
    ev_valid = '0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ev_valid = 0; ev_hit = 0; q_depth = 0;
    for (int e = 0; e < NEV; e++) ev_depth[e] = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int d = 0; d < 8; d++) begin q_depth = 3'(d); #1 check(!q_bypass, "no bypass before statistics"); end
    report(0, 400, 300);
    report(1, 10, 9);
    report(2, 40, 30);
    report(4, 12, 3);
    report(3, 0, 0);
    q_depth = 0; #1 check(!q_bypass, "data never bypasses");
    q_depth = 1; #1 check(!q_bypass, "level 1 (90%) is cached");
    q_depth = 2; #1 check(!q_bypass, "level 2 (75%, equal) is cached");
    q_depth = 4; #1 check(q_bypass, "level 4 (25%) bypasses");
    q_depth = 7; #1 check(q_bypass, "deeper tags share the last level's rate");
    q_depth = 3; #1 check(!q_bypass, "level 3 without statistics is cached");
    // level 4 improves to 31/40 = 77.5 %: no longer below the data rate
    report(4, 28, 28);
    q_depth = 4; #1 check(!q_bypass, "level 4 at 77.5% cached again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
