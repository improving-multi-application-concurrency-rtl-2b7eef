// tb_token_ctrl: self-checking test of the TLB-fill token controller with
// 4 cores, 4 applications and 10 warps per core. Cores 0,1 run application
// 1 and cores 2,3 run application 2. Three epochs of hit/miss traffic are
// driven; the expected token counts were worked out by hand from the
// decision tree (first epoch: 80 % of 20 warps = 16; later: +/-10 %, at
// least one token, direction kept when Hits/Misses improved and reversed
// otherwise). Token ownership per warp is checked against the round-robin
// rule w*n + k < tokens.
module tb_token_ctrl;
  import mask_pkg::*;
  localparam int NC = 4, NA = 4, WPC = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic acc_valid, acc_hit, epoch_end, q_has_token, enabled, update_done;
  logic [CORE_W-1:0] acc_core, q_core;
  logic [WARP_W-1:0] q_warp;
  logic [NC-1:0] core_valid;
  logic [ASID_W-1:0] core_app [NC];
  logic [14:0] tokens [NA];
  logic [NA-1:0] token_dir;

  token_ctrl #(.NUM_CORES(NC), .NUM_APPS(NA), .WARPS_PER_CORE(WPC)) dut (.*);

  task automatic traffic(input int core, input int hits, input int misses);
    for (int i = 0; i < hits + misses; i++) begin
      acc_valid = 1; acc_core = CORE_W'(core); acc_hit = (i < hits);
      @(posedge clk); #1;
    end
    acc_valid = 0;
  endtask
  task automatic end_epoch();
    epoch_end = 1; @(posedge clk); #1 epoch_end = 0;
    while (!update_done) begin @(posedge clk); #1; end
  endtask
  function automatic bit owns(input int w, input int k, input int n, input int t);
    return (w * n + k) < t;
  endfunction
  task automatic check_owners(input int t1, input int t2);
    for (int c = 0; c < NC; c++)
      for (int w = 0; w < WPC; w++) begin
        q_core = CORE_W'(c); q_warp = WARP_W'(w); #1;
        check(q_has_token == owns(w, c % 2, 2, (c < 2) ? t1 : t2),
              $sformatf("token of core %0d warp %0d", c, w));
      end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    acc_valid = 0; acc_hit = 0; acc_core = 0; epoch_end = 0; q_core = 0; q_warp = 0;
    core_valid = '1; core_app = '{8'd1, 8'd1, 8'd2, 8'd2};
    repeat (3) @(posedge clk); #1 rst_n = 1;
    q_core = 0; q_warp = 9; #1 check(q_has_token, "every warp holds a token in the first epoch");
    // epoch 1: app1 40/20 (ratio 512), app2 5/20 (ratio 64)
    traffic(0, 30, 10); traffic(1, 10, 10); traffic(2, 5, 20);
    end_epoch();
    check(enabled, "token limiting enabled after first epoch");
    check(tokens[1] == 16 && tokens[2] == 16, $sformatf("initial tokens 80%% (got %0d %0d)", tokens[1], tokens[2]));
    check(tokens[0] == 0 && tokens[3] == 0, "applications without cores get none");
    check_owners(16, 16);
    // epoch 2: app1 improves (60/20 = 768) -> keep decreasing; app2 worsens (2/20 = 25) -> reverse
    traffic(0, 60, 20); traffic(3, 2, 20);
    end_epoch();
    check(tokens[1] == 15 && token_dir[1] == 1'b0, $sformatf("app1 15 tokens dec (got %0d)", tokens[1]));
    check(tokens[2] == 17 && token_dir[2] == 1'b1, $sformatf("app2 17 tokens inc (got %0d)", tokens[2]));
    check_owners(15, 17);
    // epoch 3: app1 worsens (10/20 = 128) -> reverse to increase; app2 improves (100/10) -> keep increasing
    traffic(1, 10, 20); traffic(2, 100, 10);
    end_epoch();
    check(tokens[1] == 16 && token_dir[1] == 1'b1, $sformatf("app1 16 tokens inc (got %0d)", tokens[1]));
    check(tokens[2] == 18 && token_dir[2] == 1'b1, $sformatf("app2 18 tokens inc (got %0d)", tokens[2]));
    // epoch 4: app2 has no traffic (ratio 0 < 2560) -> reverse to decrease: 18 - 1 = 17
    traffic(0, 50, 5);
    end_epoch();
    check(tokens[2] == 17 && token_dir[2] == 1'b0, $sformatf("app2 17 tokens dec (got %0d)", tokens[2]));
    check(tokens[1] == 17, $sformatf("app1 keeps increasing to 17 (got %0d)", tokens[1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
