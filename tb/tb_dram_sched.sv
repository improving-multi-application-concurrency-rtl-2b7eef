// tb_dram_sched: self-checking test of the Address-Space-Aware DRAM
// scheduler (4 applications, default queue sizes). The DRAM is held off
// while requests are queued, then released, and the issue order is logged.
// Checks: strict Golden > Silver > Normal priority; FR-FCFS inside a queue
// (a younger row hit overtakes an older row miss) with cmd_row_hit; the
// Silver turn passing after thres insertions and skipping zero quotas;
// Silver-application overflow going to Normal once the turn has passed;
// a full Golden queue pushing back; issue order under random ready.
module tb_dram_sched;
  import mask_pkg::*;
  localparam int NA = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic enq_valid, enq_ready, cmd_valid, cmd_ready, cmd_row_hit;
  dram_req_t enq, cmd;
  logic [9:0] thres [NA];
  logic [1:0] cmd_class;
  logic [APP_W-1:0] silver_app;
  dram_sched #(.NUM_APPS(NA)) dut (.*);

  typedef struct { int src; int cls; bit rh; } iss_t;
  iss_t log_q [$];
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready)
    log_q.push_back('{int'(cmd.req.src), int'(cmd_class), cmd_row_hit});

  function automatic dram_req_t mk(input int app, input int depth, input int src,
                                   input int dbank, input int row);
    dram_req_t r;
    r = '0;
    r.req.app = APP_W'(app); r.req.depth = 3'(depth); r.req.src = 8'(src);
    r.req.addr = (PA_W'(row) << 17) | (PA_W'(dbank) << 11);
    return r;
  endfunction
  task automatic push(input dram_req_t r);
    enq_valid = 1; enq = r;
    @(negedge clk); while (!enq_ready) @(negedge clk);
    @(posedge clk); #1 enq_valid = 0;
  endtask
  task automatic drain(input int n);
    cmd_ready = 1;
    while (log_q.size() < n) @(posedge clk);
    #1 cmd_ready = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    enq_valid = 0; enq = '0; cmd_ready = 0;
    thres = '{10'd2, 10'd0, 10'd3, 10'd0};
    repeat (3) @(posedge clk); #1 rst_n = 1;
    check(silver_app == 0, "turn starts at application 0");
    // --- priority and silver turn ---
    push(mk(1, 0, 1, 0, 1));      // normal (app 1 never silver)
    push(mk(0, 0, 2, 1, 1));      // silver (app 0, 1st)
    push(mk(0, 0, 3, 2, 1));      // silver (app 0, 2nd) -> turn to app 2
    check(silver_app == 2, "turn passes after thres insertions, skipping a zero quota");
    push(mk(0, 0, 4, 3, 1));      // app 0 no longer silver -> normal
    push(mk(3, 2, 5, 4, 1));      // page walk read -> golden
    push(mk(2, 0, 6, 5, 1));      // silver (app 2, 1st)
    drain(6);
    check(log_q[0].src == 5 && log_q[0].cls == 0, "golden first");
    check(log_q[1].cls == 1 && log_q[2].cls == 1 && log_q[3].cls == 1, "silver next");
    check(log_q[1].src == 2 && log_q[2].src == 3 && log_q[3].src == 6, "silver in age order");
    check(log_q[4].src == 1 && log_q[4].cls == 2 && log_q[5].src == 4 && log_q[5].cls == 2,
          "normal last, oldest first");
    log_q.delete();
    push(mk(2, 0, 7, 0, 1));
    push(mk(2, 0, 8, 0, 1));      // third app-2 insertion -> turn back to 0
    check(silver_app == 0, "turn wraps round to application 0");
    drain(2);
    check(log_q[0].cls == 1 && log_q[1].cls == 1, "quota of 3 for application 2");
    log_q.delete();
    // --- FR-FCFS: bank 6 row 9 opened by the first issue ---
    push(mk(1, 0, 20, 6, 9));
    push(mk(1, 0, 21, 6, 33));
    push(mk(1, 0, 22, 6, 9));
    push(mk(1, 0, 23, 7, 2));
    drain(4);
    check(log_q[0].src == 20 && !log_q[0].rh, "oldest first when no row hit");
    check(log_q[1].src == 22 && log_q[1].rh, "younger row hit overtakes older miss");
    check(log_q[2].src == 21 && log_q[3].src == 23, "then oldest");
    log_q.delete();
    // --- golden queue back-pressure (16 entries) ---
    begin
      int acc;
      acc = 0;
      enq_valid = 1;
      for (int i = 0; i < 20; i++) begin
        enq = mk(1, 1 + i % 4, 40 + i, 0, 0);
        @(negedge clk);
        if (enq_ready) acc++;
        @(posedge clk); #1;
      end
      enq_valid = 0;
      check(acc == 16, $sformatf("golden queue holds 16 (%0d accepted)", acc));
      drain(16);
      for (int i = 0; i < 16; i++) check(log_q[i].src == 40 + i && log_q[i].cls == 0, "golden FIFO order");
      log_q.delete();
    end
    // --- random mix with random ready: golden issue never waits behind data ---
    begin
      int ng;
      thres = '{10'd5, 10'd5, 10'd5, 10'd5};
      fork
        begin
          for (int i = 0; i < 200; i++) push(mk($urandom_range(NA-1), ($urandom_range(3) == 0) ? 3 : 0,
                                               i % 256, $urandom_range(7), $urandom_range(3)));
        end
        begin
          for (int i = 0; i < 600; i++) begin @(negedge clk); cmd_ready = ($urandom_range(3) != 0); end
          cmd_ready = 1;
        end
      join
      repeat (300) @(posedge clk);
      #1 cmd_ready = 0;
      check(log_q.size() == 200, $sformatf("all 200 issued (%0d)", log_q.size()));
      ng = 0;
      foreach (log_q[i]) if (log_q[i].cls == 0) ng++;
      check(ng > 20, "golden requests seen in the mix");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
