// tb_mem_partition: self-checking test of one memory partition (two L2
// banks, Address-Space-Aware scheduler, L2 bypass path) against the
// behavioural DRAM channel. Checks: a cached page walk read misses, then
// hits in the bank; a bypassed walk read never touches the L2 (no lookup
// report), is issued from the Golden queue and returns on the bypass
// response port; data reads return on their bank's port; a random mix of
// walk and data traffic under back-pressure returns every word correctly.
module tb_mem_partition;
  import mask_pkg::*;
  import mask_tb_pkg::*;
  localparam int NA = 4, B = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic wreq_valid, wreq_ready, wreq_bypass;
  mem_req_t wreq;
  logic [B:0] wrsp_valid;
  mem_rsp_t wrsp [B+1];
  logic [B-1:0] dreq_valid, dreq_ready, rsp_valid, ev_valid, ev_hit;
  mem_req_t dreq [B];
  mem_rsp_t rsp [B];
  logic cmd_valid, cmd_ready, cmd_row_hit, drsp_valid, drsp_ready;
  dram_req_t cmd; dram_rsp_t drsp;
  logic [1:0] cmd_class;
  logic [9:0] thres [NA];
  depth_t ev_depth [B];
  int n_reads, n_row_hits;

  mem_partition #(.NUM_APPS(NA)) dut (.*);
  logic stall = 0;
  dram_model u_dram (.clk, .rst_n, .stall, .cmd_valid, .cmd_ready, .cmd, .rsp_valid(drsp_valid),
    .rsp_ready(drsp_ready), .rsp(drsp), .n_reads, .n_row_hits);

  // outstanding requests by source tag: address and expected port
  logic [PA_W-1:0] w_addr [256];
  int              w_port [256];
  bit              w_busy [256];
  logic [PA_W-1:0] d_addr [B][256];
  bit              d_busy [B][256];
  int n_wrsp = 0, n_drsp = 0, n_ev = 0, n_gold = 0, n_byp_rsp = 0;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p <= B; p++) if (wrsp_valid[p]) begin
      int s; s = int'(wrsp[p].src);
      check(w_busy[s], "walk response for an outstanding read");
      check(w_port[s] == p, $sformatf("walk response port %0d (expected %0d)", p, w_port[s]));
      check(wrsp[p].data == mem_word(w_addr[s]), "walk response data");
      w_busy[s] = 0; n_wrsp++;
      if (p == B) n_byp_rsp++;
    end
    for (int b = 0; b < B; b++) if (rsp_valid[b]) begin
      int s; s = int'(rsp[b].src);
      check(d_busy[b][s], "data response for an outstanding read");
      check(rsp[b].data == mem_word(d_addr[b][s]), "data response data");
      d_busy[b][s] = 0; n_drsp++;
    end
    for (int b = 0; b < B; b++) if (ev_valid[b]) n_ev++;
    if (cmd_valid && cmd_ready && cmd_class == 0) n_gold++;
  end

  function automatic logic [PA_W-1:0] addr_for(input int bank, input int r);
    return (PA_W'(r) << 12) | (PA_W'(bank) << 10) | PA_W'(($urandom_range(15)) * 8);
  endfunction

  task automatic walk(input logic [PA_W-1:0] a, input int src, input int depth, input bit byp);
    while (w_busy[src]) @(posedge clk);
    #1;
    wreq_valid = 1; wreq = '0; wreq.addr = a; wreq.depth = 3'(depth); wreq.src = 8'(src);
    wreq_bypass = byp;
    w_addr[src] = a; w_port[src] = byp ? B : int'(a[10]); w_busy[src] = 1;
    @(negedge clk); while (!wreq_ready) @(negedge clk);
    @(posedge clk); #1 wreq_valid = 0;
  endtask
  task automatic data(input int b, input logic [PA_W-1:0] a, input int src);
    while (d_busy[b][src]) @(posedge clk);
    #1;
    dreq_valid[b] = 1; dreq[b] = '0; dreq[b].addr = a; dreq[b].src = 8'(src); dreq[b].app = APP_W'(src % NA);
    d_addr[b][src] = a; d_busy[b][src] = 1;
    @(negedge clk); while (!dreq_ready[b]) @(negedge clk);
    @(posedge clk); #1 dreq_valid[b] = 0;
  endtask
  task automatic wait_idle();
    int t; t = 0;
    while (t < 5000) begin
      bit any; any = 0;
      for (int s = 0; s < 256; s++) any |= w_busy[s] | d_busy[0][s] | d_busy[1][s];
      if (!any) break;
      @(posedge clk); t++;
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int t0, lat_miss, lat_hit, ev0, g0, r0;
    wreq_valid = 0; wreq = '0; wreq_bypass = 0; dreq_valid = 0;
    for (int b = 0; b < B; b++) dreq[b] = '0;
    for (int s = 0; s < 256; s++) begin w_busy[s] = 0; d_busy[0][s] = 0; d_busy[1][s] = 0; end
    thres = '{10'd8, 10'd8, 10'd8, 10'd8};
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // cached walk read: miss then hit
    t0 = $time; walk(40'h12_3400_0008, 1, 2, 0); wait_idle(); lat_miss = ($time - t0) / 10;
    t0 = $time; walk(40'h12_3400_0010, 2, 2, 0); wait_idle(); lat_hit = ($time - t0) / 10;
    check(lat_hit < lat_miss && lat_hit <= 14, $sformatf("walk read hits in L2 (%0d vs %0d)", lat_hit, lat_miss));
    check(n_ev == 2, "both cached reads looked up the L2");
    // bypassed walk read: no L2 lookup, golden issue, bypass port
    ev0 = n_ev; g0 = n_gold; r0 = n_reads;
    walk(40'h55_0000_0400, 3, 4, 1); wait_idle();
    check(n_ev == ev0, "bypassed read skips the L2");
    check(n_gold == g0 + 1 && n_reads == r0 + 1, "bypassed read issued from the golden queue");
    check(n_byp_rsp == 1, "bypassed read answered on the bypass port");
    // the same address bypassed again goes to DRAM again (never cached)
    walk(40'h55_0000_0400, 4, 4, 1); wait_idle();
    check(n_reads == r0 + 2, "bypassed lines are not installed in the L2");
    // data reads on both banks
    data(0, addr_for(0, 77), 5); data(1, addr_for(1, 78), 6); wait_idle();
    check(n_drsp == 2, "data responses on their bank ports");
    // random mix with random DRAM back-pressure
    fork
      for (int i = 0; i < 150; i++) walk(addr_for($urandom_range(1), $urandom_range(40)), 10 + i % 100,
                                         1 + $urandom_range(3), $urandom_range(1));
      for (int i = 0; i < 150; i++) data(0, addr_for(0, $urandom_range(60)), i % 200);
      for (int i = 0; i < 150; i++) data(1, addr_for(1, $urandom_range(60)), i % 200);
      for (int i = 0; i < 3000; i++) begin @(negedge clk); stall = ($urandom_range(3) == 0); end
    join
    stall = 0;
    wait_idle();
    check(n_wrsp == 154 && n_drsp == 302, $sformatf("every request answered (%0d walk, %0d data)", n_wrsp, n_drsp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
