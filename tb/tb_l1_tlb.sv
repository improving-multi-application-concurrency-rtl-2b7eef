// tb_l1_tlb: self-checking test of the private L1 TLB.
// Fills all entries, checks one-cycle hits and misses against a reference
// list, evicts by LRU (a recently used entry must survive), overwrites an
// entry on a duplicate fill, checks miss hold/backpressure and flush.
module tb_l1_tlb;
  import mask_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic req_valid, req_ready, hit_valid, miss_valid, miss_ready, fill_valid, flush;
  logic [VPN_W-1:0] req_vpn, hit_vpn, miss_vpn, fill_vpn;
  logic [WARP_W-1:0] req_warp, hit_warp, miss_warp;
  logic [PPN_W-1:0] hit_ppn, fill_ppn;

  l1_tlb #(.ENTRIES(N)) dut (.*);

  function automatic logic [PPN_W-1:0] f(input logic [VPN_W-1:0] v);
    return PPN_W'(v * 7 + 3);
  endfunction

  task automatic do_fill(input logic [VPN_W-1:0] v, input logic [PPN_W-1:0] p);
    fill_valid = 1; fill_vpn = v; fill_ppn = p;
    @(posedge clk); #1 fill_valid = 0;
  endtask

  // lookup; returns 1 on hit and the ppn
  task automatic lookup(input logic [VPN_W-1:0] v, output bit hit, output logic [PPN_W-1:0] p);
    req_valid = 1; req_vpn = v; req_warp = WARP_W'(v);
    @(posedge clk); #1 req_valid = 0;
    hit = hit_valid; p = hit_ppn;
    check(hit_valid != miss_valid, "exactly one of hit/miss one cycle after the request");
    if (hit_valid) check(hit_vpn == v && hit_warp == WARP_W'(v), "hit carries vpn/warp");
    if (miss_valid) begin
      check(miss_vpn == v && miss_warp == WARP_W'(v), "miss carries vpn/warp");
      @(posedge clk); #1;
      check(miss_valid, "miss held while miss_ready low");
      check(!req_ready, "no new request while a miss waits");
      miss_ready = 1; @(posedge clk); #1 miss_ready = 0;
      check(!miss_valid, "miss gone after handshake");
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit h; logic [PPN_W-1:0] p;
    req_valid = 0; req_vpn = 0; req_warp = 0; miss_ready = 0; fill_valid = 0;
    fill_vpn = 0; fill_ppn = 0; flush = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    lookup(36'h100, h, p); check(!h, "cold miss");
    for (int i = 0; i < N; i++) do_fill(36'h1000 + i, f(36'h1000 + i));
    for (int i = 0; i < N; i++) begin
      lookup(36'h1000 + i, h, p);
      check(h && p == f(36'h1000 + i), $sformatf("hit on filled entry %0d", i));
    end
    // touch entry 0 again so it becomes most recently used; entry 1 is LRU
    lookup(36'h1000, h, p);
    do_fill(36'h2000, f(36'h2000));
    lookup(36'h1001, h, p); check(!h, "LRU entry evicted");
    lookup(36'h1000, h, p); check(h, "recently used entry kept");
    lookup(36'h2000, h, p); check(h && p == f(36'h2000), "new entry present");
    // duplicate fill overwrites in place
    do_fill(36'h2000, 28'h1234);
    lookup(36'h2000, h, p); check(h && p == 28'h1234, "duplicate fill overwrites");
    lookup(36'h1002, h, p); check(h, "duplicate fill evicted nothing");
    flush = 1; @(posedge clk); #1 flush = 0;
    lookup(36'h1000, h, p); check(!h, "flush clears entries");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
