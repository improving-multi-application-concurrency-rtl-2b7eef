// tb_tlb_bypass_cache: self-checking test of the bypass cache beside the
// shared L2 TLB. Checks ASID-qualified hits, LRU eviction after all entries
// are used, and that an ASID flush removes only that address space.
module tb_tlb_bypass_cache;
  import mask_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic lk_valid, lk_hit, fill_valid, flush_valid;
  logic [ASID_W-1:0] lk_asid, fill_asid, flush_asid;
  logic [VPN_W-1:0] lk_vpn, fill_vpn;
  logic [PPN_W-1:0] lk_ppn, fill_ppn;
  tlb_bypass_cache #(.ENTRIES(N)) dut (.*);

  task automatic fill(input int a, input int v);
    fill_valid = 1; fill_asid = ASID_W'(a); fill_vpn = VPN_W'(v); fill_ppn = PPN_W'(v + 1000 * a);
    @(posedge clk); #1 fill_valid = 0;
  endtask
  task automatic probe(input int a, input int v, output bit h);
    lk_valid = 1; lk_asid = ASID_W'(a); lk_vpn = VPN_W'(v); #1;
    h = lk_hit;
    if (h) check(lk_ppn == PPN_W'(v + 1000 * a), "bypass cache returns the filled ppn");
    @(posedge clk); #1 lk_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bit h;
    lk_valid = 0; fill_valid = 0; flush_valid = 0; lk_asid = 0; lk_vpn = 0;
    fill_asid = 0; fill_vpn = 0; fill_ppn = 0; flush_asid = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < N; i++) fill(i % 2, 100 + i);
    for (int i = 0; i < N; i++) begin probe(i % 2, 100 + i, h); check(h, "hit after fill"); end
    probe(1, 100, h); check(!h, "other ASID misses");
    probe(0, 100, h); // entry 0 most recent, entry 1 is LRU
    fill(3, 500);
    probe(1, 101, h); check(!h, "LRU entry replaced");
    probe(0, 100, h); check(h, "recently used entry kept");
    probe(3, 500, h); check(h, "new entry hits");
    flush_valid = 1; flush_asid = 0; @(posedge clk); #1 flush_valid = 0;
    probe(0, 102, h); check(!h, "flushed ASID 0 entry gone");
    probe(1, 103, h); check(h, "ASID 1 entry survives flush");
    probe(3, 500, h); check(h, "ASID 3 entry survives flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
