// tb_l2_tlb_array: self-checking test of the shared L2 TLB storage.
// Fills 17 translations that map to one set of the 16-way array and checks
// that the least recently used one is replaced, that entries of different
// sets and ASIDs are independent, and the ASID-selective flush.
module tb_l2_tlb_array;
  import mask_pkg::*;
  localparam int ENTRIES = 512, WAYS = 16, SETS = ENTRIES / WAYS;
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
  l2_tlb_array #(.ENTRIES(ENTRIES), .WAYS(WAYS)) dut (.*);

  function automatic logic [PPN_W-1:0] f(input int a, input longint v);
    return PPN_W'(v * 13 + a * 7919);
  endfunction
  task automatic fill(input int a, input longint v);
    fill_valid = 1; fill_asid = ASID_W'(a); fill_vpn = VPN_W'(v); fill_ppn = f(a, v);
    @(posedge clk); #1 fill_valid = 0;
  endtask
  task automatic probe(input int a, input longint v, output bit h);
    lk_valid = 1; lk_asid = ASID_W'(a); lk_vpn = VPN_W'(v); #1;
    h = lk_hit;
    if (h) check(lk_ppn == f(a, v), "returns filled ppn");
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
    // 16 VPNs of set 5, ASID 2
    for (int i = 0; i < WAYS; i++) fill(2, 5 + SETS * i);
    // a neighbouring set and another ASID with the same VPNs
    for (int i = 0; i < 4; i++) fill(9, 6 + SETS * i);
    for (int i = 0; i < WAYS; i++) begin probe(2, 5 + SETS * i, h); check(h, "set 5 way hit"); end
    probe(9, 5, h); check(!h, "same VPN, other ASID misses");
    probe(2, 5, h);                 // make way of VPN 5 most recent
    fill(2, 5 + SETS * WAYS);       // 17th VPN of the set
    probe(2, 5 + SETS, h); check(!h, "LRU way replaced");
    probe(2, 5, h); check(h, "recently used way kept");
    probe(2, 5 + SETS * WAYS, h); check(h, "new way hits");
    for (int i = 0; i < 4; i++) begin probe(9, 6 + SETS * i, h); check(h, "other set unaffected"); end
    flush_valid = 1; flush_asid = 2; @(posedge clk); #1 flush_valid = 0;
    probe(2, 5, h); check(!h, "flushed ASID gone");
    probe(2, 5 + SETS * 3, h); check(!h, "flushed ASID gone (2)");
    probe(9, 6, h); check(h, "other ASID survives flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
