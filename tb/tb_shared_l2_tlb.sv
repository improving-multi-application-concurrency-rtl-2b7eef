// tb_shared_l2_tlb: self-checking test of the shared L2 TLB with bypass
// cache. Checks that a miss leaves towards the walker after LATENCY cycles,
// that a fill from a warp with a token lands in the L2 TLB and a fill
// without one lands in the bypass cache (both then hit, after exactly
// LATENCY cycles), that a stalled walker stalls the pipeline, the probe
// reports and the ASID flush of both structures.
module tb_shared_l2_tlb;
  import mask_pkg::*;
  localparam int LAT = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic req_valid, req_ready, req_has_token, rsp_valid, rsp_from_bypass;
  logic miss_valid, miss_ready, miss_has_token, fill_valid, fill_has_token, flush_valid;
  logic acc_valid, acc_hit;
  logic [CORE_W-1:0] req_core, rsp_core, miss_core, acc_core;
  logic [WARP_W-1:0] req_warp, miss_warp;
  logic [ASID_W-1:0] req_asid, miss_asid, fill_asid, flush_asid;
  logic [VPN_W-1:0] req_vpn, rsp_vpn, miss_vpn, fill_vpn;
  logic [PPN_W-1:0] rsp_ppn, fill_ppn;
  logic [3:0] busy;

  shared_l2_tlb #(.NUM_CORES(4), .LATENCY(LAT)) dut (.*);

  // probe and wait for the outcome; returns the cycle count
  task automatic probe(input int core, input int asid, input longint vpn, input bit tok,
                       output bit hit, output bit bp, output int lat);
    int n;
    req_valid = 1; req_core = CORE_W'(core); req_asid = ASID_W'(asid); req_vpn = VPN_W'(vpn);
    req_warp = 6'd3; req_has_token = tok;
    #1 check(acc_valid && acc_core == CORE_W'(core), "probe reported");
    @(posedge clk); #1 req_valid = 0;
    n = 1;
    while (!rsp_valid && !miss_valid) begin @(posedge clk); #1 n++; end
    lat = n; hit = rsp_valid; bp = rsp_from_bypass;
    check(busy[core] == 1'b1 || n == LAT, "busy while in the pipeline");
    if (rsp_valid) check(rsp_core == CORE_W'(core) && rsp_vpn == VPN_W'(vpn) && rsp_ppn == PPN_W'(vpn + 77),
                            "hit response fields");
    if (miss_valid) begin
      check(miss_vpn == VPN_W'(vpn) && miss_asid == ASID_W'(asid) && miss_core == CORE_W'(core)
            && miss_has_token == tok && miss_warp == 6'd3, "miss fields");
      miss_ready = 1; @(posedge clk); #1 miss_ready = 0;
    end else @(posedge clk);
    #1;
  endtask
  task automatic fill(input int asid, input longint vpn, input bit tok);
    fill_valid = 1; fill_asid = ASID_W'(asid); fill_vpn = VPN_W'(vpn); fill_ppn = PPN_W'(vpn + 77);
    fill_has_token = tok; @(posedge clk); #1 fill_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bit h, bp; int lat;
    req_valid = 0; req_has_token = 0; miss_ready = 0; fill_valid = 0; fill_has_token = 0;
    flush_valid = 0; req_core = 0; req_warp = 0; req_asid = 0; req_vpn = 0;
    fill_asid = 0; fill_vpn = 0; fill_ppn = 0; flush_asid = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    probe(1, 4, 36'h111, 1, h, bp, lat);
    check(!h && lat == LAT, $sformatf("miss after %0d cycles (got %0d)", LAT, lat));
    fill(4, 36'h111, 1);
    probe(2, 4, 36'h111, 0, h, bp, lat);
    check(h && !bp && lat == LAT, "token fill hits in L2 TLB after LATENCY");
    probe(0, 4, 36'h222, 0, h, bp, lat);
    check(!h, "miss");
    fill(4, 36'h222, 0);
    probe(0, 4, 36'h222, 0, h, bp, lat);
    check(h && bp && lat == LAT, "tokenless fill hits in bypass cache");
    // a stalled walker stalls the pipeline
    req_valid = 1; req_core = 3; req_asid = 4; req_vpn = 36'h333; req_has_token = 1;
    @(posedge clk); #1 req_valid = 0;
    repeat (LAT + 3) @(posedge clk); #1;
    check(miss_valid && !req_ready, "pipeline stalls behind an unaccepted miss");
    miss_ready = 1; @(posedge clk); #1 miss_ready = 0;
    check(req_ready, "pipeline resumes");
    flush_valid = 1; flush_asid = 4; @(posedge clk); #1 flush_valid = 0;
    probe(0, 4, 36'h111, 0, h, bp, lat); check(!h, "flush clears L2 TLB entry");
    probe(0, 4, 36'h222, 0, h, bp, lat); check(!h, "flush clears bypass cache entry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
