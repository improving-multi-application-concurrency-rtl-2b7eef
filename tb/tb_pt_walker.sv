// tb_pt_walker: self-checking test of the shared page table walker.
// A memory model answers page table reads from mask_tb_pkg (any address is
// a valid page table) after a random delay, several per cycle. The test
// opens many walks at once, checks the result of every walk against
// ref_translate, checks that each read carries the right depth tag, that
// misses to a page already being walked are merged (core mask, warp count)
// and the per-application Concurrent/WrpStalled counters.
module tb_pt_walker;
  import mask_pkg::*;
  import mask_tb_pkg::*;
  localparam int T = 8, NC = 4, NA = 4, NR = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic miss_valid, miss_ready, miss_has_token, mem_req_valid, mem_req_ready;
  logic done_valid, done_ready, done_has_token, epoch_end, merged;
  logic [CORE_W-1:0] miss_core;
  logic [ASID_W-1:0] miss_asid, done_asid;
  logic [VPN_W-1:0] miss_vpn, done_vpn;
  logic [PPN_W-1:0] miss_root, done_ppn;
  mem_req_t mem_req;
  logic [NR-1:0] mem_rsp_valid;
  mem_rsp_t mem_rsp [NR];
  logic [NC-1:0] done_cores, core_pending;
  logic [5:0] concurrent [NA], stalled [NA];

  pt_walker #(.THREADS(T), .NUM_CORES(NC), .NUM_APPS(NA), .N_RSP(NR)) dut (.*);

  // ---- memory model: random delay, up to NR answers per cycle ----
  typedef struct { mem_req_t r; int due; } pend_t;
  pend_t pend[$];
  int now = 0;
  logic [2:0] exp_depth [T];
  always @(posedge clk) begin
    now++;
    if (mem_req_valid && mem_req_ready) begin
      pend.push_back('{r: mem_req, due: now + $urandom_range(2, 12)});
    end
  end
  always @(negedge clk) begin
    mem_req_ready = ($urandom_range(0, 3) != 0);
    done_ready = ($urandom_range(0, 1) == 1);
    mem_rsp_valid = '0;
    for (int k = 0, s = 0; k < pend.size() && s < NR; k++)
      if (pend[k].due <= now) begin
        mem_rsp_valid[s] = 1'b1;
        mem_rsp[s].src = pend[k].r.src; mem_rsp[s].depth = pend[k].r.depth;
        mem_rsp[s].data = mem_word(pend[k].r.addr);
        pend.delete(k); k--; s++;
      end
  end
  // every read must carry the walk level as its depth tag, levels in order
  logic [2:0] lvl_seen [T];
  always @(posedge clk) if (rst_n && mem_req_valid && mem_req_ready) begin
    check(mem_req.depth == lvl_seen[mem_req.src] + 1, "reads of a walk carry depth 1,2,3,4 in order");
    lvl_seen[mem_req.src] = (mem_req.depth == 4) ? 0 : mem_req.depth;
  end

  // ---- collect finished walks ----
  int ndone = 0;
  logic [PPN_W-1:0] roots [NA];
  always @(posedge clk) if (rst_n && done_valid && done_ready) begin
    ndone++;
    check(done_ppn == ref_translate(roots[done_asid], done_vpn),
          $sformatf("walk result asid %0d vpn %h", done_asid, done_vpn));
    check(done_has_token == done_vpn[0], "token of the opening warp kept");
    if (done_vpn == 36'h5_0000_0001) check(done_cores == 4'b1011, "merged walk returns to all its cores");
  end

  task automatic miss(input int core, input int asid, input logic [VPN_W-1:0] vpn);
    miss_valid = 1; miss_core = CORE_W'(core); miss_asid = ASID_W'(asid); miss_vpn = vpn;
    miss_root = roots[asid]; miss_has_token = vpn[0];
    @(posedge clk); while (!miss_ready) @(posedge clk);
    #1 miss_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nmerge;
    miss_valid = 0; miss_core = 0; miss_asid = 0; miss_vpn = 0; miss_root = 0; miss_has_token = 0;
    epoch_end = 0; mem_rsp_valid = 0;
    for (int t = 0; t < T; t++) lvl_seen[t] = 0;
    roots = '{28'h0, 28'h123, 28'h4567, 28'h89a};
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // one page wanted by three warps of cores 0,1,3 of app 1
    nmerge = 0;
    fork
      begin
        miss(0, 1, 36'h5_0000_0001);
        miss(1, 1, 36'h5_0000_0001);
        miss(3, 1, 36'h5_0000_0001);
      end
      forever begin @(posedge clk); if (merged) nmerge++; end
    join_any
    @(posedge clk);
    disable fork;
    check(nmerge == 2, $sformatf("two merges (got %0d)", nmerge));
    // 40 random walks from apps 1..3, more than there are threads
    for (int i = 0; i < 40; i++) begin
      int a;
      a = 1 + (i % 3);
      miss(i % NC, a, {$urandom, $urandom} & 36'hF_FFFF_FFFF);
    end
    while (ndone < 41) @(posedge clk);
    repeat (5) @(posedge clk); #1;
    check(ndone == 41, "all walks finished");
    check(core_pending == '0, "nothing pending");
    check(stalled[1] == 6'd3, $sformatf("WrpStalled app1 = 3 (got %0d)", stalled[1]));
    check(concurrent[1] >= 2 && concurrent[1] <= T, "Concurrent app1 recorded");
    check(concurrent[0] == 0 && stalled[0] == 0, "idle app has zero counters");
    epoch_end = 1; @(posedge clk); #1 epoch_end = 0;
    check(concurrent[1] == 0 && stalled[1] == 0, "counters cleared at epoch end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
