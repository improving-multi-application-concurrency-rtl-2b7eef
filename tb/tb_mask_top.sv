// tb_mask_top: end-to-end self-checking test of the MASK memory hierarchy
// at reduced size (4 cores / 4 address spaces, small TLBs and L2, 2000-cycle
// epochs; 8 partitions x 2 banks as in the full design) with a behavioural
// DRAM channel per partition.
//
// Phase 1 (directed, core 0 alone): a cold translation walks the page
//   table; after it is evicted from the L1 TLB it returns from the L2 TLB
//   exactly L2TLB_LATENCY+1 cycles after the request; an L1 hit answers one
//   cycle after the request.
// Phase 2 (random): every core issues translations from a hot set and from
//   a wide cold range with random warp ids, while random data reads and
//   writes reach all 16 L2 banks and the DRAM channels stall at random.
//   Midway core 1 changes its page table root (the change waits for the
//   core to drain) and flushes its TLBs.
// Every translation returned is compared with a reference page walk; every
// data response with the memory image; every request must be answered.
// Each mechanism is counted and a mechanism that never occurred counts as
// a failure: L1 hit, L2 TLB hit, bypass cache hit, token fill, tokenless
// fill, walk merge, token count change, cached and bypassed walk reads,
// Golden / Silver / Normal issue, non-zero Silver quota, root change drain
// stall, TLB flush, epoch end.
module tb_mask_top;
  import mask_pkg::*;
  import mask_tb_pkg::*;
  localparam int NC = 4, NA = 4, NP = 8, BK = 2, NB = NP * BK;
  localparam int L2LAT = 10, L1E = 8, WARPS = 8;
  localparam bit NEED_EPOCH = 1;   // every epoch-driven mechanism must occur
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [NC-1:0] tr_req_valid, tr_req_ready, tr_hit_valid, tr_fill_valid;
  logic [VPN_W-1:0] tr_req_vpn [NC], tr_hit_vpn [NC], tr_fill_vpn [NC];
  logic [WARP_W-1:0] tr_req_warp [NC], tr_hit_warp [NC];
  logic [PPN_W-1:0] tr_hit_ppn [NC], tr_fill_ppn [NC];
  logic [NC-1:0] cr3_set_valid, cr3_set_ready, flush_valid, flush_ready;
  logic [PPN_W-1:0] cr3_set_root [NC];
  logic [ASID_W-1:0] cr3_set_asid [NC];
  logic [NB-1:0] dreq_valid, dreq_ready, drsp_valid;
  mem_req_t dreq [NB];
  mem_rsp_t drsp [NB];
  logic [NP-1:0] dram_cmd_valid, dram_cmd_ready, dram_cmd_row_hit, dram_rsp_valid, dram_rsp_ready;
  dram_req_t dram_cmd [NP];
  logic [1:0] dram_cmd_class [NP];
  dram_rsp_t dram_rsp [NP];
  logic epoch_end;

  mask_top #(.NUM_CORES(NC), .NUM_APPS(NA), .WARPS_PER_CORE(8), .L1_ENTRIES(8),
             .L2TLB_ENTRIES(32), .L2TLB_WAYS(4), .BP_ENTRIES(8), .L2TLB_LATENCY(L2LAT),
             .WALK_THREADS(8), .L2_SETS(4), .EPOCH(2000)) dut (.*);

  logic [NP-1:0] stall;
  int n_reads [NP], n_row_hits [NP];
  for (genvar p = 0; p < NP; p++) begin : g_dram
    dram_model u_dram (.clk, .rst_n, .stall(stall[p]), .cmd_valid(dram_cmd_valid[p]),
      .cmd_ready(dram_cmd_ready[p]), .cmd(dram_cmd[p]), .rsp_valid(dram_rsp_valid[p]),
      .rsp_ready(dram_rsp_ready[p]), .rsp(dram_rsp[p]), .n_reads(n_reads[p]),
      .n_row_hits(n_row_hits[p]));
  end

  // ---------------- reference state ----------------
  logic [PPN_W-1:0] root [NC];
  int pend [NC][logic [VPN_W-1:0]];
  logic [VPN_W-1:0] last_vpn [NC];
  logic [WARP_W-1:0] last_warp [NC];
  bit last_acc [NC];
  logic [PA_W-1:0] d_addr [NB][256];
  bit d_busy [NB][256];
  bit random_phase = 0;

  // ---------------- mechanism counters ----------------
  typedef enum int { M_L1HIT, M_L2HIT, M_BPHIT, M_TOKFILL, M_NOTOKFILL, M_MERGE, M_TOKCHG,
                     M_WCACHED, M_WBYPASS, M_GOLD, M_SILVER, M_NORMAL, M_QUOTA, M_CR3STALL,
                     M_FLUSH, M_EPOCH, M_N } mech_t;
  int mech [M_N];
  string mname [M_N] = '{"L1 TLB hit", "L2 TLB hit", "bypass cache hit", "token fill of L2 TLB",
                         "tokenless fill of bypass cache", "walk merge", "token count change",
                         "cached walk read", "L2-bypassed walk read", "Golden issue",
                         "Silver issue", "Normal issue", "non-zero Silver quota",
                         "root change drain stall", "TLB flush", "epoch end"};
  logic [7:0] tok_prev [NA];

  always @(posedge clk) if (rst_n) begin
    // translations
    for (int c = 0; c < NC; c++) begin
      if (tr_hit_valid[c]) begin
        mech[M_L1HIT]++;
        check(last_acc[c] && tr_hit_vpn[c] == last_vpn[c] && tr_hit_warp[c] == last_warp[c],
              "L1 hit answers one cycle after its request");
        check(tr_hit_ppn[c] == ref_translate(root[c], tr_hit_vpn[c]),
              $sformatf("L1 hit translation core %0d vpn %h", c, tr_hit_vpn[c]));
        if (pend[c].exists(tr_hit_vpn[c]) && pend[c][tr_hit_vpn[c]] > 0) pend[c][tr_hit_vpn[c]]--;
      end
      if (tr_fill_valid[c]) begin
        check(tr_fill_ppn[c] == ref_translate(root[c], tr_fill_vpn[c]),
              $sformatf("fill translation core %0d vpn %h", c, tr_fill_vpn[c]));
        pend[c][tr_fill_vpn[c]] = 0;
      end
      last_acc[c] = tr_req_valid[c] && tr_req_ready[c];
      last_vpn[c] = tr_req_vpn[c]; last_warp[c] = tr_req_warp[c];
      if (last_acc[c]) begin
        if (!pend[c].exists(tr_req_vpn[c])) pend[c][tr_req_vpn[c]] = 0;
        pend[c][tr_req_vpn[c]]++;
      end
      if (cr3_set_valid[c] && !cr3_set_ready[c]) mech[M_CR3STALL]++;
      if (flush_valid[c] && flush_ready[c]) mech[M_FLUSH]++;
    end
    // data
    for (int b = 0; b < NB; b++) if (drsp_valid[b]) begin
      int s; s = int'(drsp[b].src);
      check(d_busy[b][s], "data response for an outstanding request");
      check(drsp[b].data == mem_word(d_addr[b][s]), $sformatf("data response bank %0d", b));
      d_busy[b][s] = 0;
    end
    // mechanisms
    if (dut.l2_rsp_valid && !dut.l2_rsp_bp) mech[M_L2HIT]++;
    if (dut.l2_rsp_valid && dut.l2_rsp_bp) mech[M_BPHIT]++;
    if (dut.done_valid && dut.done_ready && dut.done_tok) mech[M_TOKFILL]++;
    if (dut.done_valid && dut.done_ready && !dut.done_tok) mech[M_NOTOKFILL]++;
    if (dut.u_walker.merged) mech[M_MERGE]++;
    if (dut.mem_req_valid && dut.mem_req_ready) begin
      if (dut.bypass) mech[M_WBYPASS]++; else mech[M_WCACHED]++;
    end
    for (int p = 0; p < NP; p++) if (dram_cmd_valid[p] && dram_cmd_ready[p])
      case (dram_cmd_class[p]) 2'd0: mech[M_GOLD]++; 2'd1: mech[M_SILVER]++; default: mech[M_NORMAL]++; endcase
    for (int a = 0; a < NA; a++) begin
      if (dut.thres[a] != 0 && epoch_end) mech[M_QUOTA]++;
      if (dut.u_tok.update_done && 8'(dut.u_tok.tokens[a]) != tok_prev[a]) mech[M_TOKCHG]++;
      if (dut.u_tok.update_done) tok_prev[a] = 8'(dut.u_tok.tokens[a]);
    end
    if (epoch_end) mech[M_EPOCH]++;
  end

  // ---------------- stimulus helpers ----------------
  function automatic logic [VPN_W-1:0] hot_vpn(input int c, input int k);
    return VPN_W'(36'h10_0000 * (c + 1) + k * 7);
  endfunction
  function automatic logic [VPN_W-1:0] cold_vpn();
    return VPN_W'({$urandom_range(3), 9'($urandom), 9'($urandom), 9'($urandom)});
  endfunction

  task automatic translate_wait(input int c, input logic [VPN_W-1:0] vpn, input int warp,
                                output int lat, output bit was_hit);
    tr_req_valid[c] = 1; tr_req_vpn[c] = vpn; tr_req_warp[c] = WARP_W'(warp);
    @(negedge clk); while (!tr_req_ready[c]) @(negedge clk);
    @(posedge clk); #1 tr_req_valid[c] = 0; lat = 1; was_hit = 0;
    while (lat < 5000) begin
      if (tr_hit_valid[c] && tr_hit_vpn[c] == vpn) begin was_hit = 1; break; end
      if (tr_fill_valid[c] && tr_fill_vpn[c] == vpn) break;
      @(posedge clk); #1 lat++;
    end
    @(posedge clk); #1;
  endtask

  bit core_run [NC];
  int phase2_cycles = 30000;
  task automatic core_driver(input int c);
    bit taken;
    while (random_phase) begin
      // the handshake is sampled at the clock edge, as the design sees it
      @(posedge clk); taken = tr_req_valid[c] && tr_req_ready[c]; #1;
      if (!tr_req_valid[c] || taken) begin
        tr_req_valid[c] = 0;
        if (core_run[c] && $urandom_range(2) != 0) begin
          tr_req_valid[c] = 1;
          tr_req_vpn[c]   = ($urandom_range(9) < 7) ? hot_vpn(c, $urandom_range(11)) : cold_vpn();
          tr_req_warp[c]  = WARP_W'($urandom_range(WARPS - 1));
        end
      end
    end
    tr_req_valid[c] = 0;
  endtask

  task automatic data_driver(input int b);
    int src;
    bit taken;
    src = 0;
    while (random_phase) begin
      @(posedge clk); taken = dreq_valid[b] && dreq_ready[b]; #1;
      if (!dreq_valid[b] || taken) begin
        dreq_valid[b] = 0;
        if ($urandom_range(7) == 0 && !d_busy[b][src]) begin
          logic [PA_W-1:0] a;
          int line;
          line = ($urandom_range(3) != 0) ? $urandom_range(5) : $urandom_range(4000);
          a = (PA_W'(line) << 11) | (PA_W'(b % BK) << 10) | (PA_W'(b / BK) << 7) |
              PA_W'($urandom_range(15) * 8) | (PA_W'(1) << 36);
          dreq_valid[b] = 1;
          dreq[b] = '0; dreq[b].addr = a; dreq[b].src = 8'(src);
          dreq[b].app = APP_W'($urandom_range(NA - 1));
          dreq[b].we = ($urandom_range(9) == 0);
          dreq[b].wdata = mem_word(a);   // writes keep the memory image unchanged
          d_addr[b][src] = a; d_busy[b][src] = 1;
          src = (src + 1) % 256;
        end
      end
    end
    // a request already presented stays until it is taken
    while (dreq_valid[b]) begin
      @(posedge clk); taken = dreq_valid[b] && dreq_ready[b]; #1;
      if (taken) dreq_valid[b] = 0;
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int lat; bit h; int np;
    tr_req_valid = 0; cr3_set_valid = 0; flush_valid = 0; dreq_valid = 0; stall = 0;
    for (int c = 0; c < NC; c++) begin
      tr_req_vpn[c] = 0; tr_req_warp[c] = 0; cr3_set_root[c] = 0; cr3_set_asid[c] = 0;
      last_acc[c] = 0; core_run[c] = 1;
      root[c] = PPN_W'(28'h00A_0000 + 28'h1_1111 * c);
    end
    for (int b = 0; b < NB; b++) begin dreq[b] = '0; for (int s = 0; s < 256; s++) d_busy[b][s] = 0; end
    for (int m = 0; m < M_N; m++) mech[m] = 0;
    for (int a = 0; a < NA; a++) tok_prev[a] = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // page table roots and address spaces
    for (int c = 0; c < NC; c++) begin
      cr3_set_valid[c] = 1; cr3_set_root[c] = root[c]; cr3_set_asid[c] = ASID_W'(c);
    end
    @(negedge clk); while (cr3_set_ready != '1) @(negedge clk);
    @(posedge clk); #1 cr3_set_valid = 0;
    // phase 1: cold walk, L1 eviction, L2 TLB hit latency, L1 hit latency
    translate_wait(0, 36'h0_0123_4567, 0, lat, h);
    check(!h && lat > 2 * L2LAT, $sformatf("cold translation walks (%0d cycles)", lat));
    for (int k = 0; k < L1E + 2; k++) translate_wait(0, 36'h0_0123_4600 + k, 0, lat, h);
    translate_wait(0, 36'h0_0123_4567, 0, lat, h);
    check(!h && lat == L2LAT + 1, $sformatf("L2 TLB hit after L2TLB_LATENCY+1 cycles (%0d)", lat));
    translate_wait(0, 36'h0_0123_4567, 0, lat, h);
    check(h && lat == 1, $sformatf("L1 TLB hit after one cycle (%0d)", lat));
    // phase 2: random traffic
    random_phase = 1;
    fork
      for (int c = 0; c < NC; c++) begin
        automatic int cc = c;
        fork core_driver(cc); join_none
      end
      for (int b = 0; b < NB; b++) begin
        automatic int bb = b;
        fork data_driver(bb); join_none
      end
      for (int i = 0; i < phase2_cycles; i++) begin
        // changed just after the clock edge so that ready signals are
        // settled when the drivers sample them at the falling edge
        @(posedge clk); #1;
        for (int p = 0; p < NP; p++) stall[p] = ($urandom_range(4) == 0);
      end
      begin
        // root change of core 1 in the middle of the run
        repeat (phase2_cycles / 2) @(posedge clk);
        #1 core_run[1] = 0;
        root[1] = root[1];
        cr3_set_valid[1] = 1; cr3_set_root[1] = PPN_W'(28'h0BB_0000); cr3_set_asid[1] = 1;
        @(negedge clk); while (!cr3_set_ready[1]) @(negedge clk);
        @(posedge clk); #1 cr3_set_valid[1] = 0; root[1] = PPN_W'(28'h0BB_0000);
        flush_valid[1] = 1;
        @(negedge clk); while (!flush_ready[1]) @(negedge clk);
        @(posedge clk); #1 flush_valid[1] = 0;
        core_run[1] = 1;
      end
    join
    random_phase = 0;
    stall = 0;
    repeat (3000) @(posedge clk);
    // every request answered
    np = 0;
    for (int c = 0; c < NC; c++) foreach (pend[c][v]) if (pend[c][v] > 0) np++;
    check(np == 0, $sformatf("every translation answered (%0d outstanding)", np));
    np = 0;
    for (int b = 0; b < NB; b++) for (int s = 0; s < 256; s++) if (d_busy[b][s]) begin
      np++; $display("outstanding bank %0d src %0d addr %h", b, s, d_addr[b][s]);
    end
    check(np == 0, $sformatf("every data request answered (%0d outstanding)", np));
    for (int m = 0; m < M_N; m++) begin
      $display("mechanism %-30s %0d", mname[m], mech[m]);
      if (NEED_EPOCH || !(m inside {M_TOKCHG, M_QUOTA, M_SILVER, M_EPOCH, M_NOTOKFILL, M_BPHIT}))
        check(mech[m] > 0, $sformatf("mechanism never happened: %s", mname[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
