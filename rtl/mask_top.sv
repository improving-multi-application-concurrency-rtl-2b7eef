// mask_top: the MASK translation-aware GPU memory hierarchy.
//
// NUM_CORES shader cores share one GPU while running kernels of different
// address spaces. Each core has a CR3-like page table root register and a
// private L1 TLB. L1 misses are arbitrated round-robin into the shared L2
// TLB, whose misses are served by a shared multi-threaded page table walker.
// Page table reads travel through the NUM_PARTS memory partitions, each with
// BANKS shared L2 cache banks and one DRAM channel scheduler. Three
// mechanisms make the hierarchy aware of translation traffic:
//   1. TLB-Fill Tokens (token_ctrl, shared_l2_tlb): only warps holding a
//      token fill the L2 TLB, the rest fill a small bypass cache; the token
//      count of every application adapts at each epoch end.
//   2. TLB-Request-Aware L2 Bypass (l2_bypass_ctrl): walk levels that hit the
//      L2 less often than data skip the L2 cache.
//   3. Address-Space-Aware DRAM Scheduler (dram_sched, silver_thres): walk
//      reads go to a Golden queue served first; one application at a time
//      uses a Silver queue served before the Normal queue, with turns sized
//      from the walker's stall statistics.
// An epoch counter (EPOCH cycles, 100 000) paces the token and quota updates.
//
// Outside this module: the shader cores and their L1 data caches (tr_*,
// cr3_*, flush_*, and data requests dreq_* already routed to an L2 bank by
// the interconnect, bank index = partition*BANKS + bank) and the DRAM devices
// (dram_cmd_*, dram_rsp_*; a read returns its 128-byte line, writes return
// nothing).
//
// Timing: an L1 hit answers on tr_hit_* one cycle after the request; an L1
// miss that hits in the L2 TLB returns on tr_fill_* L2TLB_LATENCY+1 cycles
// after the request (one L1 cycle, then the L2 TLB pipeline); walks return on tr_fill_* to every core in their core
// mask. A page table root change (cr3_set_*) is accepted only once the core
// has no translation in flight. flush_* flushes the core's L1 TLB and the
// L2 TLB / bypass cache entries of the core's ASID.
//
// Lint notes: outputs of sub-blocks that the top does not need (token
// counts and direction, quota busy flag, walker merge pulse, root cache ASID,
// miss warp) are left open, and the L2 TLB's rsp_from_bypass flag is kept as
// a named signal for observation only. rst_n drives the asynchronous reset of
// the flops and the disable condition of the concurrent assertions, which a
// linter reports as a net used both synchronously and asynchronously.
module mask_top
  import mask_pkg::*;
#(
  parameter int NUM_CORES      = 30,
  parameter int NUM_APPS       = 30,
  parameter int NUM_PARTS      = 8,
  parameter int BANKS          = 2,
  parameter int WARPS_PER_CORE = 64,
  parameter int L1_ENTRIES     = 64,
  parameter int L2TLB_ENTRIES  = 512,
  parameter int L2TLB_WAYS     = 16,
  parameter int BP_ENTRIES     = 32,
  parameter int L2TLB_LATENCY  = 10,
  parameter int WALK_THREADS   = 64,
  parameter int L2_SETS        = 64,
  parameter int L2_WAYS        = 16,
  parameter int L2_LATENCY     = 10,
  parameter int GOLD_DEPTH     = 16,
  parameter int SILVER_DEPTH   = 64,
  parameter int NORMAL_DEPTH   = 192,
  parameter int THRES_MAX      = 500,
  parameter int EPOCH          = 100000
) (
  input  logic clk,
  input  logic rst_n,
  // per-core translation
  input  logic [NUM_CORES-1:0] tr_req_valid,
  output logic [NUM_CORES-1:0] tr_req_ready,
  input  logic [VPN_W-1:0]     tr_req_vpn  [NUM_CORES],
  input  logic [WARP_W-1:0]    tr_req_warp [NUM_CORES],
  output logic [NUM_CORES-1:0] tr_hit_valid,
  output logic [VPN_W-1:0]     tr_hit_vpn  [NUM_CORES],
  output logic [PPN_W-1:0]     tr_hit_ppn  [NUM_CORES],
  output logic [WARP_W-1:0]    tr_hit_warp [NUM_CORES],
  output logic [NUM_CORES-1:0] tr_fill_valid,
  output logic [VPN_W-1:0]     tr_fill_vpn [NUM_CORES],
  output logic [PPN_W-1:0]     tr_fill_ppn [NUM_CORES],
  // per-core page table root and TLB flush
  input  logic [NUM_CORES-1:0] cr3_set_valid,
  output logic [NUM_CORES-1:0] cr3_set_ready,
  input  logic [PPN_W-1:0]     cr3_set_root [NUM_CORES],
  input  logic [ASID_W-1:0]    cr3_set_asid [NUM_CORES],
  input  logic [NUM_CORES-1:0] flush_valid,
  output logic [NUM_CORES-1:0] flush_ready,
  // data requests from the L1 data caches, per L2 bank
  input  logic [NUM_PARTS*BANKS-1:0] dreq_valid,
  output logic [NUM_PARTS*BANKS-1:0] dreq_ready,
  input  mem_req_t                   dreq [NUM_PARTS*BANKS],
  output logic [NUM_PARTS*BANKS-1:0] drsp_valid,
  output mem_rsp_t                   drsp [NUM_PARTS*BANKS],
  // DRAM channels
  output logic [NUM_PARTS-1:0] dram_cmd_valid,
  input  logic [NUM_PARTS-1:0] dram_cmd_ready,
  output dram_req_t            dram_cmd [NUM_PARTS],
  output logic [1:0]           dram_cmd_class [NUM_PARTS],
  output logic [NUM_PARTS-1:0] dram_cmd_row_hit,
  input  logic [NUM_PARTS-1:0] dram_rsp_valid,
  output logic [NUM_PARTS-1:0] dram_rsp_ready,
  input  dram_rsp_t            dram_rsp [NUM_PARTS],
  output logic                 epoch_end
);
  localparam int NB    = NUM_PARTS * BANKS;
  localparam int N_RSP = NUM_PARTS * (BANKS + 1);

  // ---- epoch timer ----
  logic [$clog2(EPOCH)-1:0] ecnt;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ecnt <= '0;
    else ecnt <= (ecnt == $bits(ecnt)'(EPOCH-1)) ? '0 : ecnt + 1'b1;
  assign epoch_end = (ecnt == $bits(ecnt)'(EPOCH-1));

  // ---- page table roots ----
  logic [NUM_CORES-1:0] core_valid, core_busy;
  logic [ASID_W-1:0]    core_asid [NUM_CORES];
  logic [CORE_W-1:0]    rd_core;
  logic [PPN_W-1:0]     rd_root;
  pt_root_cache #(.NUM_CORES(NUM_CORES)) u_roots (
    .clk, .rst_n, .set_valid(cr3_set_valid), .set_ready(cr3_set_ready),
    .set_root(cr3_set_root), .set_asid(cr3_set_asid), .core_busy,
    .core_valid, .core_asid, .rd_core, .rd_root, .rd_asid());

  // ---- L1 TLBs ----
  logic [NUM_CORES-1:0] l1_miss_valid, l1_miss_ready, l1_fill_valid, l1_flush;
  logic [VPN_W-1:0]     l1_miss_vpn  [NUM_CORES];
  logic [WARP_W-1:0]    l1_miss_warp [NUM_CORES];
  logic [VPN_W-1:0]     l1_fill_vpn  [NUM_CORES];
  logic [PPN_W-1:0]     l1_fill_ppn  [NUM_CORES];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    l1_tlb #(.ENTRIES(L1_ENTRIES)) u_l1 (
      .clk, .rst_n,
      .req_valid(tr_req_valid[c]), .req_ready(tr_req_ready[c]),
      .req_vpn(tr_req_vpn[c]), .req_warp(tr_req_warp[c]),
      .hit_valid(tr_hit_valid[c]), .hit_vpn(tr_hit_vpn[c]), .hit_ppn(tr_hit_ppn[c]),
      .hit_warp(tr_hit_warp[c]),
      .miss_valid(l1_miss_valid[c]), .miss_ready(l1_miss_ready[c]),
      .miss_vpn(l1_miss_vpn[c]), .miss_warp(l1_miss_warp[c]),
      .fill_valid(l1_fill_valid[c]), .fill_vpn(l1_fill_vpn[c]), .fill_ppn(l1_fill_ppn[c]),
      .flush(l1_flush[c]));
    assign tr_fill_valid[c] = l1_fill_valid[c];
    assign tr_fill_vpn[c]   = l1_fill_vpn[c];
    assign tr_fill_ppn[c]   = l1_fill_ppn[c];
  end

  // ---- L1 miss arbitration into the shared L2 TLB ----
  logic [NUM_CORES-1:0] m_gnt;
  logic [$clog2(NUM_CORES)-1:0] m_idx;
  logic l2_req_ready;
  rr_arb #(.N(NUM_CORES)) u_marb (.clk, .rst_n, .req(l1_miss_valid), .adv(l2_req_ready),
    .gnt(m_gnt), .gnt_idx(m_idx));
  assign l1_miss_ready = m_gnt & {NUM_CORES{l2_req_ready}};

  // ---- TLB-fill tokens ----
  logic acc_valid, acc_hit, q_has_token;
  logic [CORE_W-1:0] acc_core;
  token_ctrl #(.NUM_CORES(NUM_CORES), .NUM_APPS(NUM_APPS), .WARPS_PER_CORE(WARPS_PER_CORE)) u_tok (
    .clk, .rst_n, .acc_valid, .acc_core, .acc_hit, .epoch_end,
    .core_valid, .core_app(core_asid),
    .q_core(CORE_W'(m_idx)), .q_warp(l1_miss_warp[m_idx]), .q_has_token,
    .enabled(), .tokens(), .token_dir(), .update_done());

  // ---- shared L2 TLB ----
  logic l2_rsp_valid, l2_miss_valid, l2_miss_ready, l2_miss_tok, l2_rsp_bp;
  logic [CORE_W-1:0] l2_rsp_core, l2_miss_core;
  logic [VPN_W-1:0]  l2_rsp_vpn, l2_miss_vpn;
  logic [PPN_W-1:0]  l2_rsp_ppn;
  logic [ASID_W-1:0] l2_miss_asid;
  logic [NUM_CORES-1:0] l2_busy;
  logic done_valid, done_ready, done_tok;
  logic [ASID_W-1:0] done_asid;
  logic [VPN_W-1:0]  done_vpn;
  logic [PPN_W-1:0]  done_ppn;
  logic [NUM_CORES-1:0] done_cores;
  logic fl_any;
  logic [NUM_CORES-1:0] fl_gnt;
  logic [$clog2(NUM_CORES)-1:0] fl_idx;

  shared_l2_tlb #(.NUM_CORES(NUM_CORES), .ENTRIES(L2TLB_ENTRIES), .WAYS(L2TLB_WAYS),
                  .BP_ENTRIES(BP_ENTRIES), .LATENCY(L2TLB_LATENCY)) u_l2tlb (
    .clk, .rst_n,
    .req_valid(|l1_miss_valid), .req_ready(l2_req_ready), .req_core(CORE_W'(m_idx)),
    .req_warp(l1_miss_warp[m_idx]), .req_asid(core_asid[m_idx]), .req_vpn(l1_miss_vpn[m_idx]),
    .req_has_token(q_has_token),
    .rsp_valid(l2_rsp_valid), .rsp_core(l2_rsp_core), .rsp_vpn(l2_rsp_vpn), .rsp_ppn(l2_rsp_ppn),
    .rsp_from_bypass(l2_rsp_bp),
    .miss_valid(l2_miss_valid), .miss_ready(l2_miss_ready), .miss_core(l2_miss_core),
    .miss_warp(), .miss_asid(l2_miss_asid), .miss_vpn(l2_miss_vpn), .miss_has_token(l2_miss_tok),
    .fill_valid(done_valid && done_ready), .fill_has_token(done_tok), .fill_asid(done_asid),
    .fill_vpn(done_vpn), .fill_ppn(done_ppn),
    .flush_valid(fl_any), .flush_asid(core_asid[fl_idx]),
    .acc_valid, .acc_core, .acc_hit, .busy(l2_busy));

  // ---- TLB flush: one core per cycle reaches the shared level ----
  rr_arb #(.N(NUM_CORES)) u_farb (.clk, .rst_n, .req(flush_valid), .adv(1'b1),
    .gnt(fl_gnt), .gnt_idx(fl_idx));
  assign fl_any      = |flush_valid;
  assign flush_ready = fl_gnt;
  assign l1_flush    = fl_gnt;

  // ---- page table walker ----
  logic mem_req_valid, mem_req_ready;
  mem_req_t mem_req;
  logic [N_RSP-1:0] w_rsp_valid;
  mem_rsp_t         w_rsp [N_RSP];
  logic [5:0] concurrent [NUM_APPS], stalled [NUM_APPS];
  logic [NUM_CORES-1:0] walk_pending;

  assign rd_core = l2_miss_core;
  pt_walker #(.THREADS(WALK_THREADS), .NUM_CORES(NUM_CORES), .NUM_APPS(NUM_APPS),
              .LEVELS(PT_LEVELS), .N_RSP(N_RSP)) u_walker (
    .clk, .rst_n,
    .miss_valid(l2_miss_valid), .miss_ready(l2_miss_ready), .miss_core(l2_miss_core),
    .miss_asid(l2_miss_asid), .miss_vpn(l2_miss_vpn), .miss_has_token(l2_miss_tok),
    .miss_root(rd_root),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid(w_rsp_valid), .mem_rsp(w_rsp),
    .done_valid, .done_ready, .done_asid, .done_vpn, .done_ppn, .done_has_token(done_tok),
    .done_cores, .epoch_end, .concurrent, .stalled, .core_pending(walk_pending), .merged());

  // a finished walk waits while the L2 TLB returns a hit to one of its cores
  assign done_ready = !(l2_rsp_valid && done_cores[l2_rsp_core]);

  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) begin
      if (l2_rsp_valid && l2_rsp_core == CORE_W'(c)) begin
        l1_fill_valid[c] = 1'b1; l1_fill_vpn[c] = l2_rsp_vpn; l1_fill_ppn[c] = l2_rsp_ppn;
      end else begin
        l1_fill_valid[c] = done_valid && done_ready && done_cores[c];
        l1_fill_vpn[c]   = done_vpn;
        l1_fill_ppn[c]   = done_ppn;
      end
    end
  end

  assign core_busy = l1_miss_valid | l2_busy | walk_pending;

  // ---- L2 bypass decision for page walk reads ----
  logic [NB-1:0] ev_valid, ev_hit;
  depth_t        ev_depth [NB];
  logic          bypass;
  l2_bypass_ctrl #(.LEVELS(PT_LEVELS), .NEV(NB)) u_byp (
    .clk, .rst_n, .ev_valid, .ev_depth, .ev_hit, .q_depth(mem_req.depth), .q_bypass(bypass));

  // ---- silver quotas ----
  logic [9:0] thres [NUM_APPS];
  silver_thres #(.NUM_APPS(NUM_APPS), .THRES_MAX(THRES_MAX)) u_silver (
    .clk, .rst_n, .epoch_end, .concurrent, .stalled, .thres, .busy());

  // ---- memory partitions ----
  logic [NUM_PARTS-1:0] p_wreq_valid, p_wreq_ready;
  wire [2:0] wpart = part_of(mem_req.addr);
  assign mem_req_ready = p_wreq_ready[wpart];

  for (genvar p = 0; p < NUM_PARTS; p++) begin : g_part
    logic [BANKS:0]   wv;
    mem_rsp_t         wr [BANKS+1];
    logic [BANKS-1:0] dv, dr, rv, evv, evh;
    mem_req_t         dq [BANKS];
    mem_rsp_t         rs [BANKS];
    depth_t           evd [BANKS];
    assign p_wreq_valid[p] = mem_req_valid && wpart == 3'(p);
    for (genvar b = 0; b < BANKS; b++) begin : g_b
      assign dv[b] = dreq_valid[p*BANKS+b];
      assign dq[b] = dreq[p*BANKS+b];
      assign dreq_ready[p*BANKS+b] = dr[b];
      assign drsp_valid[p*BANKS+b] = rv[b];
      assign drsp[p*BANKS+b]       = rs[b];
      assign ev_valid[p*BANKS+b]   = evv[b];
      assign ev_hit[p*BANKS+b]     = evh[b];
      assign ev_depth[p*BANKS+b]   = evd[b];
    end
    for (genvar r = 0; r <= BANKS; r++) begin : g_r
      assign w_rsp_valid[p*(BANKS+1)+r] = wv[r];
      assign w_rsp[p*(BANKS+1)+r]       = wr[r];
    end
    mem_partition #(.BANKS(BANKS), .SETS(L2_SETS), .WAYS(L2_WAYS), .LATENCY(L2_LATENCY),
                    .NUM_APPS(NUM_APPS), .GOLD_DEPTH(GOLD_DEPTH), .SILVER_DEPTH(SILVER_DEPTH),
                    .NORMAL_DEPTH(NORMAL_DEPTH)) u_part (
      .clk, .rst_n,
      .wreq_valid(p_wreq_valid[p]), .wreq_ready(p_wreq_ready[p]), .wreq(mem_req), .wreq_bypass(bypass),
      .wrsp_valid(wv), .wrsp(wr),
      .dreq_valid(dv), .dreq_ready(dr), .dreq(dq), .rsp_valid(rv), .rsp(rs),
      .cmd_valid(dram_cmd_valid[p]), .cmd_ready(dram_cmd_ready[p]), .cmd(dram_cmd[p]),
      .cmd_class(dram_cmd_class[p]), .cmd_row_hit(dram_cmd_row_hit[p]),
      .drsp_valid(dram_rsp_valid[p]), .drsp_ready(dram_rsp_ready[p]), .drsp(dram_rsp[p]),
      .thres, .ev_valid(evv), .ev_depth(evd), .ev_hit(evh));
  end

  initial begin
    assert (NUM_PARTS == 8) else $error("partition routing uses address bits [9:7]");
    assert (BANKS == 2) else $error("bank routing uses address bit 10");
  end
endmodule
