// pt_walker: shared, highly threaded page table walker.
//
// THREADS walk threads (64) double as the MSHRs of the shared L2 TLB. A
// miss (miss_*) whose ASID and VPN match a walk already in flight is merged
// into it: the requesting core is added to the walk's core mask and the
// walk's count of stalled warps grows (6-bit, saturating). Otherwise a free
// thread starts a walk at the page table root of the requesting core.
//
// A walk reads one page table entry per level, LEVELS levels (4): the entry
// address is the level's table base plus 8 x the level's 9-bit VPN index,
// and the entry's bits [39:12] give the next table base, or at the last
// level the physical page. Each read leaves on mem_req_* tagged with the
// thread number (src) and the page walk depth (1..LEVELS) so the memory
// hierarchy can tell translation requests from data. Reads of different
// threads overlap; up to N_RSP read responses may arrive in one cycle. The
// oldest-waiting thread is chosen round-robin for issue.
//
// A finished walk is offered on done_* (valid/ready): the translation, the
// token bit of the warp that opened the walk (steers the L2 TLB fill) and the
// mask of cores to which the translation must be returned.
//
// For the Address-Space-Aware DRAM Scheduler it keeps, per application, the
// maximum number of concurrent walks seen in the epoch (Concurrent_i) and the
// maximum number of warps stalled on one walk (WrpStalled_i), both 6-bit and
// cleared at epoch_end. core_pending[c] is high while core c waits on a walk.
//
// Lint note: the issue arbiter's one-hot grant is unused; its index output
// selects the thread.
module pt_walker
  import mask_pkg::*;
#(
  parameter int THREADS   = 64,
  parameter int NUM_CORES = 30,
  parameter int NUM_APPS  = 30,
  parameter int LEVELS    = 4,
  parameter int N_RSP     = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  // L2 TLB miss
  input  logic              miss_valid,
  output logic              miss_ready,
  input  logic [CORE_W-1:0] miss_core,
  input  logic [ASID_W-1:0] miss_asid,
  input  logic [VPN_W-1:0]  miss_vpn,
  input  logic              miss_has_token,
  input  logic [PPN_W-1:0]  miss_root,
  // page table reads
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic [N_RSP-1:0]  mem_rsp_valid,
  input  mem_rsp_t          mem_rsp [N_RSP],
  // finished walk
  output logic              done_valid,
  input  logic              done_ready,
  output logic [ASID_W-1:0] done_asid,
  output logic [VPN_W-1:0]  done_vpn,
  output logic [PPN_W-1:0]  done_ppn,
  output logic              done_has_token,
  output logic [NUM_CORES-1:0] done_cores,
  // statistics for the DRAM scheduler
  input  logic              epoch_end,
  output logic [5:0]        concurrent [NUM_APPS],
  output logic [5:0]        stalled    [NUM_APPS],
  output logic [NUM_CORES-1:0] core_pending,
  output logic              merged        // pulses on a merged miss
);
  localparam int TW = $clog2(THREADS);

  typedef enum logic [1:0] {FREE, ISSUE, WAIT, DONE} st_e;

  st_e               st    [THREADS];
  logic [2:0]        lvl   [THREADS];
  logic [PPN_W-1:0]  base  [THREADS];
  logic [ASID_W-1:0] asid  [THREADS];
  logic [VPN_W-1:0]  vpn   [THREADS];
  logic              tok   [THREADS];
  logic [5:0]        warps [THREADS];
  logic [NUM_CORES-1:0] cores [THREADS];

  // ---- lookup of the incoming miss ----
  logic          m_hit, have_free;
  logic [TW-1:0] m_idx, free_idx, done_idx;
  logic          any_done;
  logic [THREADS-1:0] want_issue;

  always_comb begin
    m_hit = 1'b0; m_idx = '0; have_free = 1'b0; free_idx = '0;
    any_done = 1'b0; done_idx = '0; want_issue = '0;
    for (int t = THREADS-1; t >= 0; t--) begin
      if (st[t] != FREE && asid[t] == miss_asid && vpn[t] == miss_vpn) begin
        m_hit = 1'b1; m_idx = TW'(t);
      end
      if (st[t] == FREE) begin have_free = 1'b1; free_idx = TW'(t); end
      if (st[t] == DONE) begin any_done = 1'b1; done_idx = TW'(t); end
      want_issue[t] = (st[t] == ISSUE);
    end
  end

  wire done_fire = done_valid && done_ready;
  // never merge into a walk that is being retired in this cycle
  wire merge     = m_hit && !(done_fire && m_idx == done_idx);
  assign miss_ready = merge || have_free;
  wire miss_fire = miss_valid && miss_ready;
  assign merged  = miss_fire && merge;

  // ---- issue ----
  logic [THREADS-1:0] gnt;
  logic [TW-1:0]      iss;
  rr_arb #(.N(THREADS)) u_arb (.clk, .rst_n, .req(want_issue),
    .adv(mem_req_valid && mem_req_ready), .gnt, .gnt_idx(iss));

  assign mem_req_valid = |want_issue;
  always_comb begin
    mem_req       = '0;
    mem_req.addr  = pte_addr(base[iss], pt_index(vpn[iss], int'(lvl[iss])));
    mem_req.depth = (lvl[iss] > 3'd6) ? 3'd7 : lvl[iss];
    mem_req.src   = SRC_W'(iss);
    mem_req.app   = APP_W'(asid[iss]);
  end

  // ---- finished walk ----
  assign done_valid     = any_done;
  assign done_asid      = asid[done_idx];
  assign done_vpn       = vpn[done_idx];
  assign done_ppn       = base[done_idx];
  assign done_has_token = tok[done_idx];
  assign done_cores     = cores[done_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < THREADS; t++) begin
        st[t] <= FREE; lvl[t] <= '0; base[t] <= '0; asid[t] <= '0;
        vpn[t] <= '0; tok[t] <= 1'b0; warps[t] <= '0; cores[t] <= '0;
      end
    end else begin
      if (mem_req_valid && mem_req_ready) st[iss] <= WAIT;
      for (int r = 0; r < N_RSP; r++)
        if (mem_rsp_valid[r] && mem_rsp[r].depth != '0) begin
          if (lvl[TW'(mem_rsp[r].src)] == 3'(LEVELS)) st[TW'(mem_rsp[r].src)] <= DONE;
          else begin
            st[TW'(mem_rsp[r].src)]  <= ISSUE;
            lvl[TW'(mem_rsp[r].src)] <= lvl[TW'(mem_rsp[r].src)] + 1'b1;
          end
          base[TW'(mem_rsp[r].src)] <= pte_ppn(mem_rsp[r].data);
        end
      if (done_fire) st[done_idx] <= FREE;
      if (miss_fire) begin
        if (merge) begin
          cores[m_idx][miss_core] <= 1'b1;
          if (warps[m_idx] != 6'h3f) warps[m_idx] <= warps[m_idx] + 1'b1;
        end else begin
          st[free_idx]    <= ISSUE;
          lvl[free_idx]   <= 3'd1;
          base[free_idx]  <= miss_root;
          asid[free_idx]  <= miss_asid;
          vpn[free_idx]   <= miss_vpn;
          tok[free_idx]   <= miss_has_token;
          warps[free_idx] <= 6'd1;
          cores[free_idx] <= '0;
          cores[free_idx][miss_core] <= 1'b1;
        end
      end
    end
  end

  // ---- per-application statistics ----
  logic [TW:0] active [NUM_APPS];
  logic [5:0]  wmax   [NUM_APPS];
  always_comb begin
    for (int a = 0; a < NUM_APPS; a++) begin active[a] = '0; wmax[a] = '0; end
    core_pending = '0;
    for (int t = 0; t < THREADS; t++)
      if (st[t] != FREE) begin
        core_pending = core_pending | cores[t];
        for (int a = 0; a < NUM_APPS; a++)
          if (asid[t] == ASID_W'(a)) begin
            active[a] = active[a] + 1'b1;
            if (warps[t] > wmax[a]) wmax[a] = warps[t];
          end
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NUM_APPS; a++) begin concurrent[a] <= '0; stalled[a] <= '0; end
    end else if (epoch_end) begin
      for (int a = 0; a < NUM_APPS; a++) begin concurrent[a] <= '0; stalled[a] <= '0; end
    end else begin
      for (int a = 0; a < NUM_APPS; a++) begin
        if ((active[a] > (TW+1)'(63) ? 6'd63 : 6'(active[a])) > concurrent[a])
          concurrent[a] <= (active[a] > (TW+1)'(63)) ? 6'd63 : 6'(active[a]);
        if (wmax[a] > stalled[a]) stalled[a] <= wmax[a];
      end
    end
  end

  // a response must belong to a thread that waits for one
  for (genvar r = 0; r < N_RSP; r++) begin : g_chk
    a_rsp_owner: assert property (@(posedge clk) disable iff (!rst_n)
      (mem_rsp_valid[r] && mem_rsp[r].depth != '0) |-> st[TW'(mem_rsp[r].src)] == WAIT);
  end
endmodule
