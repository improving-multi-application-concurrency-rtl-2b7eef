// shared_l2_tlb: the shared second-level TLB of MASK together with its
// bypass cache.
//
// An L1 TLB miss (req_*) probes the ASID-tagged set-associative L2 TLB and
// the small fully associative bypass cache in the same cycle; a hit in either
// is a hit. The probe result travels through a LATENCY-stage pipeline (10
// cycles in the evaluated configuration), so a hit is returned on rsp_*
// exactly LATENCY cycles after the request was accepted; a miss leaves the
// pipeline on miss_* towards the page table walker at the same point. If the
// walker cannot take a miss, the pipeline stalls (req_ready low).
//
// Fills (fill_*) come from finished page walks and are steered by the
// TLB-fill token of the warp that started the walk: with a token the
// translation goes into the L2 TLB, without one it goes into the bypass cache.
// This is the core of the TLB-Fill Tokens mechanism. flush_* removes all
// translations of one ASID from both structures.
//
// acc_* reports every probe (core and hit/miss) to the token controller,
// which keeps the per-core hit and miss counters. busy[c] is high while a
// request of core c is inside the pipeline (used to drain before a page table
// root change).
module shared_l2_tlb
  import mask_pkg::*;
#(
  parameter int NUM_CORES = 30,
  parameter int ENTRIES   = 512,
  parameter int WAYS      = 16,
  parameter int BP_ENTRIES = 32,
  parameter int LATENCY   = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [CORE_W-1:0] req_core,
  input  logic [WARP_W-1:0] req_warp,
  input  logic [ASID_W-1:0] req_asid,
  input  logic [VPN_W-1:0]  req_vpn,
  input  logic              req_has_token,
  // hit response
  output logic              rsp_valid,
  output logic [CORE_W-1:0] rsp_core,
  output logic [VPN_W-1:0]  rsp_vpn,
  output logic [PPN_W-1:0]  rsp_ppn,
  output logic              rsp_from_bypass,
  // miss towards the page table walker
  output logic              miss_valid,
  input  logic              miss_ready,
  output logic [CORE_W-1:0] miss_core,
  output logic [WARP_W-1:0] miss_warp,
  output logic [ASID_W-1:0] miss_asid,
  output logic [VPN_W-1:0]  miss_vpn,
  output logic              miss_has_token,
  // fill from a finished walk
  input  logic              fill_valid,
  input  logic              fill_has_token,
  input  logic [ASID_W-1:0] fill_asid,
  input  logic [VPN_W-1:0]  fill_vpn,
  input  logic [PPN_W-1:0]  fill_ppn,
  // ASID flush
  input  logic              flush_valid,
  input  logic [ASID_W-1:0] flush_asid,
  // probe report for the token controller
  output logic              acc_valid,
  output logic [CORE_W-1:0] acc_core,
  output logic              acc_hit,
  output logic [NUM_CORES-1:0] busy
);
  typedef struct packed {
    logic              v;
    logic              hit;
    logic              bp;
    logic [CORE_W-1:0] core;
    logic [WARP_W-1:0] warp;
    logic [ASID_W-1:0] asid;
    logic [VPN_W-1:0]  vpn;
    logic [PPN_W-1:0]  ppn;
    logic              tok;
  } stage_t;

  stage_t pipe [LATENCY];

  logic t_hit, b_hit;
  logic [PPN_W-1:0] t_ppn, b_ppn;

  l2_tlb_array #(.ENTRIES(ENTRIES), .WAYS(WAYS)) u_tlb (
    .clk, .rst_n,
    .lk_valid(req_valid && req_ready), .lk_asid(req_asid), .lk_vpn(req_vpn),
    .lk_hit(t_hit), .lk_ppn(t_ppn),
    .fill_valid(fill_valid && fill_has_token), .fill_asid, .fill_vpn, .fill_ppn,
    .flush_valid, .flush_asid);

  tlb_bypass_cache #(.ENTRIES(BP_ENTRIES)) u_bp (
    .clk, .rst_n,
    .lk_valid(req_valid && req_ready), .lk_asid(req_asid), .lk_vpn(req_vpn),
    .lk_hit(b_hit), .lk_ppn(b_ppn),
    .fill_valid(fill_valid && !fill_has_token), .fill_asid, .fill_vpn, .fill_ppn,
    .flush_valid, .flush_asid);

  stage_t last;
  assign last = pipe[LATENCY-1];
  wire stall = last.v && !last.hit && !miss_ready;
  assign req_ready = !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) pipe[i] <= '0;
    end else if (!stall) begin
      pipe[0].v    <= req_valid;
      pipe[0].hit  <= t_hit || b_hit;
      pipe[0].bp   <= !t_hit && b_hit;
      pipe[0].core <= req_core;
      pipe[0].warp <= req_warp;
      pipe[0].asid <= req_asid;
      pipe[0].vpn  <= req_vpn;
      pipe[0].ppn  <= t_hit ? t_ppn : b_ppn;
      pipe[0].tok  <= req_has_token;
      for (int i = 1; i < LATENCY; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign rsp_valid       = last.v && last.hit;
  assign rsp_core        = last.core;
  assign rsp_vpn         = last.vpn;
  assign rsp_ppn         = last.ppn;
  assign rsp_from_bypass = last.bp;
  assign miss_valid      = last.v && !last.hit;
  assign miss_core       = last.core;
  assign miss_warp       = last.warp;
  assign miss_asid       = last.asid;
  assign miss_vpn        = last.vpn;
  assign miss_has_token  = last.tok;

  assign acc_valid = req_valid && req_ready;
  assign acc_core  = req_core;
  assign acc_hit   = t_hit || b_hit;

  always_comb begin
    busy = '0;
    for (int i = 0; i < LATENCY; i++)
      if (pipe[i].v) busy[pipe[i].core] = 1'b1;
  end
endmodule
