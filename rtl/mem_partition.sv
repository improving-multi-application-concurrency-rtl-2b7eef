// mem_partition: one memory partition of the MASK memory hierarchy.
//
// It holds BANKS (2) shared L2 cache banks, the DRAM channel's
// Address-Space-Aware scheduler and the path that lets page walk reads skip
// the L2 (TLB-Request-Aware L2 Bypass).
//
// Page walk reads arrive on wreq_* with the bypass decision already made
// (wreq_bypass). Non-bypassed reads enter the bank chosen by the address and
// take precedence over the bank's data requests (dreq_*), which come from
// the L1 data caches through the interconnect. Bypassed reads go straight to
// the scheduler, where their depth tag places them in the Golden queue. The
// scheduler accepts one request per cycle; the two banks' misses and the
// bypass path share it round-robin.
//
// DRAM returns (drsp_*) that belong to a bypassed read go straight back to
// the walker; all others refill their bank. Bank responses carrying a page
// walk depth tag go to the walker (wrsp_*, up to BANKS+1 per cycle, never
// back-pressured); data responses leave per bank on rsp_*.
//
// Lint note: the scheduler arbiter's index output and the scheduler's
// silver_app output are not needed here and left unused/open.
module mem_partition
  import mask_pkg::*;
#(
  parameter int BANKS     = 2,
  parameter int SETS      = 64,
  parameter int WAYS      = 16,
  parameter int LATENCY   = 10,
  parameter int NUM_APPS  = 30,
  parameter int GOLD_DEPTH   = 16,
  parameter int SILVER_DEPTH = 64,
  parameter int NORMAL_DEPTH = 192
) (
  input  logic             clk,
  input  logic             rst_n,
  // page walk reads
  input  logic             wreq_valid,
  output logic             wreq_ready,
  input  mem_req_t         wreq,
  input  logic             wreq_bypass,
  output logic [BANKS:0]   wrsp_valid,
  output mem_rsp_t         wrsp [BANKS+1],
  // data requests per bank
  input  logic [BANKS-1:0] dreq_valid,
  output logic [BANKS-1:0] dreq_ready,
  input  mem_req_t         dreq [BANKS],
  output logic [BANKS-1:0] rsp_valid,
  output mem_rsp_t         rsp [BANKS],
  // DRAM channel
  output logic             cmd_valid,
  input  logic             cmd_ready,
  output dram_req_t        cmd,
  output logic [1:0]       cmd_class,
  output logic             cmd_row_hit,
  input  logic             drsp_valid,
  output logic             drsp_ready,
  input  dram_rsp_t        drsp,
  // silver quotas
  input  logic [9:0]       thres [NUM_APPS],
  // L2 lookup reports for the bypass controller
  output logic [BANKS-1:0] ev_valid,
  output depth_t           ev_depth [BANKS],
  output logic [BANKS-1:0] ev_hit
);
  localparam int BW = (BANKS > 1) ? $clog2(BANKS) : 1;

  wire [BW-1:0] wbank = BW'(wreq.addr[10 +: BW]);

  logic [BANKS-1:0] b_in_valid, b_in_ready, b_out_valid, b_dq_valid, b_dq_ready;
  logic [BANKS-1:0] b_fill_valid, b_fill_ready;
  mem_req_t  b_in  [BANKS];
  mem_rsp_t  b_out [BANKS];
  dram_req_t b_dq  [BANKS];

  // ---- scheduler input arbitration: banks 0..BANKS-1, then bypass ----
  logic [BANKS:0] arb_req, arb_gnt;
  logic [$clog2(BANKS+1)-1:0] arb_idx;
  logic      s_ready;
  dram_req_t s_in;
  wire       byp_valid = wreq_valid && wreq_bypass;
  assign arb_req = {byp_valid, b_dq_valid};
  rr_arb #(.N(BANKS+1)) u_arb (.clk, .rst_n, .req(arb_req), .adv(s_ready), .gnt(arb_gnt), .gnt_idx(arb_idx));

  always_comb begin
    s_in = '0;
    if (arb_gnt[BANKS]) begin
      s_in.req = wreq; s_in.bypass = 1'b1; s_in.bank = 1'b0;
    end else begin
      for (int b = 0; b < BANKS; b++) if (arb_gnt[b]) s_in = b_dq[b];
    end
  end
  assign b_dq_ready = arb_gnt[BANKS-1:0] & {BANKS{s_ready}};

  dram_sched #(.NUM_APPS(NUM_APPS), .GOLD_DEPTH(GOLD_DEPTH), .SILVER_DEPTH(SILVER_DEPTH),
               .NORMAL_DEPTH(NORMAL_DEPTH)) u_sched (
    .clk, .rst_n, .enq_valid(|arb_req), .enq_ready(s_ready), .enq(s_in), .thres,
    .cmd_valid, .cmd_ready, .cmd, .cmd_class, .cmd_row_hit, .silver_app());

  // ---- bank inputs: page walk reads first ----
  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      logic w;
      w = wreq_valid && !wreq_bypass && wbank == BW'(b);
      b_in_valid[b] = w || dreq_valid[b];
      b_in[b]       = w ? wreq : dreq[b];
      dreq_ready[b] = !w && b_in_ready[b];
    end
    wreq_ready = wreq_bypass ? (arb_gnt[BANKS] && s_ready) : b_in_ready[wbank];
  end

  // ---- DRAM returns ----
  always_comb begin
    for (int b = 0; b < BANKS; b++)
      b_fill_valid[b] = drsp_valid && !drsp.tag.bypass && drsp.tag.bank == b[0];
    drsp_ready = drsp.tag.bypass ? 1'b1 : b_fill_ready[BW'(drsp.tag.bank)];
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    l2_cache_bank #(.SETS(SETS), .WAYS(WAYS), .LATENCY(LATENCY), .BANK_ID(b[0])) u_bank (
      .clk, .rst_n,
      .req_valid(b_in_valid[b]), .req_ready(b_in_ready[b]), .req(b_in[b]),
      .rsp_valid(b_out_valid[b]), .rsp(b_out[b]),
      .dreq_valid(b_dq_valid[b]), .dreq_ready(b_dq_ready[b]), .dreq(b_dq[b]),
      .dfill_valid(b_fill_valid[b]), .dfill_ready(b_fill_ready[b]), .dfill(drsp),
      .ev_valid(ev_valid[b]), .ev_depth(ev_depth[b]), .ev_hit(ev_hit[b]));
    assign wrsp_valid[b] = b_out_valid[b] && b_out[b].depth != '0;
    assign wrsp[b]       = b_out[b];
    assign rsp_valid[b]  = b_out_valid[b] && b_out[b].depth == '0;
    assign rsp[b]        = b_out[b];
  end

  assign wrsp_valid[BANKS]  = drsp_valid && drsp.tag.bypass;
  assign wrsp[BANKS].src    = drsp.tag.req.src;
  assign wrsp[BANKS].depth  = drsp.tag.req.depth;
  assign wrsp[BANKS].data   = drsp.line[64*drsp.tag.req.addr[6:3] +: 64];
endmodule
