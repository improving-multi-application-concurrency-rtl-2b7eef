// l2_cache_bank: one bank of the shared L2 data cache.
//
// Requests (page table reads and data requests alike) wait in a request
// buffer of RQ_DEPTH entries. The head is looked up in a WAYS-way (16) set
// associative array of SETS sets of 128-byte lines with LRU replacement.
// A read hit is answered on rsp_* exactly LATENCY (10) cycles after the
// lookup; a read miss is sent to the DRAM scheduler of the partition on
// dreq_* and answered when the line returns on dfill_* (the line is
// installed and the requested 64-bit word returned in the same cycle).
// Writes are written through to DRAM and update the line on a hit; they are
// acknowledged through the hit pipeline. Every lookup is reported on ev_*
// (depth tag and hit) to the L2 bypass controller.
//
// Geometry from the design: 2 MB in 16 banks (8 partitions x 2), 16-way,
// LRU, 10-cycle latency. Own choices: 128-byte lines, write-through without
// allocation, no miss merging, request buffer depth 8, the set index taken
// from address bits [11 +: log2(SETS)] above the partition and bank bits,
// and a DRAM return is accepted only in cycles where the hit pipeline does
// not deliver (responses are never back-pressured).
//
// Lint note: the request buffer's occupancy output is left open, and the
// set index helper uses only its own address bits.
module l2_cache_bank
  import mask_pkg::*;
#(
  parameter int   SETS     = 64,
  parameter int   WAYS     = 16,
  parameter int   LATENCY  = 10,
  parameter int   RQ_DEPTH = 8,
  parameter logic BANK_ID  = 1'b0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      rsp_valid,
  output mem_rsp_t  rsp,
  output logic      dreq_valid,
  input  logic      dreq_ready,
  output dram_req_t dreq,
  input  logic      dfill_valid,
  output logic      dfill_ready,
  input  dram_rsp_t dfill,
  output logic      ev_valid,
  output depth_t    ev_depth,
  output logic      ev_hit
);
  localparam int SW = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int WW = $clog2(WAYS);

  logic                v    [SETS][WAYS];
  logic [LINE_W-1:0]   tag  [SETS][WAYS];
  logic [WORDS*64-1:0] data [SETS][WAYS];
  logic [WW-1:0]       age  [SETS][WAYS];

  // ---- request buffer ----
  logic     h_valid, h_pop;
  mem_req_t h;
  sync_fifo #(.T(mem_req_t), .DEPTH(RQ_DEPTH)) u_rq (
    .clk, .rst_n, .in_valid(req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(h_valid), .out_ready(h_pop), .out_data(h), .count());

  function automatic logic [SW-1:0] set_of(input logic [PA_W-1:0] a);
    return a[11 +: SW];
  endfunction

  wire [SW-1:0] hs = set_of(h.addr);
  wire [SW-1:0] fs = set_of(dfill.tag.req.addr);
  logic          hit, f_have_inv;
  logic [WW-1:0] hway, f_inv, f_lru, fway;

  always_comb begin
    hit = 1'b0; hway = '0; f_have_inv = 1'b0; f_inv = '0; f_lru = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (v[hs][w] && tag[hs][w] == line_of(h.addr)) begin hit = 1'b1; hway = WW'(w); end
      if (!v[fs][w]) begin f_have_inv = 1'b1; f_inv = WW'(w); end
      if (age[fs][w] == WW'(WAYS-1)) f_lru = WW'(w);
    end
    fway = f_have_inv ? f_inv : f_lru;
  end

  // head needs DRAM for a read miss and for every write (write-through)
  wire need_dram = h.we || !hit;
  assign h_pop      = h_valid && (!need_dram || dreq_ready);
  assign dreq_valid = h_valid && need_dram;
  always_comb begin
    dreq        = '0;
    dreq.req    = h;
    dreq.bank   = BANK_ID;
    dreq.bypass = 1'b0;
  end

  assign ev_valid = h_pop;
  assign ev_depth = h.depth;
  assign ev_hit   = hit;

  // ---- hit / write-ack pipeline ----
  typedef struct packed { logic v; mem_rsp_t r; } pstage_t;
  pstage_t pipe [LATENCY];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) pipe[i] <= '0;
    end else begin
      pipe[0].v       <= h_pop && (hit || h.we);
      pipe[0].r.src   <= h.src;
      pipe[0].r.depth <= h.depth;
      pipe[0].r.data  <= h.we ? h.wdata : data[hs][hway][64*h.addr[6:3] +: 64];
      for (int i = 1; i < LATENCY; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign dfill_ready = !pipe[LATENCY-1].v;
  wire fill = dfill_valid && dfill_ready && !dfill.tag.req.we;

  always_comb begin
    if (pipe[LATENCY-1].v) begin
      rsp_valid = 1'b1; rsp = pipe[LATENCY-1].r;
    end else begin
      rsp_valid  = fill;
      rsp.src    = dfill.tag.req.src;
      rsp.depth  = dfill.tag.req.depth;
      rsp.data   = dfill.line[64*dfill.tag.req.addr[6:3] +: 64];
    end
  end

  // ---- array update ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          v[s][w] <= 1'b0; age[s][w] <= WW'(w); tag[s][w] <= '0;
        end
    end else begin
      if (h_pop && hit) begin
        if (h.we) data[hs][hway][64*h.addr[6:3] +: 64] <= h.wdata;
        if (!fill) begin
          for (int w = 0; w < WAYS; w++)
            if (age[hs][w] < age[hs][hway]) age[hs][w] <= age[hs][w] + 1'b1;
          age[hs][hway] <= '0;
        end
      end
      if (fill) begin
        v[fs][fway]    <= 1'b1;
        tag[fs][fway]  <= line_of(dfill.tag.req.addr);
        data[fs][fway] <= dfill.line;
        for (int w = 0; w < WAYS; w++)
          if (age[fs][w] < age[fs][fway]) age[fs][w] <= age[fs][w] + 1'b1;
        age[fs][fway] <= '0;
      end
    end
  end
endmodule
