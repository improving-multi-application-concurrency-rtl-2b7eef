// l1_tlb: private L1 TLB of one shader core.
//
// Fully associative, ENTRIES entries (64 in the evaluated configuration),
// true LRU replacement, one-cycle lookup. A lookup is accepted when req_valid
// && req_ready; one cycle later either hit_valid pulses with the translation
// or the miss is presented on miss_* (held until miss_ready) for the shared
// L2 TLB. While a miss waits, new lookups are refused (req_ready low).
// fill_* writes a translation returned by the shared L2 TLB or the page table
// walker (an existing entry for the same VPN is overwritten, otherwise an
// invalid or the least recently used entry). flush invalidates everything;
// the core flushes when its address space changes, since entries carry no
// ASID.
//
// Follows the design: size, full associativity, LRU, 1-cycle latency.
// Own choices: LRU kept as per-entry ages (a permutation of 0..ENTRIES-1),
// lookups that hit in the same cycle as a fill do not update the LRU order,
// and there is no miss queue (the walker's MSHRs merge misses instead).
module l1_tlb
  import mask_pkg::*;
#(
  parameter int ENTRIES = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [VPN_W-1:0] req_vpn,
  input  logic [WARP_W-1:0] req_warp,
  // hit response, one cycle after the lookup
  output logic             hit_valid,
  output logic [VPN_W-1:0] hit_vpn,
  output logic [PPN_W-1:0] hit_ppn,
  output logic [WARP_W-1:0] hit_warp,
  // miss towards the shared L2 TLB
  output logic             miss_valid,
  input  logic             miss_ready,
  output logic [VPN_W-1:0] miss_vpn,
  output logic [WARP_W-1:0] miss_warp,
  // fill
  input  logic             fill_valid,
  input  logic [VPN_W-1:0] fill_vpn,
  input  logic [PPN_W-1:0] fill_ppn,
  // flush all
  input  logic             flush
);
  localparam int IW = $clog2(ENTRIES);

  logic             v   [ENTRIES];
  logic [VPN_W-1:0] tag [ENTRIES];
  logic [PPN_W-1:0] ppn [ENTRIES];
  logic [IW-1:0]    age [ENTRIES];

  logic          lk_hit, fl_hit, have_inv;
  logic [IW-1:0] lk_idx, fl_idx, inv_idx, lru_idx, fill_idx;

  always_comb begin
    lk_hit = 1'b0; lk_idx = '0;
    fl_hit = 1'b0; fl_idx = '0;
    have_inv = 1'b0; inv_idx = '0;
    lru_idx = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (v[i] && tag[i] == req_vpn)  begin lk_hit = 1'b1; lk_idx = IW'(i); end
      if (v[i] && tag[i] == fill_vpn) begin fl_hit = 1'b1; fl_idx = IW'(i); end
      if (!v[i])                      begin have_inv = 1'b1; inv_idx = IW'(i); end
      if (age[i] == IW'(ENTRIES-1))   lru_idx = IW'(i);
    end
    fill_idx = fl_hit ? fl_idx : (have_inv ? inv_idx : lru_idx);
  end

  wire accept = req_valid && req_ready;
  assign req_ready = !miss_valid || miss_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        v[i] <= 1'b0; age[i] <= IW'(i); tag[i] <= '0; ppn[i] <= '0;
      end
      hit_valid <= 1'b0; hit_vpn <= '0; hit_ppn <= '0; hit_warp <= '0;
      miss_valid <= 1'b0; miss_vpn <= '0; miss_warp <= '0;
    end else begin
      hit_valid <= accept && lk_hit;
      hit_vpn   <= req_vpn;
      hit_ppn   <= ppn[lk_idx];
      hit_warp  <= req_warp;
      if (miss_valid && miss_ready) miss_valid <= 1'b0;
      if (accept && !lk_hit) begin
        miss_valid <= 1'b1; miss_vpn <= req_vpn; miss_warp <= req_warp;
      end
      if (flush) begin
        for (int i = 0; i < ENTRIES; i++) v[i] <= 1'b0;
      end else if (fill_valid) begin
        v[fill_idx] <= 1'b1; tag[fill_idx] <= fill_vpn; ppn[fill_idx] <= fill_ppn;
        for (int i = 0; i < ENTRIES; i++)
          if (age[i] < age[fill_idx]) age[i] <= age[i] + 1'b1;
        age[fill_idx] <= '0;
      end else if (accept && lk_hit) begin
        for (int i = 0; i < ENTRIES; i++)
          if (age[i] < age[lk_idx]) age[i] <= age[i] + 1'b1;
        age[lk_idx] <= '0;
      end
    end
  end
endmodule
