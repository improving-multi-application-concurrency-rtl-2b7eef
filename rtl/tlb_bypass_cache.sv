// tlb_bypass_cache: the small fully associative cache that sits beside the
// shared L2 TLB.
//
// It is probed in parallel with the L2 TLB (combinational lookup on
// lk_asid/lk_vpn, the caller adds the L2 TLB latency) and is filled only by
// page walks opened by warps that hold no TLB-fill token, so translations that
// are reused often but belong to tokenless warps still stay on chip. ENTRIES
// entries (32 in the evaluated configuration), true LRU by per-entry ages.
// A lookup hit updates the LRU order at the clock edge when lk_valid is high.
// flush_valid invalidates every entry of flush_asid, matching the L2 TLB's
// ASID-selective flush (entries carry the ASID; this is this design's choice).
module tlb_bypass_cache
  import mask_pkg::*;
#(
  parameter int ENTRIES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lk_valid,
  input  logic [ASID_W-1:0] lk_asid,
  input  logic [VPN_W-1:0]  lk_vpn,
  output logic              lk_hit,
  output logic [PPN_W-1:0]  lk_ppn,
  input  logic              fill_valid,
  input  logic [ASID_W-1:0] fill_asid,
  input  logic [VPN_W-1:0]  fill_vpn,
  input  logic [PPN_W-1:0]  fill_ppn,
  input  logic              flush_valid,
  input  logic [ASID_W-1:0] flush_asid
);
  localparam int IW = $clog2(ENTRIES);

  logic              v    [ENTRIES];
  logic [ASID_W-1:0] asid [ENTRIES];
  logic [VPN_W-1:0]  tag  [ENTRIES];
  logic [PPN_W-1:0]  ppn  [ENTRIES];
  logic [IW-1:0]     age  [ENTRIES];

  logic          fl_hit, have_inv;
  logic [IW-1:0] lk_idx, fl_idx, inv_idx, lru_idx, fill_idx;

  always_comb begin
    lk_hit = 1'b0; lk_idx = '0; fl_hit = 1'b0; fl_idx = '0;
    have_inv = 1'b0; inv_idx = '0; lru_idx = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (v[i] && asid[i] == lk_asid && tag[i] == lk_vpn) begin lk_hit = 1'b1; lk_idx = IW'(i); end
      if (v[i] && asid[i] == fill_asid && tag[i] == fill_vpn) begin fl_hit = 1'b1; fl_idx = IW'(i); end
      if (!v[i]) begin have_inv = 1'b1; inv_idx = IW'(i); end
      if (age[i] == IW'(ENTRIES-1)) lru_idx = IW'(i);
    end
    fill_idx = fl_hit ? fl_idx : (have_inv ? inv_idx : lru_idx);
    lk_ppn = ppn[lk_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        v[i] <= 1'b0; age[i] <= IW'(i); asid[i] <= '0; tag[i] <= '0; ppn[i] <= '0;
      end
    end else if (flush_valid) begin
      for (int i = 0; i < ENTRIES; i++)
        if (asid[i] == flush_asid) v[i] <= 1'b0;
    end else if (fill_valid) begin
      v[fill_idx] <= 1'b1; asid[fill_idx] <= fill_asid;
      tag[fill_idx] <= fill_vpn; ppn[fill_idx] <= fill_ppn;
      for (int i = 0; i < ENTRIES; i++)
        if (age[i] < age[fill_idx]) age[i] <= age[i] + 1'b1;
      age[fill_idx] <= '0;
    end else if (lk_valid && lk_hit) begin
      for (int i = 0; i < ENTRIES; i++)
        if (age[i] < age[lk_idx]) age[i] <= age[i] + 1'b1;
      age[lk_idx] <= '0;
    end
  end
endmodule
