// l2_tlb_array: storage of the shared L2 TLB.
//
// ENTRIES entries (512) organised as ENTRIES/WAYS sets of WAYS ways (16-way),
// each tagged with the address space identifier (ASID) and the VPN, so that
// several applications share the TLB safely. The set index is the low VPN
// bits (own choice). Lookup is combinational; a hit updates the set's LRU
// order at the clock edge. fill_* installs a translation (overwrites a
// matching entry, else an invalid way, else the LRU way). flush_valid
// invalidates every entry whose ASID equals flush_asid, which is how a TLB
// flush of one core reaches the shared level. Flush has priority over fill,
// fill over the LRU update of a lookup.
module l2_tlb_array
  import mask_pkg::*;
#(
  parameter int ENTRIES = 512,
  parameter int WAYS    = 16
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
  localparam int SETS = ENTRIES / WAYS;
  localparam int SW   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int WW   = $clog2(WAYS);

  logic              v    [SETS][WAYS];
  logic [ASID_W-1:0] asid [SETS][WAYS];
  logic [VPN_W-1:0]  tag  [SETS][WAYS];
  logic [PPN_W-1:0]  ppn  [SETS][WAYS];
  logic [WW-1:0]     age  [SETS][WAYS];

  wire [SW-1:0] lset = SW'(lk_vpn);
  wire [SW-1:0] fset = SW'(fill_vpn);

  logic          fl_hit, have_inv;
  logic [WW-1:0] lk_way, fl_way, inv_way, lru_way, fill_way;

  always_comb begin
    lk_hit = 1'b0; lk_way = '0; fl_hit = 1'b0; fl_way = '0;
    have_inv = 1'b0; inv_way = '0; lru_way = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (v[lset][w] && asid[lset][w] == lk_asid && tag[lset][w] == lk_vpn) begin
        lk_hit = 1'b1; lk_way = WW'(w);
      end
      if (v[fset][w] && asid[fset][w] == fill_asid && tag[fset][w] == fill_vpn) begin
        fl_hit = 1'b1; fl_way = WW'(w);
      end
      if (!v[fset][w]) begin have_inv = 1'b1; inv_way = WW'(w); end
      if (age[fset][w] == WW'(WAYS-1)) lru_way = WW'(w);
    end
    fill_way = fl_hit ? fl_way : (have_inv ? inv_way : lru_way);
    lk_ppn = ppn[lset][lk_way];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          v[s][w] <= 1'b0; age[s][w] <= WW'(w);
          asid[s][w] <= '0; tag[s][w] <= '0; ppn[s][w] <= '0;
        end
    end else if (flush_valid) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++)
          if (asid[s][w] == flush_asid) v[s][w] <= 1'b0;
    end else if (fill_valid) begin
      v[fset][fill_way] <= 1'b1; asid[fset][fill_way] <= fill_asid;
      tag[fset][fill_way] <= fill_vpn; ppn[fset][fill_way] <= fill_ppn;
      for (int w = 0; w < WAYS; w++)
        if (age[fset][w] < age[fset][fill_way]) age[fset][w] <= age[fset][w] + 1'b1;
      age[fset][fill_way] <= '0;
    end else if (lk_valid && lk_hit) begin
      for (int w = 0; w < WAYS; w++)
        if (age[lset][w] < age[lset][lk_way]) age[lset][w] <= age[lset][w] + 1'b1;
      age[lset][lk_way] <= '0;
    end
  end
endmodule
