// l2_bypass_ctrl: decision logic of the TLB-Request-Aware L2 Bypass.
//
// Page table entries near the root are shared by many walks and hit well in
// the shared L2 cache; entries near the leaves rarely do and only displace
// application data. This block keeps, for the data requests (depth tag 0)
// and for each page walk level 1..LEVELS, a counter of L2 lookups and a
// counter of L2 hits (CNT_W = 64 bits each, ten counters for four levels).
// Every L2 bank reports its lookups on ev_* (NEV reports per cycle).
//
// Decision (q_depth -> q_bypass, combinational): a page walk request of
// level d goes straight to DRAM when the hit rate of level d is lower than
// the hit rate of data requests, hits_d/acc_d < hits_0/acc_0, evaluated as
// hits_d*acc_0 < hits_0*acc_d so no divider is needed. Data requests never
// bypass. Depth tags above LEVELS share the deepest level's counters.
// Bypassed requests do not look up the L2 and so are not counted (own
// choice; the design does not say how a bypassed level's rate is refreshed).
//
// Lint note: the integer loop index is compared with the 3-bit depth tag
// and only its low bits are used.
module l2_bypass_ctrl
  import mask_pkg::*;
#(
  parameter int LEVELS = 4,
  parameter int CNT_W  = 64,
  parameter int NEV    = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NEV-1:0]   ev_valid,
  input  depth_t           ev_depth [NEV],
  input  logic [NEV-1:0]   ev_hit,
  input  depth_t           q_depth,
  output logic             q_bypass
);
  logic [CNT_W-1:0] acc  [LEVELS+1];
  logic [CNT_W-1:0] hits [LEVELS+1];

  function automatic int cls(input depth_t d);
    return (int'(d) > LEVELS) ? LEVELS : int'(d);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l <= LEVELS; l++) begin acc[l] <= '0; hits[l] <= '0; end
    end else begin
      for (int l = 0; l <= LEVELS; l++) begin
        logic [CNT_W-1:0] da, dh;
        da = '0; dh = '0;
        for (int e = 0; e < NEV; e++)
          if (ev_valid[e] && cls(ev_depth[e]) == l) begin
            da = da + 1'b1;
            if (ev_hit[e]) dh = dh + 1'b1;
          end
        acc[l]  <= acc[l] + da;
        hits[l] <= hits[l] + dh;
      end
    end
  end

  logic [2*CNT_W-1:0] lhs, rhs;
  always_comb begin
    int d;
    d   = cls(q_depth);
    lhs = (2*CNT_W)'(hits[d]) * (2*CNT_W)'(acc[0]);
    rhs = (2*CNT_W)'(hits[0]) * (2*CNT_W)'(acc[d]);
    q_bypass = (q_depth != '0) && (lhs < rhs);
  end
endmodule
