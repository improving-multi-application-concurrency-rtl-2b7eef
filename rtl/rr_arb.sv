// rr_arb: round-robin arbiter. One-hot grant among N requesters; the
// requester after the last winner has highest priority. The pointer moves
// only when adv (the grant was used) is high.
//
// Lint note: the integer loop index is truncated to the index width.
module rr_arb #(parameter int N = 4) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         adv,
  output logic [N-1:0] gnt,
  output logic [$clog2(N>1?N:2)-1:0] gnt_idx
);
  localparam int IW = $clog2(N>1?N:2);
  logic [IW-1:0] ptr;
  always_comb begin
    gnt = '0; gnt_idx = '0;
    for (int k = N-1; k >= 0; k--) begin
      int i;
      i = (int'(ptr) + k) % N;
      if (req[i]) begin gnt = '0; gnt[i] = 1'b1; gnt_idx = IW'(i); end
    end
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ptr <= '0;
    else if (adv && |req) ptr <= (gnt_idx == IW'(N-1)) ? '0 : gnt_idx + 1'b1;
endmodule
