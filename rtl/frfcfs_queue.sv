// frfcfs_queue: DRAM request buffer with first-ready, first-come-first-serve
// selection, used for the Silver and Normal queues of the DRAM scheduler.
//
// Entries are kept in arrival order in a collapsing array (entry 0 is the
// oldest). The pick is the oldest request whose row is the open row of its
// DRAM bank (a row-buffer hit); if there is none, the oldest request. pop
// removes the picked entry; a push in the same cycle lands behind the
// remaining entries. pick_hit tells whether the pick is a row hit.
module frfcfs_queue
  import mask_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            push,
  input  dram_req_t       push_data,
  output logic            full,
  output logic            empty,
  input  logic [7:0]      row_open,
  input  logic [ROW_W-1:0] open_row [8],
  output dram_req_t       pick,
  output logic            pick_hit,
  input  logic            pop
);
  localparam int CW = $clog2(DEPTH+1);
  localparam int IW = $clog2(DEPTH);

  dram_req_t     q [DEPTH];
  logic [CW-1:0] cnt;
  logic [IW-1:0] pidx;

  assign full  = (cnt == CW'(DEPTH));
  assign empty = (cnt == '0);

  always_comb begin
    pidx = '0; pick_hit = 1'b0;
    for (int i = DEPTH-1; i >= 0; i--)
      if (CW'(i) < cnt && row_open[dbank_of(q[i].req.addr)] &&
          open_row[dbank_of(q[i].req.addr)] == row_of(q[i].req.addr)) begin
        pidx = IW'(i); pick_hit = 1'b1;
      end
    pick = q[pidx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else begin
      if (pop && !empty) begin
        for (int i = 0; i < DEPTH-1; i++)
          if (IW'(i) >= pidx) q[i] <= q[i+1];
        if (push) q[IW'(cnt-1'b1)] <= push_data;
        if (!push) cnt <= cnt - 1'b1;
      end else if (push && !full) begin
        q[cnt[IW-1:0]] <= push_data;
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
