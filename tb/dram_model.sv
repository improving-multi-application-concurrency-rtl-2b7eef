// dram_model: behavioural model of one GDDR5 channel for the testbenches.
//
// Accepts one request per cycle (cmd_*) while fewer than 16 are pending
// and the testbench does not hold it off with stall,
// keeps an open row per bank and answers a read with its 128-byte line after
// HIT_LAT cycles on a row hit or MISS_LAT cycles on a row miss, in order.
// Writes are absorbed without a response (their data is not kept: the
// testbenches read only page tables and never-written data). Line contents
// come from mask_tb_pkg::mem_line.
module dram_model
  import mask_pkg::*;
  import mask_tb_pkg::*;
#(
  parameter int HIT_LAT  = 20,
  parameter int MISS_LAT = 40
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      stall,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  dram_req_t cmd,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output dram_rsp_t rsp,
  output int        n_reads,
  output int        n_row_hits
);
  typedef struct { dram_req_t r; longint due; } pend_t;
  pend_t  q[$];
  longint now;
  logic [ROW_W-1:0] row [8];
  logic [7:0]       open;

  assign cmd_ready = (q.size() < 16) && !stall;
  always_comb begin
    rsp_valid = 1'b0; rsp = '0;
    if (q.size() > 0 && q[0].due <= now) begin
      rsp_valid = 1'b1;
      rsp.tag   = q[0].r;
      rsp.line  = mem_line(q[0].r.req.addr);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0; open <= '0; n_reads <= 0; n_row_hits <= 0; q.delete();
    end else begin
      now <= now + 1;
      if (rsp_valid && rsp_ready) void'(q.pop_front());
      if (cmd_valid && cmd_ready) begin
        logic hit;
        hit = open[dbank_of(cmd.req.addr)] && row[dbank_of(cmd.req.addr)] == row_of(cmd.req.addr);
        open[dbank_of(cmd.req.addr)] <= 1'b1;
        row[dbank_of(cmd.req.addr)]  <= row_of(cmd.req.addr);
        if (!cmd.req.we) begin
          q.push_back('{r: cmd, due: now + (hit ? HIT_LAT : MISS_LAT)});
          n_reads <= n_reads + 1;
          if (hit) n_row_hits <= n_row_hits + 1;
        end
      end
    end
  end
endmodule
