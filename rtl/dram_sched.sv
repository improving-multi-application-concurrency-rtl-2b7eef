// dram_sched: Address-Space-Aware DRAM Scheduler of one memory channel.
//
// The channel's request buffer is split in three:
//   Golden queue  GOLD_DEPTH (16) entries, FIFO, every request whose depth
//                 tag marks it as a page walk read (L2 misses of walks and
//                 walks that bypassed the L2);
//   Silver queue  SILVER_DEPTH (64) entries, data requests of the one
//                 application whose turn it is;
//   Normal queue  NORMAL_DEPTH (192) entries, all other data requests.
// Issue priority is strict: Golden, then Silver, then Normal. Within Silver
// and Normal, FR-FCFS picks the oldest row-buffer hit, else the oldest.
// The scheduler tracks the open row of every DRAM bank (open-row policy,
// updated on every issue).
//
// Silver turns: application silver_app may insert thres[silver_app]
// requests into the Silver queue; then the turn passes to the next
// application (in index order, wrapping) with a non-zero quota. The quotas
// come from silver_thres (Equation 1 of the design). A Silver-application
// request that finds the Silver queue full goes to Normal (own choice).
//
// Interface: enq_* (valid/ready) takes one request per cycle; cmd_* (valid/
// ready) hands one request per cycle to the DRAM; cmd_class reports which
// queue it came from (0 Golden, 1 Silver, 2 Normal) and cmd_row_hit whether
// it hits the open row.
//
// Lint note: the Golden FIFO's occupancy output is left open.
module dram_sched
  import mask_pkg::*;
#(
  parameter int NUM_APPS     = 30,
  parameter int GOLD_DEPTH   = 16,
  parameter int SILVER_DEPTH = 64,
  parameter int NORMAL_DEPTH = 192,
  parameter int THRES_W      = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enq_valid,
  output logic         enq_ready,
  input  dram_req_t    enq,
  input  logic [THRES_W-1:0] thres [NUM_APPS],
  output logic         cmd_valid,
  input  logic         cmd_ready,
  output dram_req_t    cmd,
  output logic [1:0]   cmd_class,
  output logic         cmd_row_hit,
  output logic [APP_W-1:0] silver_app
);
  localparam int AW = $clog2(NUM_APPS);

  logic [7:0]       row_open;
  logic [ROW_W-1:0] open_row [8];

  // ---- classification ----
  wire is_tlb    = (enq.req.depth != '0);
  wire silver_on = (thres[AW'(silver_app)] != '0);
  logic s_full, s_empty, n_full, n_empty, g_in_ready, g_valid;
  wire to_silver = !is_tlb && silver_on && (enq.req.app == silver_app) && !s_full;
  wire to_normal = !is_tlb && !to_silver;
  assign enq_ready = is_tlb ? g_in_ready : (to_silver ? 1'b1 : !n_full);
  wire enq_fire  = enq_valid && enq_ready;

  // ---- queues ----
  dram_req_t g_head, s_pick, n_pick;
  logic      s_hit, n_hit, g_pop, s_pop, n_pop;

  sync_fifo #(.T(dram_req_t), .DEPTH(GOLD_DEPTH)) u_gold (
    .clk, .rst_n, .in_valid(enq_valid && is_tlb), .in_ready(g_in_ready), .in_data(enq),
    .out_valid(g_valid), .out_ready(g_pop), .out_data(g_head), .count());

  frfcfs_queue #(.DEPTH(SILVER_DEPTH)) u_silver (
    .clk, .rst_n, .push(enq_fire && to_silver), .push_data(enq), .full(s_full), .empty(s_empty),
    .row_open, .open_row, .pick(s_pick), .pick_hit(s_hit), .pop(s_pop));

  frfcfs_queue #(.DEPTH(NORMAL_DEPTH)) u_normal (
    .clk, .rst_n, .push(enq_fire && to_normal), .push_data(enq), .full(n_full), .empty(n_empty),
    .row_open, .open_row, .pick(n_pick), .pick_hit(n_hit), .pop(n_pop));

  // ---- priority issue ----
  always_comb begin
    cmd_valid = 1'b1; cmd_class = 2'd0; cmd = g_head; cmd_row_hit = 1'b0;
    if (g_valid) begin
      cmd = g_head; cmd_class = 2'd0;
      cmd_row_hit = row_open[dbank_of(g_head.req.addr)] &&
                    open_row[dbank_of(g_head.req.addr)] == row_of(g_head.req.addr);
    end else if (!s_empty) begin
      cmd = s_pick; cmd_class = 2'd1; cmd_row_hit = s_hit;
    end else if (!n_empty) begin
      cmd = n_pick; cmd_class = 2'd2; cmd_row_hit = n_hit;
    end else cmd_valid = 1'b0;
  end
  wire fire = cmd_valid && cmd_ready;
  assign g_pop = fire && cmd_class == 2'd0;
  assign s_pop = fire && cmd_class == 2'd1;
  assign n_pop = fire && cmd_class == 2'd2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_open <= '0;
      for (int b = 0; b < 8; b++) open_row[b] <= '0;
    end else if (fire) begin
      row_open[dbank_of(cmd.req.addr)] <= 1'b1;
      open_row[dbank_of(cmd.req.addr)] <= row_of(cmd.req.addr);
    end
  end

  // ---- silver turn ----
  logic [THRES_W-1:0] ins;
  logic [AW-1:0]      nxt;
  always_comb begin
    nxt = AW'(silver_app);
    for (int k = NUM_APPS-1; k >= 1; k--)
      if (thres[AW'((int'(silver_app) + k) % NUM_APPS)] != '0)
        nxt = AW'((int'(silver_app) + k) % NUM_APPS);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      silver_app <= '0; ins <= '0;
    end else if (!silver_on) begin
      silver_app <= APP_W'(nxt); ins <= '0;
    end else if (enq_fire && to_silver) begin
      if (ins + 1'b1 >= thres[AW'(silver_app)]) begin
        silver_app <= APP_W'(nxt); ins <= '0;
      end else ins <= ins + 1'b1;
    end
  end

  a_gold_first: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && g_valid) |-> cmd_class == 2'd0);
endmodule
