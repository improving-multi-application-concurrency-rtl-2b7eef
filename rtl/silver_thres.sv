// silver_thres: Silver-queue quotas of the Address-Space-Aware DRAM Scheduler.
//
// At each epoch_end it latches, for every application i, Concurrent_i (the
// maximum number of concurrent page walks) and WrpStalled_i (the maximum
// number of warps stalled on one walk), both from the page table walker, and
// then computes, one application per cycle with a single divider,
//     thres_i = THRES_MAX * C_i*W_i / sum_j (C_j*W_j)
// (integer division, THRES_MAX = 500). Applications whose walks stall more
// warps get longer Silver turns. If no application walked in the epoch, all
// quotas are 0 and the Silver queue stays unused (own choice). The quotas
// are 0 until the first epoch ends. busy is high while computing.
//
// Lint note: the quotient is at most THRES_MAX, so only its low 10 bits
// are kept.
module silver_thres #(
  parameter int NUM_APPS  = 30,
  parameter int THRES_MAX = 500,
  parameter int THRES_W   = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               epoch_end,
  input  logic [5:0]         concurrent [NUM_APPS],
  input  logic [5:0]         stalled    [NUM_APPS],
  output logic [THRES_W-1:0] thres      [NUM_APPS],
  output logic               busy
);
  localparam int AW = $clog2(NUM_APPS);
  localparam int PW = 12;
  localparam int SW = PW + AW + 1;

  logic [PW-1:0] prod [NUM_APPS];
  logic [SW-1:0] sum;
  logic [AW-1:0] idx;

  logic [SW-1:0] sum_in;
  always_comb begin
    sum_in = '0;
    for (int a = 0; a < NUM_APPS; a++)
      sum_in = sum_in + SW'(concurrent[a] * stalled[a]);
  end

  logic [SW+9:0] q;
  always_comb begin
    if (sum == '0) q = '0;
    else q = ((SW+10)'(THRES_MAX) * (SW+10)'(prod[idx])) / (SW+10)'(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; idx <= '0; sum <= '0;
      for (int a = 0; a < NUM_APPS; a++) begin prod[a] <= '0; thres[a] <= '0; end
    end else if (epoch_end) begin
      busy <= 1'b1; idx <= '0; sum <= sum_in;
      for (int a = 0; a < NUM_APPS; a++) prod[a] <= concurrent[a] * stalled[a];
    end else if (busy) begin
      thres[idx] <= THRES_W'(q);
      if (idx == AW'(NUM_APPS-1)) busy <= 1'b0;
      else idx <= idx + 1'b1;
    end
  end
endmodule
