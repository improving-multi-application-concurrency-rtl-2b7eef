// token_ctrl: TLB-Fill Tokens controller.
//
// Only warps that hold a token may fill the shared L2 TLB; the others fill
// the bypass cache. This block decides how many tokens each application gets
// and which warps hold them.
//
// Counting: every shared L2 TLB probe (acc_*) increments the probing core's
// 16-bit hit or miss counter (saturating). At each epoch_end the counters are
// copied and cleared, and a small sequencer visits one application per cycle:
// it sums the counters of the cores that run the application, forms the
// ratio Hits/Misses (fixed point, 8 fraction bits, saturated to 16 bits) and
// applies the decision tree of the design:
//   ratio improved (Prev. Hit < Hits/Misses): keep the last direction,
//   otherwise reverse it; "increase" adds 10 % of the current tokens, "decrease"
//   removes 10 % (at least one token), bounded by 0 and the application's warps.
// The direction bit then records the change just made, and Prev. Hit the new
// ratio. Before the first epoch ends no warp is restricted; at the first epoch
// end every application gets INIT_PCT (80 %) of its warps and the direction is
// set to "decrease".
//
// Token assignment: tokens are handed out round-robin over the application's
// cores in warp-ID order, so warp w on the k-th of the n cores of an
// application holds a token iff w*n + k < tokens. q_has_token answers this
// combinationally for (q_core, q_warp).
//
// The application of a core is its ASID (core_app), valid while core_valid.
// Own choices: the ratio format, the minimum step of one token, the state of
// the direction bit after the first epoch, one application per cycle.
//
// Lint note: the 20-bit intermediate token products keep only their low
// TOK_W bits, which hold the whole result (tokens never exceed the warps).
module token_ctrl
  import mask_pkg::*;
#(
  parameter int NUM_CORES      = 30,
  parameter int NUM_APPS       = 30,
  parameter int WARPS_PER_CORE = 64,
  parameter int INIT_PCT       = 80,
  parameter int STEP_PCT       = 10,
  parameter int CNT_W          = 16,
  parameter int TOK_W          = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              acc_valid,
  input  logic [CORE_W-1:0] acc_core,
  input  logic              acc_hit,
  input  logic              epoch_end,
  input  logic [NUM_CORES-1:0] core_valid,
  input  logic [ASID_W-1:0] core_app [NUM_CORES],
  input  logic [CORE_W-1:0] q_core,
  input  logic [WARP_W-1:0] q_warp,
  output logic              q_has_token,
  output logic              enabled,
  output logic [TOK_W-1:0]  tokens [NUM_APPS],
  output logic [NUM_APPS-1:0] token_dir,    // 1 = last change was an increase
  output logic              update_done     // pulses when an epoch update ends
);
  localparam int AW   = $clog2(NUM_APPS);
  localparam int SUMW = CNT_W + $clog2(NUM_CORES) + 1;
  localparam int RW   = 16;

  logic [CNT_W-1:0] hits [NUM_CORES], misses [NUM_CORES];
  logic [CNT_W-1:0] s_hits [NUM_CORES], s_misses [NUM_CORES];
  logic [RW-1:0]    prev [NUM_APPS];
  logic             busy;
  logic [AW-1:0]    app;

  // ---- per-core counters ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CORES; c++) begin
        hits[c] <= '0; misses[c] <= '0; s_hits[c] <= '0; s_misses[c] <= '0;
      end
    end else if (epoch_end) begin
      for (int c = 0; c < NUM_CORES; c++) begin
        s_hits[c] <= hits[c]; s_misses[c] <= misses[c];
        hits[c] <= '0; misses[c] <= '0;
      end
    end else if (acc_valid) begin
      if (acc_hit) begin
        if (hits[acc_core] != '1) hits[acc_core] <= hits[acc_core] + 1'b1;
      end else begin
        if (misses[acc_core] != '1) misses[acc_core] <= misses[acc_core] + 1'b1;
      end
    end
  end

  // ---- epoch update of the application selected by 'app' ----
  logic [SUMW-1:0]  sh, sm;
  logic [11:0]      ncores;
  logic [SUMW+7:0]  ratio_full;
  logic [RW-1:0]    ratio;
  logic [TOK_W+4:0] warps, init_tok, step, nxt;
  logic             improved, inc;

  always_comb begin
    sh = '0; sm = '0; ncores = '0;
    for (int c = 0; c < NUM_CORES; c++)
      if (core_valid[c] && core_app[c] == ASID_W'(app)) begin
        sh = sh + SUMW'(s_hits[c]);
        sm = sm + SUMW'(s_misses[c]);
        ncores = ncores + 1'b1;
      end
    ratio_full = {sh, 8'h00} / ((sm == '0) ? (SUMW+8)'(1) : (SUMW+8)'(sm));
    ratio      = (ratio_full > (SUMW+8)'({RW{1'b1}})) ? '1 : RW'(ratio_full);
    warps      = (TOK_W+5)'(ncores) * (TOK_W+5)'(WARPS_PER_CORE);
    init_tok   = warps * (TOK_W+5)'(INIT_PCT) / (TOK_W+5)'(100);
    step       = (TOK_W+5)'(tokens[app]) * (TOK_W+5)'(STEP_PCT) / (TOK_W+5)'(100);
    if (step == '0) step = 1;
    improved   = prev[app] < ratio;
    inc        = improved ? token_dir[app] : !token_dir[app];
    if (inc) nxt = ((TOK_W+5)'(tokens[app]) + step > warps) ? warps : (TOK_W+5)'(tokens[app]) + step;
    else     nxt = ((TOK_W+5)'(tokens[app]) > step) ? (TOK_W+5)'(tokens[app]) - step : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; app <= '0; enabled <= 1'b0; update_done <= 1'b0;
      token_dir <= '0;
      for (int a = 0; a < NUM_APPS; a++) begin tokens[a] <= '0; prev[a] <= '0; end
    end else begin
      update_done <= 1'b0;
      if (epoch_end) begin
        busy <= 1'b1; app <= '0;
      end else if (busy) begin
        if (ncores != 0) begin
          if (!enabled) begin
            tokens[app]    <= TOK_W'(init_tok);
            token_dir[app] <= 1'b0;
          end else begin
            tokens[app]    <= TOK_W'(nxt);
            token_dir[app] <= inc;
          end
          prev[app] <= ratio;
        end
        if (app == AW'(NUM_APPS-1)) begin
          busy <= 1'b0; enabled <= 1'b1; update_done <= 1'b1;
        end else app <= app + 1'b1;
      end
    end
  end

  // ---- token query ----
  logic [11:0] q_n, q_k;
  logic [ASID_W-1:0] q_app;
  always_comb begin
    q_app = core_app[q_core];
    q_n = '0; q_k = '0;
    for (int c = 0; c < NUM_CORES; c++)
      if (core_valid[c] && core_app[c] == q_app) begin
        q_n = q_n + 1'b1;
        if (c < int'(q_core)) q_k = q_k + 1'b1;
      end
    if (!enabled || int'(q_app) >= NUM_APPS) q_has_token = 1'b1;
    else q_has_token = (32'(q_warp) * 32'(q_n) + 32'(q_k)) < 32'(tokens[AW'(q_app)]);
  end
endmodule
