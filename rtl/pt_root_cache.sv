// pt_root_cache: per-core page table root registers and the page table root
// cache at the L2 level.
//
// Each shader core has a CR3-like register holding the physical page number
// of its page table root and its address space identifier (ASID). Writing it
// (set_valid[c]) also writes the core's entry in the root cache that the
// shared page table walker reads (rd_core -> rd_root). To keep the two
// coherent, a write is accepted only while core_busy[c] is low, i.e. after all
// of the core's in-flight translation requests have drained; set_ready[c]
// tells the core when that happened and the write takes effect at that clock
// edge. core_asid/core_valid give every core's current address space to the
// TLBs and the token controller.
module pt_root_cache
  import mask_pkg::*;
#(
  parameter int NUM_CORES = 30
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_CORES-1:0] set_valid,
  output logic [NUM_CORES-1:0] set_ready,
  input  logic [PPN_W-1:0]  set_root [NUM_CORES],
  input  logic [ASID_W-1:0] set_asid [NUM_CORES],
  input  logic [NUM_CORES-1:0] core_busy,
  // core-side view (CR3)
  output logic [NUM_CORES-1:0] core_valid,
  output logic [ASID_W-1:0] core_asid [NUM_CORES],
  // walker-side read port (root cache)
  input  logic [CORE_W-1:0] rd_core,
  output logic [PPN_W-1:0]  rd_root,
  output logic [ASID_W-1:0] rd_asid
);
  logic [PPN_W-1:0]  cr3_root  [NUM_CORES];
  logic [PPN_W-1:0]  rc_root   [NUM_CORES];
  logic [ASID_W-1:0] rc_asid   [NUM_CORES];

  assign set_ready = ~core_busy;
  assign rd_root   = rc_root[rd_core];
  assign rd_asid   = rc_asid[rd_core];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CORES; c++) begin
        cr3_root[c] <= '0; rc_root[c] <= '0; rc_asid[c] <= '0; core_asid[c] <= '0;
      end
      core_valid <= '0;
    end else begin
      for (int c = 0; c < NUM_CORES; c++)
        if (set_valid[c] && set_ready[c]) begin
          cr3_root[c]  <= set_root[c];
          core_asid[c] <= set_asid[c];
          rc_root[c]   <= set_root[c];
          rc_asid[c]   <= set_asid[c];
          core_valid[c] <= 1'b1;
        end
    end
  end

  // the root cache must always mirror the core registers
  for (genvar c = 0; c < NUM_CORES; c++) begin : g_chk
    a_coherent: assert property (@(posedge clk) disable iff (!rst_n)
      rc_root[c] == cr3_root[c] && rc_asid[c] == core_asid[c]);
  end
endmodule
