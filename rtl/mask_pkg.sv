// mask_pkg: types and constants shared by the MASK translation-aware GPU
// memory hierarchy. Address geometry, the page-walk depth tag and the request
// formats that travel between the page table walker, the L2 cache banks and
// the DRAM schedulers are defined here.
//
// Address geometry (own choice, the design only fixes a 4-level page table):
// 40-bit physical addresses, 4 KB pages, 36-bit virtual page numbers split
// into four 9-bit indices, 8-byte page table entries whose bits [39:12] hold
// the physical page number of the next level (or of the data page at the last
// level). Cache lines are 128 bytes. Line-address bits pick the memory
// partition (bits 2:0), the L2 bank inside it (bit 3), the L2 set (bits 9:4)
// and the DRAM bank (bits 6:4); the DRAM row is the line address above bit 10.
//
// Lint note: each address field helper takes the whole physical address
// and uses only its own bits, so unused-bit warnings on their arguments are
// expected.
package mask_pkg;

  localparam int PA_W     = 40;
  localparam int VPN_W    = 36;
  localparam int PPN_W    = 28;
  localparam int ASID_W   = 8;
  localparam int WARP_W   = 6;
  localparam int CORE_W   = 5;
  localparam int APP_W    = 5;
  localparam int DEPTH_W  = 3;
  localparam int SRC_W    = 8;
  localparam int LINE_W   = PA_W - 7;        // 128-byte lines
  localparam int WORDS    = 16;              // 64-bit words per line
  localparam int PT_LEVELS = 4;
  localparam int ROW_W    = LINE_W - 10;

  // depth tag carried by every memory request: 0 = normal data,
  // 1..6 = page walk level, 7 = any deeper level
  typedef logic [DEPTH_W-1:0] depth_t;

  typedef struct packed {
    logic [PA_W-1:0]   addr;
    logic              we;
    logic [63:0]       wdata;
    depth_t            depth;
    logic [SRC_W-1:0]  src;     // requester tag, returned with the response
    logic [APP_W-1:0]  app;     // application (address space) of the requester
  } mem_req_t;

  typedef struct packed {
    logic [SRC_W-1:0]  src;
    depth_t            depth;
    logic [63:0]       data;
  } mem_rsp_t;

  // request handed to a DRAM channel
  typedef struct packed {
    mem_req_t          req;
    logic              bank;    // L2 bank that missed (refill target)
    logic              bypass;  // page walk request that skipped the L2
  } dram_req_t;

  // line returned by a DRAM channel
  typedef struct packed {
    dram_req_t         tag;
    logic [WORDS*64-1:0] line;
  } dram_rsp_t;

  function automatic logic [LINE_W-1:0] line_of(input logic [PA_W-1:0] a);
    return a[PA_W-1:7];
  endfunction
  function automatic logic [2:0] part_of(input logic [PA_W-1:0] a);
    return a[9:7];
  endfunction
  function automatic logic bank_of(input logic [PA_W-1:0] a);
    return a[10];
  endfunction
  function automatic logic [2:0] dbank_of(input logic [PA_W-1:0] a);
    return a[13:11];
  endfunction
  function automatic logic [ROW_W-1:0] row_of(input logic [PA_W-1:0] a);
    return a[PA_W-1:17];
  endfunction

  // index of level lvl (1 = root level) inside a VPN
  function automatic logic [8:0] pt_index(input logic [VPN_W-1:0] vpn, input int lvl);
    return vpn[VPN_W - 9*lvl +: 9];
  endfunction
  // byte address of the level's page table entry
  function automatic logic [PA_W-1:0] pte_addr(input logic [PPN_W-1:0] base,
                                                input logic [8:0] idx);
    return {base, idx, 3'b000};
  endfunction
  function automatic logic [PPN_W-1:0] pte_ppn(input logic [63:0] pte);
    return pte[39:12];
  endfunction

endpackage
