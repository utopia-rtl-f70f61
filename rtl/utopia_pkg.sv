// utopia_pkg -- types, constants and helper functions shared by the Utopia MMU.
//
// The MMU translates 48-bit x86-64 virtual addresses to 52-bit physical
// addresses for 4KB and 2MB pages. Physical page numbers are always kept at
// 4KB granularity (PPN = PA[51:12]); a 2MB page has its low 9 PPN bits zero.
//
// Things taken from the paper: 48-bit virtual addresses, 4KB and 2MB pages,
// the four-level radix page table with 9-bit indices and a 12-bit offset,
// the 10 metadata bits that accompany each RestSeg tag, the set-filter
// counter width log2(assoc)+1 and the modulo hash (set = VPN mod #sets,
// tag = VPN / #sets). Own choices, documented where used: the 52-bit
// physical address, the bit order of a Tag Array (TAR) entry, the meaning of
// the metadata bits, one byte per set-filter counter in memory, the PTE bits
// that hold the PTW-tracking counters, and the two memory-port structures.
package utopia_pkg;

  localparam int unsigned VA_W     = 48;
  localparam int unsigned PA_W     = 52;
  localparam int unsigned SHIFT_4K = 12;
  localparam int unsigned SHIFT_2M = 21;
  localparam int unsigned VPN_W    = VA_W - SHIFT_4K;  // 36, 4KB-granular VPN
  localparam int unsigned VPN2M_W  = VA_W - SHIFT_2M;  // 27, 2MB-granular VPN
  localparam int unsigned PPN_W    = PA_W - SHIFT_4K;  // 40, 4KB-granular PPN

  // RestSeg Tag Array entry: virtual page tag plus 10 metadata bits.
  localparam int unsigned TAR_META_W = 10;
  // Number of RestSegs in the system: one for 4KB and one for 2MB pages.
  localparam int unsigned NSEG = 2;
  // Width of one wide memory transfer of the RestSeg walker: large enough for a
  // full TAR set of 16 ways x (23-bit tag + 10 metadata bits) = 528 bits.
  localparam int unsigned RS_LINE_W = 528;

  // Access permissions carried with every translation.
  typedef struct packed {
    logic writable;
    logic user;
    logic nx;
  } perm_t;

  // Where a translation was resolved.
  typedef enum logic [2:0] {
    SRC_L1TLB = 3'd0,
    SRC_L2TLB = 3'd1,
    SRC_RSW   = 3'd2,
    SRC_FSW   = 3'd3,
    SRC_FAULT = 3'd4
  } xlat_src_e;

  // Page-table memory port (64-bit words, FlexSeg walker).
  typedef struct packed {
    logic            write;
    logic [PA_W-1:0] addr;   // byte address, 8-byte aligned
    logic [63:0]     wdata;
  } pt_req_t;

  typedef struct packed {
    logic [63:0] rdata;
    logic        dram;       // 1 when the access was served by main memory
  } pt_resp_t;

  // RestSeg-structure memory port (reads only, RestSeg walker). A read
  // returns RS_LINE_W bits starting at addr, least significant byte first.
  typedef struct packed {
    logic [PA_W-1:0] addr;
  } rs_req_t;

  typedef struct packed {
    logic [RS_LINE_W-1:0] rdata;
    logic                 dram;
  } rs_resp_t;

  // x86-64 page-table entry fields.
  localparam int unsigned PTE_P  = 0;
  localparam int unsigned PTE_RW = 1;
  localparam int unsigned PTE_US = 2;
  localparam int unsigned PTE_PS = 7;
  localparam int unsigned PTE_NX = 63;

  // PTW-tracking counters live in PTE bits the hardware ignores (9 in total):
  // frequency counter in bits 55:52, cost counter in bits {58:56, 10:9}.
  localparam int unsigned PTW_FREQ_W = 4;
  localparam int unsigned PTW_COST_W = 5;

  function automatic logic [PTW_FREQ_W-1:0] pte_freq(input logic [63:0] pte);
    return pte[55:52];
  endfunction

  function automatic logic [PTW_COST_W-1:0] pte_cost(input logic [63:0] pte);
    return {pte[58:56], pte[10:9]};
  endfunction

  function automatic logic [63:0] pte_set_counters(input logic [63:0] pte,
                                                   input logic [PTW_FREQ_W-1:0] f,
                                                   input logic [PTW_COST_W-1:0] c);
    logic [63:0] r;
    r         = pte;
    r[55:52]  = f;
    r[58:56]  = c[4:2];
    r[10:9]   = c[1:0];
    return r;
  endfunction

  function automatic perm_t pte_perm(input logic [63:0] pte);
    perm_t p;
    p.writable = pte[PTE_RW];
    p.user     = pte[PTE_US];
    p.nx       = pte[PTE_NX];
    return p;
  endfunction

  // TAR metadata bits: [0] valid, [1] writable, [2] user, [3] no-execute,
  // [9:4] left to the OS (for instance the replacement state of the way).
  function automatic perm_t tar_perm(input logic [TAR_META_W-1:0] meta);
    perm_t p;
    p.writable = meta[1];
    p.user     = meta[2];
    p.nx       = meta[3];
    return p;
  endfunction

endpackage
