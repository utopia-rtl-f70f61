// set_assoc_tlb -- single-page-size, set-associative first-level TLB.
//
// Used three times in the MMU: L1 D-TLB for 4KB pages (64 entries, 4-way),
// L1 D-TLB for 2MB pages (32 entries, 4-way) and L1 I-TLB (128 entries,
// 8-way); sizes and the 1-cycle latency follow the paper's simulated system.
// The set index is the low log2(SETS) bits of the VPN given on lk_vpn, the
// tag is the rest. All ways of the indexed set are compared in parallel.
//
// Timing: a lookup presented with lk_valid in cycle t is answered in cycle
// t+1 on lk_hit/lk_ppn/lk_perm (registered output, one cycle latency).
// Fill, single-page invalidate and flush take effect at the next clock edge;
// when fill and invalidate arrive together, invalidate is applied first.
//
// Own choices (the paper does not give them): the replacement policy is
// "first invalid way, else a per-set round-robin pointer"; a fill whose VPN
// is already present overwrites that way instead of making a duplicate.
module set_assoc_tlb
  import utopia_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned VPNW    = VPN_W,
  parameter int unsigned PPNW    = PPN_W
) (
  input  logic            clk,
  input  logic            rst_n,
  // lookup
  input  logic            lk_valid,
  input  logic [VPNW-1:0] lk_vpn,
  output logic            lk_hit,
  output logic [PPNW-1:0] lk_ppn,
  output perm_t           lk_perm,
  // fill
  input  logic            fill_valid,
  input  logic [VPNW-1:0] fill_vpn,
  input  logic [PPNW-1:0] fill_ppn,
  input  perm_t           fill_perm,
  // invalidate one page / everything
  input  logic            inv_valid,
  input  logic [VPNW-1:0] inv_vpn,
  input  logic            flush
);
  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned SETW = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned IDXW = $clog2(SETS);
  localparam int unsigned TAGW = VPNW - IDXW;
  localparam int unsigned WAYW = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic            valid;
    logic [TAGW-1:0] tag;
    logic [PPNW-1:0] ppn;
    perm_t           perm;
  } entry_t;

  entry_t          mem   [SETS][WAYS];
  logic [WAYW-1:0] rr_ptr[SETS];

  function automatic logic [SETW-1:0] idx_of(input logic [VPNW-1:0] v);
    if (SETS > 1) return SETW'(v[IDXW-1:0]);
    else          return '0;
  endfunction

  function automatic logic [TAGW-1:0] tag_of(input logic [VPNW-1:0] v);
    return v[VPNW-1:IDXW];
  endfunction

  // ---- lookup (combinational compare, registered result) ----
  logic            hit_c;
  logic [PPNW-1:0] ppn_c;
  perm_t           perm_c;

  always_comb begin
    logic [SETW-1:0] s;
    s      = idx_of(lk_vpn);
    hit_c  = 1'b0;
    ppn_c  = '0;
    perm_c = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (mem[s][w].valid && mem[s][w].tag == tag_of(lk_vpn)) begin
        hit_c  = 1'b1;
        ppn_c  = mem[s][w].ppn;
        perm_c = mem[s][w].perm;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_hit  <= 1'b0;
      lk_ppn  <= '0;
      lk_perm <= '0;
    end else begin
      lk_hit  <= lk_valid && hit_c && !flush;
      lk_ppn  <= ppn_c;
      lk_perm <= perm_c;
    end
  end

  // ---- victim selection for a fill ----
  logic [WAYW-1:0] fill_way;
  logic            fill_match;
  always_comb begin
    logic [SETW-1:0] s;
    logic            found_inv;
    s          = idx_of(fill_vpn);
    fill_way   = rr_ptr[s];
    fill_match = 1'b0;
    found_inv  = 1'b0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!mem[s][w].valid) begin
        found_inv = 1'b1;
        fill_way  = WAYW'(w);
      end
    end
    for (int w = 0; w < WAYS; w++) begin
      if (mem[s][w].valid && mem[s][w].tag == tag_of(fill_vpn)) begin
        fill_match = 1'b1;
        fill_way   = WAYW'(w);
      end
    end
    if (found_inv) fill_match = 1'b1;  // do not advance the pointer
  end

  // ---- state update ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_ptr[s] <= '0;
        for (int w = 0; w < WAYS; w++) mem[s][w] <= '0;
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) mem[s][w].valid <= 1'b0;
    end else begin
      if (inv_valid) begin
        for (int w = 0; w < WAYS; w++)
          if (mem[idx_of(inv_vpn)][w].tag == tag_of(inv_vpn))
            mem[idx_of(inv_vpn)][w].valid <= 1'b0;
      end
      if (fill_valid) begin
        mem[idx_of(fill_vpn)][fill_way] <= '{valid: 1'b1, tag: tag_of(fill_vpn),
                                            ppn: fill_ppn, perm: fill_perm};
        if (!fill_match)
          rr_ptr[idx_of(fill_vpn)] <= (rr_ptr[idx_of(fill_vpn)] == WAYW'(WAYS - 1)) ?
                                      '0 : rr_ptr[idx_of(fill_vpn)] + 1'b1;
      end
    end
  end

endmodule
