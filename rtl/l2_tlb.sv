// l2_tlb -- unified second-level TLB for 4KB and 2MB translations.
//
// 1536 entries, 12-way set-associative (128 sets), 12-cycle lookup latency,
// as in the paper's simulated system. In the Utopia MMU it is probed in
// parallel with the two RestSeg walks after an L1 TLB miss; when a RestSeg
// walk finds the page first, the MMU aborts the lookup (lk_abort).
//
// Each entry carries a page-size bit. A lookup reads two sets at once: the
// set indexed by the 4KB VPN (VPN[6:0]) for 4KB entries and the set indexed
// by the 2MB VPN (VPN[15:9]) for 2MB entries, so both page sizes are found in
// one probe. Storing both sizes in one array and probing two indices is this
// design's choice; the paper only says the L2 TLB is unified.
//
// Timing: lk_valid in cycle t captures the result; rsp_valid rises in cycle
// t+LATENCY (LATENCY >= 2) with rsp_hit/rsp_is2m/rsp_ppn, unless lk_abort was asserted in
// between. rsp_ppn is the 4KB-granular PPN of the requested page (for a 2MB
// hit the page base with the low nine VPN bits added). One lookup is in
// flight at a time; lk_valid while busy restarts the lookup.
// Replacement: first invalid way, else per-set round-robin (own choice).
module l2_tlb
  import utopia_pkg::*;
#(
  parameter int unsigned ENTRIES = 1536,
  parameter int unsigned WAYS    = 12,
  parameter int unsigned LATENCY = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  logic [VPN_W-1:0] lk_vpn,
  input  logic             lk_abort,
  output logic             rsp_valid,
  output logic             rsp_hit,
  output logic             rsp_is2m,
  output logic [PPN_W-1:0] rsp_ppn,
  output perm_t            rsp_perm,
  // fill: fill_vpn is the 4KB-granular VPN of any page inside the mapping
  input  logic             fill_valid,
  input  logic             fill_is2m,
  input  logic [VPN_W-1:0] fill_vpn,
  input  logic [PPN_W-1:0] fill_ppn,
  input  perm_t            fill_perm,
  input  logic             inv_valid,
  input  logic [VPN_W-1:0] inv_vpn,
  input  logic             flush
);
  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned IDXW = $clog2(SETS);
  localparam int unsigned TAGW = VPN_W - IDXW;
  localparam int unsigned WAYW = $clog2(WAYS);
  localparam int unsigned CNTW = $clog2(LATENCY + 1);

  typedef struct packed {
    logic             valid;
    logic             is2m;
    logic [TAGW-1:0]  tag;
    logic [PPN_W-1:0] ppn;
    perm_t            perm;
  } entry_t;

  entry_t          mem   [SETS][WAYS];
  logic [WAYW-1:0] rr_ptr[SETS];

  // index / tag of a 4KB-granular VPN for either page size
  function automatic logic [IDXW-1:0] idx_of(input logic [VPN_W-1:0] v, input logic is2m);
    return is2m ? v[9 +: IDXW] : v[IDXW-1:0];
  endfunction

  function automatic logic [TAGW-1:0] tag_of(input logic [VPN_W-1:0] v, input logic is2m);
    return is2m ? TAGW'(v[VPN_W-1:9+IDXW]) : v[VPN_W-1:IDXW];
  endfunction

  // ---- lookup compare ----
  logic             hit_c, is2m_c;
  logic [PPN_W-1:0] ppn_c;
  perm_t            perm_c;
  always_comb begin
    logic [IDXW-1:0] i4, i2;
    i4     = idx_of(lk_vpn, 1'b0);
    i2     = idx_of(lk_vpn, 1'b1);
    hit_c  = 1'b0;
    is2m_c = 1'b0;
    ppn_c  = '0;
    perm_c = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (mem[i2][w].valid && mem[i2][w].is2m && mem[i2][w].tag == tag_of(lk_vpn, 1'b1)) begin
        hit_c  = 1'b1;
        is2m_c = 1'b1;
        ppn_c  = {mem[i2][w].ppn[PPN_W-1:9], lk_vpn[8:0]};
        perm_c = mem[i2][w].perm;
      end
    end
    for (int w = 0; w < WAYS; w++) begin
      if (mem[i4][w].valid && !mem[i4][w].is2m && mem[i4][w].tag == tag_of(lk_vpn, 1'b0)) begin
        hit_c  = 1'b1;
        is2m_c = 1'b0;
        ppn_c  = mem[i4][w].ppn;
        perm_c = mem[i4][w].perm;
      end
    end
  end

  // ---- latency pipeline ----
  logic [CNTW-1:0] cnt;
  logic            busy;
  logic            hit_q, is2m_q;
  logic [PPN_W-1:0] ppn_q;
  perm_t           perm_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      hit_q     <= 1'b0;
      is2m_q    <= 1'b0;
      ppn_q     <= '0;
      perm_q    <= '0;
      rsp_valid <= 1'b0;
      rsp_hit   <= 1'b0;
      rsp_is2m  <= 1'b0;
      rsp_ppn   <= '0;
      rsp_perm  <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (lk_valid) begin
        busy   <= 1'b1;
        cnt    <= CNTW'(LATENCY - 2);
        hit_q  <= hit_c;
        is2m_q <= is2m_c;
        ppn_q  <= ppn_c;
        perm_q <= perm_c;
      end else if (lk_abort) begin
        busy <= 1'b0;
      end else if (busy) begin
        if (cnt == '0) begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
          rsp_hit   <= hit_q;
          rsp_is2m  <= is2m_q;
          rsp_ppn   <= ppn_q;
          rsp_perm  <= perm_q;
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end

  // ---- fill victim ----
  logic [WAYW-1:0] fill_way;
  logic            keep_ptr;
  always_comb begin
    logic [IDXW-1:0] s;
    logic            found_inv;
    s         = idx_of(fill_vpn, fill_is2m);
    fill_way  = rr_ptr[s];
    keep_ptr  = 1'b0;
    found_inv = 1'b0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!mem[s][w].valid) begin
        found_inv = 1'b1;
        fill_way  = WAYW'(w);
      end
    for (int w = 0; w < WAYS; w++)
      if (mem[s][w].valid && mem[s][w].is2m == fill_is2m &&
          mem[s][w].tag == tag_of(fill_vpn, fill_is2m)) begin
        keep_ptr = 1'b1;
        fill_way = WAYW'(w);
      end
    if (found_inv) keep_ptr = 1'b1;
  end

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
        for (int w = 0; w < WAYS; w++) begin
          if (!mem[idx_of(inv_vpn, 1'b0)][w].is2m &&
              mem[idx_of(inv_vpn, 1'b0)][w].tag == tag_of(inv_vpn, 1'b0))
            mem[idx_of(inv_vpn, 1'b0)][w].valid <= 1'b0;
          if (mem[idx_of(inv_vpn, 1'b1)][w].is2m &&
              mem[idx_of(inv_vpn, 1'b1)][w].tag == tag_of(inv_vpn, 1'b1))
            mem[idx_of(inv_vpn, 1'b1)][w].valid <= 1'b0;
        end
      end
      if (fill_valid) begin
        mem[idx_of(fill_vpn, fill_is2m)][fill_way] <=
          '{valid: 1'b1, is2m: fill_is2m, tag: tag_of(fill_vpn, fill_is2m),
            ppn: fill_is2m ? {fill_ppn[PPN_W-1:9], 9'd0} : fill_ppn, perm: fill_perm};
        if (!keep_ptr)
          rr_ptr[idx_of(fill_vpn, fill_is2m)] <=
            (rr_ptr[idx_of(fill_vpn, fill_is2m)] == WAYW'(WAYS - 1)) ? '0 :
             rr_ptr[idx_of(fill_vpn, fill_is2m)] + 1'b1;
      end
    end
  end

endmodule
