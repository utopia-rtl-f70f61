// utopia_mmu -- memory management unit with Utopia's hybrid address mapping.
//
// Physical memory holds two kinds of segments: RestSegs, where a virtual
// page may only sit in the ways of one set chosen by a hash of its VPN, and
// the FlexSeg, where the conventional radix page table maps any page
// anywhere. This MMU translates a 48-bit virtual address as follows (the
// flow of the paper's address-translation figure):
//   1. Look up the L1 TLBs (I-TLB for instruction fetches; 4KB and 2MB
//      D-TLBs in parallel for data). The TLB answers in one cycle and the
//      response is registered, so an L1 hit arrives two cycles after the
//      request is accepted.
//   2. On an L1 miss, start the L2 TLB lookup (12 cycles) and the RestSeg
//      walks of both RestSegs (restseg_walker) in the same cycle.
//   3. If a RestSeg walk finds the page, answer at once and abort the L2
//      TLB lookup. If the L2 TLB hits, answer with its translation.
//   4. Only when the RestSeg walks report "not found" AND the L2 TLB missed
//      does the FlexSeg walk (flexseg_walker, radix walk with page walk
//      caches) start; its result fills the L2 TLB and the L1 TLB. A
//      non-present entry answers with rsp_fault (page fault to the OS).
// Every FlexSeg walk also updates the PTW-tracking counters of the page; when
// they pass the thresholds the MMU raises mig_irq (an asynchronous interrupt
// asking the OS to migrate mig_vpn into a RestSeg) and holds it until
// mig_ack. A second request while one is pending is dropped.
//
// INVLPG (inv_valid/inv_vaddr, taken when inv_ready) invalidates the page
// in all TLBs and the SF/TAR cache entries its hash selects. `flush`
// (context switch) empties the TLBs and page walk caches; the SF and TAR
// caches are physically addressed and keep their contents, as in the paper.
//
// Interface timing: req_valid && req_ready starts a translation; exactly one
// rsp_valid pulse answers it, with rsp_paddr, rsp_perm, rsp_fault and
// rsp_src (where it was resolved). One translation is in flight at a time.
// Counted from the accepting cycle: L1 hit 2 cycles, L2 TLB hit 2 + 12
// cycles, RestSeg hit with both SF and TAR cached 2 + 3 cycles; FlexSeg walks
// and SF/TAR fetches take as long as the memory does.
// Software rule: whenever the OS changes a TAR set or SF counter (page
// allocation, eviction or migration) it issues INVLPG for that page, so no
// stale copy stays in the SF/TAR caches.
//
// Own choices (paper silent): RestSeg hits fill only the L1 TLB, FlexSeg
// walks fill L1 and L2; the I-TLB holds 4KB-granular entries, so a 2MB
// page is entered as the 4KB piece that was accessed; a new request waits
// until a RestSeg walk that lost the race to an L2 TLB hit has finished.
module utopia_mmu
  import utopia_pkg::*;
#(
  parameter int unsigned     L1D4K_ENTRIES = 64,
  parameter int unsigned     L1D4K_WAYS    = 4,
  parameter int unsigned     L1D2M_ENTRIES = 32,
  parameter int unsigned     L1D2M_WAYS    = 4,
  parameter int unsigned     L1I_ENTRIES   = 128,
  parameter int unsigned     L1I_WAYS      = 8,
  parameter int unsigned     L2_ENTRIES    = 1536,
  parameter int unsigned     L2_WAYS       = 12,
  parameter int unsigned     L2_LATENCY    = 12,
  parameter int unsigned     PWC_ENTRIES   = 32,
  parameter int unsigned     PWC_WAYS      = 4,
  parameter longint unsigned SEG_BYTES     = 64'd536870912,
  parameter int unsigned     SEG_WAYS      = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // translation request / response
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic [VA_W-1:0]       req_vaddr,
  input  logic                  req_instr,
  output logic                  rsp_valid,
  output logic [PA_W-1:0]       rsp_paddr,
  output perm_t                 rsp_perm,
  output logic                  rsp_fault,
  output xlat_src_e             rsp_src,
  // architectural registers
  input  logic [PPN_W-1:0]      cr3,
  input  logic [PA_W-1:0]       restseg_base [NSEG],
  input  logic [PA_W-1:0]       tar_base     [NSEG],
  input  logic [PA_W-1:0]       sf_base      [NSEG],
  input  logic [PTW_FREQ_W-1:0] thr_freq,
  input  logic [PTW_COST_W-1:0] thr_cost,
  // maintenance
  input  logic                  inv_valid,
  input  logic [VA_W-1:0]       inv_vaddr,
  output logic                  inv_ready,
  input  logic                  flush,
  // migration interrupt
  output logic                  mig_irq,
  output logic [VPN_W-1:0]      mig_vpn,
  output logic                  mig_is2m,
  input  logic                  mig_ack,
  // event pulses for performance counters
  output logic                  ev_sf_filter,   // a RestSeg was skipped because its SF counter was 0
  output logic                  ev_rs_fetch,    // an SF line or TAR set was fetched from memory
  // page-table memory port (FlexSeg walker)
  output logic                  pt_req_valid,
  input  logic                  pt_req_ready,
  output pt_req_t               pt_req,
  input  logic                  pt_resp_valid,
  input  pt_resp_t              pt_resp,
  // SF / TAR memory port (RestSeg walker)
  output logic                  rs_req_valid,
  input  logic                  rs_req_ready,
  output rs_req_t               rs_req,
  input  logic                  rs_resp_valid,
  input  rs_resp_t              rs_resp
);
  typedef enum logic [1:0] {S_IDLE, S_L1, S_PAR, S_FSW} state_e;
  state_e state;

  logic [VA_W-1:0]  va_q;
  logic             instr_q;
  logic [VPN_W-1:0] vpn_q;
  assign vpn_q = va_q[VA_W-1:SHIFT_4K];

  logic rsw_busy, fsw_busy;
  logic             fsw_start, fsw_done, fsw_fault, fsw_is2m, fsw_mig;
  logic [PPN_W-1:0] fsw_ppn;
  perm_t            fsw_perm;
  logic accept, inv_take;

  assign inv_ready = (state == S_IDLE) && !rsw_busy && !fsw_busy;
  assign inv_take  = inv_valid && inv_ready;
  assign req_ready = (state == S_IDLE) && !rsw_busy && !fsw_busy && !inv_valid;
  assign accept    = req_valid && req_ready;

  logic [VPN_W-1:0] inv_vpn;
  assign inv_vpn = inv_vaddr[VA_W-1:SHIFT_4K];

  // ---------------------------------------------------------------- L1 TLBs
  logic             l1i_hit, l1d4_hit, l1d2_hit;
  logic [PPN_W-1:0] l1i_ppn, l1d4_ppn;
  logic [PPN_W-10:0] l1d2_ppn;
  perm_t            l1i_perm, l1d4_perm, l1d2_perm;

  logic             fill_l1;       // fill the L1 TLB that serves this request
  logic             fill_is2m;
  logic [PPN_W-1:0] fill_ppn;      // 4KB-granular PPN of the accessed page
  perm_t            fill_perm;

  set_assoc_tlb #(.ENTRIES(L1I_ENTRIES), .WAYS(L1I_WAYS), .VPNW(VPN_W), .PPNW(PPN_W)) u_l1i (
    .clk, .rst_n,
    .lk_valid(accept && req_instr), .lk_vpn(req_vaddr[VA_W-1:SHIFT_4K]),
    .lk_hit(l1i_hit), .lk_ppn(l1i_ppn), .lk_perm(l1i_perm),
    .fill_valid(fill_l1 && instr_q), .fill_vpn(vpn_q), .fill_ppn(fill_ppn), .fill_perm(fill_perm),
    .inv_valid(inv_take), .inv_vpn(inv_vpn), .flush(flush));

  set_assoc_tlb #(.ENTRIES(L1D4K_ENTRIES), .WAYS(L1D4K_WAYS), .VPNW(VPN_W), .PPNW(PPN_W)) u_l1d4k (
    .clk, .rst_n,
    .lk_valid(accept && !req_instr), .lk_vpn(req_vaddr[VA_W-1:SHIFT_4K]),
    .lk_hit(l1d4_hit), .lk_ppn(l1d4_ppn), .lk_perm(l1d4_perm),
    .fill_valid(fill_l1 && !instr_q && !fill_is2m), .fill_vpn(vpn_q), .fill_ppn(fill_ppn),
    .fill_perm(fill_perm),
    .inv_valid(inv_take), .inv_vpn(inv_vpn), .flush(flush));

  set_assoc_tlb #(.ENTRIES(L1D2M_ENTRIES), .WAYS(L1D2M_WAYS), .VPNW(VPN2M_W), .PPNW(PPN_W - 9)) u_l1d2m (
    .clk, .rst_n,
    .lk_valid(accept && !req_instr), .lk_vpn(req_vaddr[VA_W-1:SHIFT_2M]),
    .lk_hit(l1d2_hit), .lk_ppn(l1d2_ppn), .lk_perm(l1d2_perm),
    .fill_valid(fill_l1 && !instr_q && fill_is2m), .fill_vpn(va_q[VA_W-1:SHIFT_2M]),
    .fill_ppn(fill_ppn[PPN_W-1:9]), .fill_perm(fill_perm),
    .inv_valid(inv_take), .inv_vpn(inv_vaddr[VA_W-1:SHIFT_2M]), .flush(flush));

  logic             l1_hit;
  logic [PPN_W-1:0] l1_ppn;
  perm_t            l1_perm;
  always_comb begin
    if (instr_q) begin
      l1_hit  = l1i_hit;
      l1_ppn  = l1i_ppn;
      l1_perm = l1i_perm;
    end else if (l1d4_hit) begin
      l1_hit  = 1'b1;
      l1_ppn  = l1d4_ppn;
      l1_perm = l1d4_perm;
    end else begin
      l1_hit  = l1d2_hit;
      l1_ppn  = {l1d2_ppn, va_q[20:12]};
      l1_perm = l1d2_perm;
    end
  end

  // ---------------------------------------------------------------- L2 TLB
  logic             l2_start, l2_abort, l2_v, l2_hit, l2_is2m;
  logic [PPN_W-1:0] l2_ppn;
  perm_t            l2_perm;
  logic             l2_fill;

  l2_tlb #(.ENTRIES(L2_ENTRIES), .WAYS(L2_WAYS), .LATENCY(L2_LATENCY)) u_l2 (
    .clk, .rst_n,
    .lk_valid(l2_start), .lk_vpn(vpn_q), .lk_abort(l2_abort),
    .rsp_valid(l2_v), .rsp_hit(l2_hit), .rsp_is2m(l2_is2m), .rsp_ppn(l2_ppn), .rsp_perm(l2_perm),
    .fill_valid(l2_fill), .fill_is2m(fsw_is2m), .fill_vpn(vpn_q), .fill_ppn(fsw_ppn),
    .fill_perm(fsw_perm),
    .inv_valid(inv_take), .inv_vpn(inv_vpn), .flush(flush));

  // ---------------------------------------------------------------- RestSeg walker
  logic             rsw_start, rsw_done, rsw_found, rsw_is2m;
  logic [PPN_W-1:0] rsw_ppn;
  perm_t            rsw_perm;
  logic             rsw_inv_ready;

  restseg_walker #(.SEG_BYTES(SEG_BYTES), .SEG_WAYS(SEG_WAYS)) u_rsw (
    .clk, .rst_n,
    .start(rsw_start), .vpn(vpn_q), .busy(rsw_busy), .done(rsw_done), .found(rsw_found),
    .is2m(rsw_is2m), .ppn(rsw_ppn), .perm(rsw_perm),
    .restseg_base, .tar_base, .sf_base,
    .inv_valid(inv_take), .inv_vpn(inv_vpn), .inv_ready(rsw_inv_ready),
    .ev_sf_filter(ev_sf_filter), .ev_fetch(ev_rs_fetch),
    .rs_req_valid, .rs_req_ready, .rs_req, .rs_resp_valid, .rs_resp);

  // ---------------------------------------------------------------- FlexSeg walker

  flexseg_walker #(.PWC_ENTRIES(PWC_ENTRIES), .PWC_WAYS(PWC_WAYS)) u_fsw (
    .clk, .rst_n,
    .start(fsw_start), .vpn(vpn_q), .cr3, .busy(fsw_busy), .done(fsw_done), .fault(fsw_fault),
    .ppn(fsw_ppn), .is2m(fsw_is2m), .perm(fsw_perm), .migrate(fsw_mig),
    .thr_freq, .thr_cost, .pwc_flush(flush),
    .pt_req_valid, .pt_req_ready, .pt_req, .pt_resp_valid, .pt_resp);

  // ---------------------------------------------------------------- control
  logic rsw_nf_q;   // RestSeg walks done, page not in any RestSeg
  logic l2_miss_q;  // L2 TLB answered with a miss
  logic answered_q; // response already sent (L2 TLB hit while RSW still runs)

  logic rsw_nf_now, l2_miss_now;
  assign rsw_nf_now  = rsw_nf_q  || (rsw_done && !rsw_found);
  assign l2_miss_now = l2_miss_q || (l2_v && !l2_hit);

  assign rsw_start = (state == S_L1) && !l1_hit;
  assign l2_start  = rsw_start;
  assign l2_abort  = (state == S_PAR) && rsw_done && rsw_found;
  assign fsw_start = (state == S_PAR) && !answered_q && rsw_nf_now && l2_miss_now;
  assign l2_fill   = (state == S_FSW) && fsw_done && !fsw_fault;

  // which result fills the L1 TLB this cycle
  always_comb begin
    fill_l1   = 1'b0;
    fill_is2m = 1'b0;
    fill_ppn  = '0;
    fill_perm = '0;
    if (state == S_PAR && rsw_done && rsw_found && !answered_q) begin
      fill_l1 = 1'b1; fill_is2m = rsw_is2m; fill_ppn = rsw_ppn; fill_perm = rsw_perm;
    end else if (state == S_PAR && l2_v && l2_hit && !answered_q) begin
      fill_l1 = 1'b1; fill_is2m = l2_is2m; fill_ppn = l2_ppn; fill_perm = l2_perm;
    end else if (l2_fill) begin
      fill_l1 = 1'b1; fill_is2m = fsw_is2m; fill_ppn = fsw_ppn; fill_perm = fsw_perm;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      va_q       <= '0;
      instr_q    <= 1'b0;
      rsw_nf_q   <= 1'b0;
      l2_miss_q  <= 1'b0;
      answered_q <= 1'b0;
      rsp_valid  <= 1'b0;
      rsp_paddr  <= '0;
      rsp_perm   <= '0;
      rsp_fault  <= 1'b0;
      rsp_src    <= SRC_L1TLB;
      mig_irq    <= 1'b0;
      mig_vpn    <= '0;
      mig_is2m   <= 1'b0;
    end else begin
      rsp_valid <= 1'b0;
      if (mig_irq && mig_ack) mig_irq <= 1'b0;

      unique case (state)
        S_IDLE: if (accept) begin
          va_q       <= req_vaddr;
          instr_q    <= req_instr;
          rsw_nf_q   <= 1'b0;
          l2_miss_q  <= 1'b0;
          answered_q <= 1'b0;
          state      <= S_L1;
        end
        S_L1: begin
          if (l1_hit) begin
            rsp_valid <= 1'b1;
            rsp_paddr <= {l1_ppn, va_q[11:0]};
            rsp_perm  <= l1_perm;
            rsp_fault <= 1'b0;
            rsp_src   <= SRC_L1TLB;
            state     <= S_IDLE;
          end else begin
            state <= S_PAR;
          end
        end
        S_PAR: begin
          rsw_nf_q  <= rsw_nf_now;
          l2_miss_q <= l2_miss_now;
          if (rsw_done && rsw_found && !answered_q) begin
            rsp_valid <= 1'b1;
            rsp_paddr <= {rsw_ppn, va_q[11:0]};
            rsp_perm  <= rsw_perm;
            rsp_fault <= 1'b0;
            rsp_src   <= SRC_RSW;
            state     <= S_IDLE;
          end else if (l2_v && l2_hit && !answered_q) begin
            rsp_valid  <= 1'b1;
            rsp_paddr  <= {l2_ppn, va_q[11:0]};
            rsp_perm   <= l2_perm;
            rsp_fault  <= 1'b0;
            rsp_src    <= SRC_L2TLB;
            answered_q <= 1'b1;
            state      <= S_IDLE;     // req_ready waits for the RestSeg walker
          end else if (fsw_start) begin
            state <= S_FSW;
          end
        end
        S_FSW: if (fsw_done) begin
          rsp_valid <= 1'b1;
          rsp_paddr <= {fsw_ppn, va_q[11:0]};
          rsp_perm  <= fsw_perm;
          rsp_fault <= fsw_fault;
          rsp_src   <= fsw_fault ? SRC_FAULT : SRC_FSW;
          state     <= S_IDLE;
          if (!fsw_fault && fsw_mig && !(mig_irq && !mig_ack)) begin
            mig_irq  <= 1'b1;
            mig_vpn  <= vpn_q;
            mig_is2m <= fsw_is2m;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- checks
  // the RestSeg walker accepts INVLPG whenever the MMU offers it
  always_ff @(posedge clk)
    if (inv_take) assert (rsw_inv_ready) else $error("utopia_mmu: INVLPG while walker busy");
  // a page lives in at most one place: a RestSeg hit and an L2 TLB hit never coincide
  always_ff @(posedge clk)
    if (state == S_PAR && rsw_done && rsw_found && l2_v)
      assert (!l2_hit) else $error("utopia_mmu: page found both in a RestSeg and in the L2 TLB");

endmodule
