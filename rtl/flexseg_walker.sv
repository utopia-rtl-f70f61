// flexseg_walker -- FlexSeg walk (FSW): x86-64 four-level radix page-table walk.
//
// Pages in the FlexSeg keep the conventional, fully flexible mapping, so the
// walker reads the page table exactly as an x86-64 walker does: PML4 (VA
// bits 47:39), PDP (38:30), PD (29:21) and PT (20:12), 8-byte entries, the
// first table at the physical page given by CR3. A PD entry with the PS bit
// set is a 2MB leaf. Three split page walk caches (PML4, PDP, PD) are looked
// up in parallel when the walk starts (2 cycles); the deepest hit gives the
// table to start from, and every non-leaf entry read from memory is written
// into the cache of its level.
//
// On reaching the leaf the PTW-tracking counters in the PTE are updated
// (ptw_tracker: frequency +1, cost + number of reads served by DRAM during
// this walk) and the PTE is written back; if both counters exceed their
// thresholds, `migrate` is raised with the result so the MMU can interrupt
// the OS. A non-present entry at any level ends the walk with `fault`.
//
// Interface: `start` (one cycle, only when `busy` is low) with `vpn`
// (4KB-granular) and `cr3` (PPN of the PML4 table). `done` pulses for one
// cycle with fault/ppn/is2m/perm/migrate; ppn is the 4KB-granular PPN of the
// requested page. Memory port: valid/ready request (read or write of one
// 64-bit word), in-order read responses, `dram` flag per response; a write
// gets no response.
//
// Timing: 2 cycles of PWC lookup, then per level one request and the memory
// latency, then one write-back request. Own choices: one walk at a time (the
// paper notes that real walkers run several concurrently), 1GB pages are not
// supported (a PDP entry with PS set is reported as a fault), permissions are
// taken from the leaf entry only.
module flexseg_walker
  import utopia_pkg::*;
#(
  parameter int unsigned PWC_ENTRIES = 32,
  parameter int unsigned PWC_WAYS    = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [VPN_W-1:0]      vpn,
  input  logic [PPN_W-1:0]      cr3,
  output logic                  busy,
  output logic                  done,
  output logic                  fault,
  output logic [PPN_W-1:0]      ppn,
  output logic                  is2m,
  output perm_t                 perm,
  output logic                  migrate,
  input  logic [PTW_FREQ_W-1:0] thr_freq,
  input  logic [PTW_COST_W-1:0] thr_cost,
  input  logic                  pwc_flush,
  // page-table memory port
  output logic                  pt_req_valid,
  input  logic                  pt_req_ready,
  output pt_req_t               pt_req,
  input  logic                  pt_resp_valid,
  input  pt_resp_t              pt_resp
);
  typedef enum logic [2:0] {S_IDLE, S_PWC, S_REQ, S_WAIT, S_WB, S_DONE} state_e;
  state_e state;

  logic [VPN_W-1:0] vpn_q;
  logic [1:0]       level;     // 0 PML4, 1 PDP, 2 PD, 3 PT
  logic [PPN_W-1:0] table_q;   // PPN of the table read at `level`
  logic [2:0]       dram_cnt;
  logic [63:0]      leaf_q;
  logic [PA_W-1:0]  leaf_addr;

  // virtual-address pieces (vpn holds VA[47:12])
  logic [8:0] idx [4];
  assign idx[0] = vpn_q[35:27];
  assign idx[1] = vpn_q[26:18];
  assign idx[2] = vpn_q[17:9];
  assign idx[3] = vpn_q[8:0];

  // ---- page walk caches ----
  logic             pwc_lk;
  logic             pml4_v, pml4_h, pdp_v, pdp_h, pd_v, pd_h;
  logic [PPN_W-1:0] pml4_b, pdp_b, pd_b;
  logic             fill_pml4, fill_pdp, fill_pd;
  logic [PPN_W-1:0] fill_base;

  assign pwc_lk = start && !busy;

  page_walk_cache #(.ENTRIES(PWC_ENTRIES), .WAYS(PWC_WAYS), .KEY_W(9)) u_pwc_pml4 (
    .clk, .rst_n, .lk_valid(pwc_lk), .lk_key(vpn[35:27]),
    .rsp_valid(pml4_v), .rsp_hit(pml4_h), .rsp_base(pml4_b),
    .fill_valid(fill_pml4), .fill_key(vpn_q[35:27]), .fill_base, .flush(pwc_flush));
  page_walk_cache #(.ENTRIES(PWC_ENTRIES), .WAYS(PWC_WAYS), .KEY_W(18)) u_pwc_pdp (
    .clk, .rst_n, .lk_valid(pwc_lk), .lk_key(vpn[35:18]),
    .rsp_valid(pdp_v), .rsp_hit(pdp_h), .rsp_base(pdp_b),
    .fill_valid(fill_pdp), .fill_key(vpn_q[35:18]), .fill_base, .flush(pwc_flush));
  page_walk_cache #(.ENTRIES(PWC_ENTRIES), .WAYS(PWC_WAYS), .KEY_W(27)) u_pwc_pd (
    .clk, .rst_n, .lk_valid(pwc_lk), .lk_key(vpn[35:9]),
    .rsp_valid(pd_v), .rsp_hit(pd_h), .rsp_base(pd_b),
    .fill_valid(fill_pd), .fill_key(vpn_q[35:9]), .fill_base, .flush(pwc_flush));

  // ---- PTW tracking ----
  logic [63:0] pte_upd;
  logic        mig_c;
  ptw_tracker u_track (
    .pte_in(leaf_q), .dram_accesses(dram_cnt), .thr_freq, .thr_cost,
    .pte_out(pte_upd), .migrate(mig_c));

  // ---- response decode ----
  logic [63:0] ent;
  logic        ent_present, ent_leaf, ent_bad;
  logic [2:0]  dram_next;
  always_comb begin
    ent         = pt_resp.rdata;
    ent_present = ent[PTE_P];
    ent_leaf    = (level == 2'd3) || (level == 2'd2 && ent[PTE_PS]);
    ent_bad     = (level == 2'd1 && ent[PTE_PS]);   // 1GB page: unsupported
    dram_next   = dram_cnt + {2'b00, pt_resp.dram};
  end

  assign fill_base = ent[51:12];
  assign fill_pml4 = (state == S_WAIT) && pt_resp_valid && ent_present && !ent_bad && level == 2'd0;
  assign fill_pdp  = (state == S_WAIT) && pt_resp_valid && ent_present && !ent_bad && level == 2'd1;
  assign fill_pd   = (state == S_WAIT) && pt_resp_valid && ent_present && !ent_leaf && level == 2'd2;

  assign busy = (state != S_IDLE);

  always_comb begin
    pt_req_valid = (state == S_REQ) || (state == S_WB);
    pt_req.write = (state == S_WB);
    pt_req.addr  = (state == S_WB) ? leaf_addr : {table_q, idx[level], 3'b000};
    pt_req.wdata = pte_upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      vpn_q     <= '0;
      level     <= '0;
      table_q   <= '0;
      dram_cnt  <= '0;
      leaf_q    <= '0;
      leaf_addr <= '0;
      done      <= 1'b0;
      fault     <= 1'b0;
      ppn       <= '0;
      is2m      <= 1'b0;
      perm      <= '0;
      migrate   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          vpn_q    <= vpn;
          dram_cnt <= '0;
          table_q  <= cr3;
          state    <= S_PWC;
        end
        S_PWC: if (pd_v) begin
          // deepest PWC hit decides where the walk starts
          if (pd_h)        begin level <= 2'd3; table_q <= pd_b;   end
          else if (pdp_h)  begin level <= 2'd2; table_q <= pdp_b;  end
          else if (pml4_h) begin level <= 2'd1; table_q <= pml4_b; end
          else             begin level <= 2'd0;                    end
          state <= S_REQ;
        end
        S_REQ: if (pt_req_ready) state <= S_WAIT;
        S_WAIT: if (pt_resp_valid) begin
          dram_cnt <= dram_next;
          if (!ent_present || ent_bad) begin
            fault   <= 1'b1;
            migrate <= 1'b0;
            state   <= S_DONE;
          end else if (ent_leaf) begin
            leaf_q    <= ent;
            leaf_addr <= {table_q, idx[level], 3'b000};
            is2m      <= (level == 2'd2);
            ppn       <= (level == 2'd2) ? {ent[51:21], vpn_q[8:0]} : ent[51:12];
            perm      <= pte_perm(ent);
            state     <= S_WB;
          end else begin
            table_q <= ent[51:12];
            level   <= level + 2'd1;
            state   <= S_REQ;
          end
        end
        S_WB: if (pt_req_ready) begin
          fault   <= 1'b0;
          migrate <= mig_c;
          state   <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
