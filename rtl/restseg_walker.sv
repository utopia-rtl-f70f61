// restseg_walker -- RestSeg walk (RSW) engine of the Utopia MMU.
//
// A RestSeg is a contiguous physical segment organised like a set-associative
// cache: N pages in N/M sets of M ways, and a virtual page may live only in
// the M ways of the set picked by a hash of its VPN. Following the paper the
// system has two 512MB, 16-way RestSegs, one holding 4KB pages (8192 sets)
// and one holding 2MB pages (16 sets), and the hash is a modulo:
//   set = VPN mod #sets, tag = VPN / #sets     (VPN at the segment's page size)
// Each RestSeg has a Set Filter (SF: one occupancy counter per set) and a
// Tag Array (TAR: tag + 10 metadata bits per way) in memory, located by the
// SF and TAR base registers that the OS reloads on a context switch.
//
// Walk, done for both RestSegs in parallel:
//  1. Hash the VPN; look up the SF cache and the TAR cache (two ports each)
//     with the physical addresses of the SF counter and of the TAR set.
//  2. If a segment's SF counter is 0, the page is not there: tag matching is
//     skipped and the TAR is not fetched (set filtering).
//  3. Otherwise compare the tag with the valid ways of the TAR set; on a match
//     in way i the page's physical address is
//        RestSegBase + (set * assoc + i) * pagesize      (+ page offset).
//  4. Missing SF lines / TAR sets are fetched from memory (the SF and, when
//     needed, the TAR request are issued back to back, so they overlap), then
//     the lookup of step 1 is repeated.
// The walk ends with `done` and `found`; on a hit `ppn` is the 4KB-granular
// PPN of the requested page, `is2m` tells which RestSeg held it.
//
// INVLPG: inv_valid with a VPN (accepted when inv_ready) invalidates, for each
// RestSeg, the SF cache line and the TAR cache entry that the hash of that
// VPN selects (two cycles, one per segment).
//
// Memory port: valid/ready requests of one RS_LINE_W-bit read at a byte
// address, responses in request order. SF lines are fetched 64-byte aligned.
//
// Timing with both caches hitting: start in cycle t -> done in cycle t+3
// (two cycles of SF/TAR cache latency, one cycle of tag matching).
//
// Own choices: memory layout of SF (one byte per counter, counter in the
// low bits) and TAR (sets of WAYS x (tag+10) bits packed, least significant
// way first, entry = {tag, metadata}, metadata bit 0 = valid); both RestSegs
// share one SF cache and one TAR cache, each with two read ports.
module restseg_walker
  import utopia_pkg::*;
#(
  parameter longint unsigned SEG_BYTES = 64'd536870912,   // 512MB per RestSeg
  parameter int unsigned     SEG_WAYS  = 16,
  parameter int unsigned     LINE_W    = RS_LINE_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // walk
  input  logic             start,
  input  logic [VPN_W-1:0] vpn,
  output logic             busy,
  output logic             done,
  output logic             found,
  output logic             is2m,
  output logic [PPN_W-1:0] ppn,
  output perm_t            perm,
  // per-segment registers: [0] = 4KB RestSeg, [1] = 2MB RestSeg
  input  logic [PA_W-1:0]  restseg_base [NSEG],
  input  logic [PA_W-1:0]  tar_base     [NSEG],
  input  logic [PA_W-1:0]  sf_base      [NSEG],
  // INVLPG probe
  input  logic             inv_valid,
  input  logic [VPN_W-1:0] inv_vpn,
  output logic             inv_ready,
  // events (one-cycle pulses) for performance counting
  output logic             ev_sf_filter,   // a segment was excluded by SF == 0
  output logic             ev_fetch,       // an SF line or TAR set was fetched
  // memory port
  output logic             rs_req_valid,
  input  logic             rs_req_ready,
  output rs_req_t          rs_req,
  input  logic             rs_resp_valid,
  input  rs_resp_t         rs_resp
);
  // ---- geometry of the two RestSegs ----
  localparam int unsigned SHIFT0  = SHIFT_4K;
  localparam int unsigned SHIFT1  = SHIFT_2M;
  localparam int unsigned SETS0   = int'(SEG_BYTES >> SHIFT0) / SEG_WAYS;
  localparam int unsigned SETS1   = int'(SEG_BYTES >> SHIFT1) / SEG_WAYS;
  localparam int unsigned SIDX0   = $clog2(SETS0);
  localparam int unsigned SIDX1   = $clog2(SETS1);
  localparam int unsigned TAGW0   = VA_W - SHIFT0 - SIDX0;
  localparam int unsigned TAGW1   = VA_W - SHIFT1 - SIDX1;
  localparam int unsigned TAGW    = (TAGW0 > TAGW1) ? TAGW0 : TAGW1;
  localparam int unsigned ENTW    = TAGW + TAR_META_W;      // bits per TAR way
  localparam int unsigned SET_W   = SEG_WAYS * ENTW;        // bits per TAR set
  localparam int unsigned SET_B   = SET_W / 8;              // bytes per TAR set
  localparam int unsigned WAYW    = $clog2(SEG_WAYS);
  localparam int unsigned CNT_W   = WAYW + 1;               // SF counter width
  localparam int unsigned SETIW   = (SIDX0 > SIDX1) ? SIDX0 : SIDX1;

  initial begin
    assert (SET_W <= LINE_W && SET_W % 8 == 0)
      else $error("restseg_walker: a TAR set (%0d bits) must fit one memory transfer", SET_W);
  end

  // ---- hash: modulo ----
  logic [SETIW-1:0] set_idx [NSEG];
  logic [TAGW-1:0]  vtag    [NSEG];
  logic [VPN_W-1:0] hvpn;      // VPN being hashed (walk or INVLPG)

  always_comb begin
    set_idx[0] = SETIW'(hvpn[SIDX0-1:0]);
    vtag[0]    = TAGW'(hvpn[VPN_W-1:SIDX0]);
    set_idx[1] = SETIW'(hvpn[9 +: SIDX1]);
    vtag[1]    = TAGW'(hvpn[VPN_W-1:9+SIDX1]);
  end

  logic [PA_W-1:0] sf_addr [NSEG];
  logic [PA_W-1:0] tar_addr[NSEG];
  always_comb begin
    for (int s = 0; s < NSEG; s++) begin
      sf_addr[s]  = sf_base[s]  + PA_W'(set_idx[s]);
      tar_addr[s] = tar_base[s] + PA_W'(set_idx[s]) * PA_W'(SET_B);
    end
  end

  // ---- state ----
  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_WAIT, S_EVAL, S_FETCH, S_INV1} state_e;
  state_e state;
  logic [VPN_W-1:0] vpn_q;

  assign hvpn = (state == S_IDLE) ? (inv_valid ? inv_vpn : vpn) : vpn_q;

  // ---- caches ----
  logic [NSEG-1:0]  lk;
  logic [NSEG-1:0]  sf_v, sf_h, tar_v, tar_h;
  logic [CNT_W-1:0] sf_cnt [NSEG];
  logic [SET_W-1:0] tar_set[NSEG];
  logic             sf_fill, tar_fill, c_inv;
  logic [PA_W-1:0]  fill_addr, inv_sf_addr, inv_tar_addr;

  assign lk = ((state == S_IDLE && start && !inv_valid) || state == S_LOOK) ? '1 : '0;

  sf_cache #(.CNT_W(CNT_W), .NPORT(NSEG)) u_sf (
    .clk, .rst_n, .lk_valid(lk), .lk_addr(sf_addr),
    .rsp_valid(sf_v), .rsp_hit(sf_h), .rsp_cnt(sf_cnt),
    .fill_valid(sf_fill), .fill_addr(fill_addr), .fill_line(rs_resp.rdata[511:0]),
    .inv_valid(c_inv), .inv_addr(inv_sf_addr));

  tar_cache #(.SET_W(SET_W), .NPORT(NSEG)) u_tar (
    .clk, .rst_n, .lk_valid(lk), .lk_addr(tar_addr),
    .rsp_valid(tar_v), .rsp_hit(tar_h), .rsp_set(tar_set),
    .fill_valid(tar_fill), .fill_addr(fill_addr), .fill_set(rs_resp.rdata[SET_W-1:0]),
    .inv_valid(c_inv), .inv_addr(inv_tar_addr));

  // ---- evaluation of the cache responses ----
  logic [NSEG-1:0]  seg_hit, seg_filtered, need_sf, need_tar;
  logic [WAYW-1:0]  hit_way[NSEG];
  perm_t            hit_perm[NSEG];

  logic [ENTW-1:0] tar_e;
  always_comb begin
    tar_e = '0;
    for (int s = 0; s < NSEG; s++) begin
      seg_hit[s]      = 1'b0;
      hit_way[s]      = '0;
      hit_perm[s]     = '0;
      seg_filtered[s] = sf_h[s] && (sf_cnt[s] == '0);
      need_sf[s]      = !sf_h[s];
      need_tar[s]     = !tar_h[s] && !seg_filtered[s];
      if (sf_h[s] && !seg_filtered[s] && tar_h[s]) begin
        for (int w = 0; w < SEG_WAYS; w++) begin
          tar_e = tar_set[s][w*ENTW +: ENTW];
          if (tar_e[0] && tar_e[ENTW-1:TAR_META_W] == vtag[s]) begin
            seg_hit[s]  = 1'b1;
            hit_way[s]  = WAYW'(w);
            hit_perm[s] = tar_perm(tar_e[TAR_META_W-1:0]);
          end
        end
      end
    end
  end

  // physical page of a hit: base + (set * assoc + way) pages
  logic [PA_W-1:0] hit_pa [NSEG];
  always_comb begin
    hit_pa[0] = restseg_base[0] + ((PA_W'(set_idx[0]) * PA_W'(SEG_WAYS) + PA_W'(hit_way[0])) << SHIFT0);
    hit_pa[1] = restseg_base[1] + ((PA_W'(set_idx[1]) * PA_W'(SEG_WAYS) + PA_W'(hit_way[1])) << SHIFT1);
  end

  // ---- fetch bookkeeping: kinds 0 SF seg0, 1 TAR seg0, 2 SF seg1, 3 TAR seg1 ----
  logic [3:0]      to_issue;      // still to be requested
  logic [1:0]      kind_q [4];    // in-order record of requests awaiting a response
  logic [2:0]      n_out;         // responses outstanding
  logic [1:0]      wr_ptr, rd_ptr;
  logic [1:0]      issue_kind;
  logic            issue_any;
  logic [PA_W-1:0] kind_addr [4];

  always_comb begin
    kind_addr[0] = {sf_addr[0][PA_W-1:6], 6'd0};
    kind_addr[1] = tar_addr[0];
    kind_addr[2] = {sf_addr[1][PA_W-1:6], 6'd0};
    kind_addr[3] = tar_addr[1];
    issue_any  = |to_issue;
    issue_kind = to_issue[0] ? 2'd0 : to_issue[1] ? 2'd1 : to_issue[2] ? 2'd2 : 2'd3;
  end

  assign rs_req_valid = (state == S_FETCH) && issue_any;
  assign rs_req.addr  = kind_addr[issue_kind];

  logic [1:0] resp_kind;
  assign resp_kind = kind_q[rd_ptr];
  assign fill_addr = kind_addr[resp_kind];
  assign sf_fill   = (state == S_FETCH) && rs_resp_valid && !resp_kind[0];
  assign tar_fill  = (state == S_FETCH) && rs_resp_valid &&  resp_kind[0];

  // INVLPG: segment 0 in the accepting cycle, segment 1 in the next one
  assign c_inv        = (state == S_IDLE && inv_valid) || state == S_INV1;
  assign inv_sf_addr  = (state == S_INV1) ? sf_addr[1]  : sf_addr[0];
  assign inv_tar_addr = (state == S_INV1) ? tar_addr[1] : tar_addr[0];
  assign inv_ready    = (state == S_IDLE);

  assign busy = (state != S_IDLE);

  // both caches answer exactly two cycles after a lookup
  always_ff @(posedge clk)
    if (state == S_EVAL)
      assert (sf_v == '1 && tar_v == '1) else $error("restseg_walker: cache response missing");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      vpn_q        <= '0;
      done         <= 1'b0;
      found        <= 1'b0;
      is2m         <= 1'b0;
      ppn          <= '0;
      perm         <= '0;
      to_issue     <= '0;
      n_out        <= '0;
      wr_ptr       <= '0;
      rd_ptr       <= '0;
      ev_sf_filter <= 1'b0;
      ev_fetch     <= 1'b0;
      for (int i = 0; i < 4; i++) kind_q[i] <= '0;
    end else begin
      done         <= 1'b0;
      ev_sf_filter <= 1'b0;
      ev_fetch     <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (inv_valid) begin
            vpn_q <= inv_vpn;
            state <= S_INV1;
          end else if (start) begin
            vpn_q <= vpn;
            state <= S_WAIT;            // lookups issued in this cycle
          end
        end
        S_INV1: state <= S_IDLE;
        S_LOOK: state <= S_WAIT;
        S_WAIT: state <= S_EVAL;
        S_EVAL: begin
          ev_sf_filter <= |seg_filtered;
          if (seg_hit[0] || seg_hit[1]) begin
            done  <= 1'b1;
            found <= 1'b1;
            is2m  <= !seg_hit[0];
            ppn   <= seg_hit[0] ? hit_pa[0][PA_W-1:SHIFT_4K]
                                : {hit_pa[1][PA_W-1:SHIFT_2M], vpn_q[8:0]};
            perm  <= seg_hit[0] ? hit_perm[0] : hit_perm[1];
            state <= S_IDLE;
          end else if (|{need_sf, need_tar}) begin
            to_issue <= {need_tar[1], need_sf[1], need_tar[0], need_sf[0]};
            n_out    <= '0;
            wr_ptr   <= '0;
            rd_ptr   <= '0;
            state    <= S_FETCH;
          end else begin
            done  <= 1'b1;
            found <= 1'b0;
            state <= S_IDLE;
          end
        end
        S_FETCH: begin
          logic [2:0] n_next;
          logic [3:0] iss_next;
          n_next   = n_out;
          iss_next = to_issue;
          if (rs_req_valid && rs_req_ready) begin
            iss_next[issue_kind] = 1'b0;
            kind_q[wr_ptr]       <= issue_kind;
            wr_ptr               <= wr_ptr + 1'b1;
            n_next               = n_next + 1'b1;
            ev_fetch             <= 1'b1;
          end
          if (rs_resp_valid) begin
            rd_ptr <= rd_ptr + 1'b1;
            n_next = n_next - 1'b1;
          end
          n_out    <= n_next;
          to_issue <= iss_next;
          if (n_next == '0 && iss_next == '0) state <= S_LOOK;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
