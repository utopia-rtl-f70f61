// tb_utopia_mmu -- end-to-end, full-size test of the Utopia MMU.
//
// The MMU is instantiated with its default (paper) parameters: two 512MB
// 16-way RestSegs, 64/32/128-entry L1 TLBs, a 1536-entry 12-cycle L2 TLB and
// 32-entry page walk caches. A behavioural memory holds the page tables,
// the Tag Arrays and the Set Filters. The testbench plays the OS: it maps
// pages into the FlexSeg (four-level page table, 4KB and 2MB pages) and
// into both RestSegs (TAR entry + SF counter), answers the migration
// interrupt by moving the page into the 4KB RestSeg and issuing INVLPG, and
// flushes the TLBs as a context switch would.
//
// Every response is checked against the reference map (physical address,
// permissions, fault, and where it was resolved), and its latency against
// the design's timing: L1 hit 2 cycles after acceptance, L2 TLB hit
// 2 + 12 cycles, RestSeg walk with cached TAR/SF 2 + 3 cycles. A directed
// part exercises each mechanism once; a random part mixes 3000 accesses.
// At the end the test fails if any mechanism never happened: L1 (I and D)
// hits, L2 hits, RestSeg hits in each segment, SF filtering, TAR/SF
// fetches, FlexSeg walks of 4KB and 2MB pages, PWC hits, page faults, L2
// lookups aborted by RestSeg hits, migration interrupts, INVLPG and flush.
module tb_utopia_mmu;
  import utopia_pkg::*;
  localparam int SETS0 = 8192, SETS1 = 16, WAYS = 16;
  localparam int LAT_L1 = 2, LAT_L2 = 2 + 12, LAT_RSW = 2 + 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, req_instr = 0, rsp_valid, rsp_fault;
  logic [VA_W-1:0] req_vaddr = '0, inv_vaddr = '0;
  logic [PA_W-1:0] rsp_paddr;
  perm_t rsp_perm;
  xlat_src_e rsp_src;
  logic [PPN_W-1:0] cr3;
  logic [PA_W-1:0] restseg_base [NSEG], tar_base [NSEG], sf_base [NSEG];
  logic [PTW_FREQ_W-1:0] thr_freq = '1;
  logic [PTW_COST_W-1:0] thr_cost = '1;
  logic inv_valid = 0, inv_ready, flush = 0, mig_irq, mig_is2m, mig_ack = 0;
  logic [VPN_W-1:0] mig_vpn;
  logic ev_sf_filter, ev_rs_fetch;
  logic pt_req_valid, pt_req_ready, pt_resp_valid, rs_req_valid, rs_req_ready, rs_resp_valid;
  pt_req_t pt_req;
  pt_resp_t pt_resp;
  rs_req_t rs_req;
  rs_resp_t rs_resp;

  utopia_mmu dut (.*);
  utopia_mem_model mem (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ event counters
  int n_l1i = 0, n_l1d = 0, n_l2 = 0, n_rsw4 = 0, n_rsw2 = 0, n_fsw4 = 0, n_fsw2 = 0, n_fault = 0;
  int n_filter = 0, n_fetch = 0, n_pwc = 0, n_abort = 0, n_mig = 0, n_inv = 0, n_flush = 0;
  always @(posedge clk) begin
    n_filter += ev_sf_filter;
    n_fetch  += ev_rs_fetch;
    n_abort  += dut.l2_abort;
    n_pwc    += (dut.u_fsw.state == 3'd1 && dut.u_fsw.pd_v &&
                 (dut.u_fsw.pd_h || dut.u_fsw.pdp_h || dut.u_fsw.pml4_h));
    n_inv    += (inv_valid && inv_ready);
    n_flush  += flush;
  end

  // ------------------------------------------------------------ OS: page tables
  longint unsigned next_tbl = 64'h10_0000;
  longint unsigned root;
  function automatic longint unsigned alloc_tbl();
    next_tbl++;
    return next_tbl;
  endfunction
  function automatic longint unsigned child(longint unsigned tbl, int idx);
    logic [63:0] e;
    e = mem.read64(tbl * 4096 + idx * 8);
    if (e[PTE_P]) return longint'(e[51:12]);
    e = '0;
    e[51:12] = 40'(alloc_tbl());
    e[PTE_P] = 1; e[PTE_RW] = 1; e[PTE_US] = 1;
    mem.write64(tbl * 4096 + idx * 8, e);
    return longint'(e[51:12]);
  endfunction
  function automatic logic [63:0] leaf(longint unsigned p, perm_t pm, bit big);
    logic [63:0] e;
    e = '0;
    e[51:12] = 40'(p);
    e[PTE_P] = 1; e[PTE_RW] = pm.writable; e[PTE_US] = pm.user; e[PTE_NX] = pm.nx; e[PTE_PS] = big;
    return e;
  endfunction

  // reference: where each page lives. kind 0 FlexSeg 4KB, 1 FlexSeg 2MB, 2 RestSeg 4KB, 3 RestSeg 2MB
  typedef struct { int kind; longint unsigned ppn; perm_t p; longint unsigned pte_addr; } map_t;
  map_t ref4 [logic [VPN_W-1:0]];     // 4KB pages, key 4KB VPN
  map_t ref2 [logic [VPN_W-1:0]];     // 2MB pages, key 2MB VPN

  function automatic void flex4k(logic [VPN_W-1:0] v, longint unsigned p, perm_t pm);
    longint unsigned t;
    t = child(root, int'(v[35:27])); t = child(t, int'(v[26:18])); t = child(t, int'(v[17:9]));
    mem.write64(t * 4096 + v[8:0] * 8, leaf(p, pm, 0));
    ref4[v] = '{0, p, pm, t * 4096 + v[8:0] * 8};
  endfunction
  function automatic void flex2m(logic [VPN_W-1:0] v2, longint unsigned p, perm_t pm);
    longint unsigned t; logic [VPN_W-1:0] v;
    v = v2 << 9;
    t = child(root, int'(v[35:27])); t = child(t, int'(v[26:18]));
    mem.write64(t * 4096 + v[17:9] * 8, leaf(p, pm, 1));
    ref2[v2] = '{1, p, pm, t * 4096 + v[17:9] * 8};
  endfunction

  // ------------------------------------------------------------ OS: RestSegs
  int unsigned occ [2][int];
  function automatic void put_entry(int seg, int set, int way, logic [22:0] tag, logic [9:0] meta);
    logic [RS_LINE_W-1:0] line; longint unsigned a;
    a = tar_base[seg] + longint'(set) * 66;
    for (int i = 0; i < 66; i++) line[i*8 +: 8] = mem.rd8(a + i);
    line[way*33 +: 33] = {tag, meta};
    for (int i = 0; i < 66; i++) mem.write8(a + i, line[i*8 +: 8]);
  endfunction
  // place a page (seg 0: 4KB VPN v, seg 1: 2MB VPN v); returns 0 when the set is full
  function automatic bit rs_place(int seg, logic [VPN_W-1:0] v, perm_t pm);
    int set, way; logic [22:0] tag; longint unsigned p;
    set = (seg == 0) ? int'(v % SETS0) : int'(v % SETS1);
    tag = (seg == 0) ? 23'(v / SETS0) : 23'(v / SETS1);
    way = occ[seg].exists(set) ? int'(occ[seg][set]) : 0;
    if (way >= WAYS) return 0;
    occ[seg][set] = way + 1;
    put_entry(seg, set, way, tag, {6'b0, pm.nx, pm.user, pm.writable, 1'b1});
    mem.write8(sf_base[seg] + set, 8'(way + 1));
    if (seg == 0) begin
      p = (restseg_base[0] >> 12) + set * WAYS + way;
      ref4[v] = '{2, p, pm, 0};
    end else begin
      p = (restseg_base[1] >> 12) + (set * WAYS + way) * 512;
      ref2[v] = '{3, p, pm, 0};
    end
    return 1;
  endfunction

  // ------------------------------------------------------------ access
  xlat_src_e last_src;
  int        last_lat;
  task automatic access(logic [VA_W-1:0] va, bit instr);
    int n, f0; map_t m; bit mapped, big; logic [PA_W-1:0] exp;
    while (!req_ready) @(negedge clk);
    f0 = n_fetch;
    req_valid = 1; req_vaddr = va; req_instr = instr;
    @(negedge clk); req_valid = 0; n = 1;
    while (!rsp_valid && n < 3000) begin @(negedge clk); n++; end
    last_src = rsp_src; last_lat = n;
    mapped = 0; big = 0;
    if (ref4.exists(va >> 12)) begin m = ref4[va >> 12]; mapped = 1; end
    else if (ref2.exists(va >> 21)) begin m = ref2[va >> 21]; mapped = 1; big = 1; end
    if (!rsp_valid) begin check(0, $sformatf("no response for %h", va)); return; end
    if (!mapped) begin
      check(rsp_fault && rsp_src == SRC_FAULT, $sformatf("unmapped %h: fault %b src %s", va, rsp_fault, rsp_src.name()));
      n_fault += rsp_fault;
    end else begin
      exp = big ? PA_W'((m.ppn << 12) + (va & 48'h1F_FFFF)) : PA_W'((m.ppn << 12) + (va & 48'hFFF));
      check(!rsp_fault && rsp_paddr == exp && rsp_perm == m.p,
            $sformatf("va %h: pa %h exp %h fault %b src %s", va, rsp_paddr, exp, rsp_fault, rsp_src.name()));
      // the right mechanism resolved it
      if (rsp_src == SRC_RSW) check(m.kind >= 2, $sformatf("va %h: RestSeg hit for a FlexSeg page", va));
      if (rsp_src == SRC_FSW) check(m.kind <= 1, $sformatf("va %h: FlexSeg walk for a RestSeg page", va));
    end
    unique case (rsp_src)
      SRC_L1TLB: begin check(n == LAT_L1, $sformatf("L1 latency %0d", n)); if (instr) n_l1i++; else n_l1d++; end
      SRC_L2TLB: begin check(n == LAT_L2, $sformatf("L2 latency %0d", n)); n_l2++; end
      SRC_RSW:   begin
        if (n_fetch == f0) check(n == LAT_RSW, $sformatf("RestSeg walk latency %0d", n));
        if (big) n_rsw2++; else n_rsw4++;
      end
      SRC_FSW:   if (big) n_fsw2++; else n_fsw4++;
      default: ;
    endcase
  endtask

  task automatic do_flush();
    while (!req_ready) @(negedge clk);
    flush = 1; @(negedge clk); flush = 0;
  endtask

  task automatic do_invlpg(logic [VA_W-1:0] va);
    while (!inv_ready) @(negedge clk);
    inv_valid = 1; inv_vaddr = va; @(negedge clk); inv_valid = 0;
  endtask

  // OS interrupt handler: move the page into the 4KB RestSeg, then INVLPG
  task automatic serve_migration();
    logic [VPN_W-1:0] v; perm_t pm;
    v = mig_vpn;
    mig_ack = 1; @(negedge clk); mig_ack = 0;
    n_mig++;
    if (!mig_is2m && ref4.exists(v) && ref4[v].kind == 0) begin
      pm = ref4[v].p;
      mem.write64(ref4[v].pte_addr, 64'h0);              // leave the FlexSeg
      ref4.delete(v);
      if (rs_place(0, v, pm)) do_invlpg({v, 12'h0});
      else check(0, "migration target set full");
    end
  endtask

  // ------------------------------------------------------------ run
  initial begin
    #50000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [VPN_W-1:0] pool4 [$], pool2 [$];
  initial begin
    logic [VPN_W-1:0] fv, rs2m, fl2m;
    restseg_base[0] = 52'h1_0000_0000;  restseg_base[1] = 52'h1_2000_0000;
    tar_base[0]     = 52'h0_8000_0000;  tar_base[1]     = 52'h0_8010_0000;
    sf_base[0]      = 52'h0_8020_0000;  sf_base[1]      = 52'h0_8020_4000;
    root = alloc_tbl();
    cr3  = PPN_W'(root);
    // FlexSeg 4KB pages: a dense run and scattered ones
    for (int i = 0; i < 96; i++) flex4k(36'h0_0040_0000 + i, 64'h20_0000 + i, perm_t'(3'(i)));
    for (int i = 0; i < 200; i++) begin
      logic [VPN_W-1:0] v;
      v = VPN_W'({$urandom, $urandom}) & 36'h3_FFFF_FFFF;
      if (!ref4.exists(v) && !ref2.exists(v >> 9)) flex4k(v, 64'h30_0000 + i, perm_t'(3'($urandom)));
    end
    // FlexSeg 2MB pages
    for (int i = 0; i < 16; i++) begin
      logic [VPN_W-1:0] v2;
      v2 = VPN_W'(27'h500_0000 + $urandom_range(0, 1 << 16));
      if (!ref2.exists(v2)) flex2m(v2, 64'h40_0000 + i * 512, perm_t'(3'($urandom)));
    end
    // RestSeg 4KB pages (region 0x6_xxxx_xxxx) and 2MB pages (region 0x7...)
    for (int i = 0; i < 300; i++) begin
      logic [VPN_W-1:0] v;
      v = 36'h6_0000_0000 + VPN_W'($urandom_range(0, 511)) + VPN_W'(SETS0) * VPN_W'($urandom_range(0, 4095));
      if (!ref4.exists(v)) void'(rs_place(0, v, perm_t'(3'($urandom))));
    end
    for (int i = 0; i < 40; i++) begin
      logic [VPN_W-1:0] v2;
      v2 = VPN_W'(27'h380_0000 + $urandom_range(0, 1 << 12));
      if (!ref2.exists(v2)) void'(rs_place(1, v2, perm_t'(3'($urandom))));
    end
    foreach (ref4[v]) pool4.push_back(v);
    foreach (ref2[v]) pool2.push_back(v);
    $display("mapped: %0d 4KB pages, %0d 2MB pages", pool4.size(), pool2.size());

    repeat (4) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);

    // ---------------- directed ----------------
    // FlexSeg 4KB: walk, then L1 hit; a neighbour uses the page walk caches
    access(48'h0004_0000_0123, 0); check(last_src == SRC_FSW, "first FlexSeg access walks");
    access(48'h0004_0000_0456, 0); check(last_src == SRC_L1TLB, "then hits L1");
    access(48'h0004_0000_1010, 0); check(last_src == SRC_FSW, "neighbour walks");
    // instruction fetch through the I-TLB
    access(48'h0004_0000_2000, 1); access(48'h0004_0000_2004, 1);
    check(last_src == SRC_L1TLB, "I-TLB hit");
    // L2 hit: 5 pages in one L1 set (VPN mod 16 equal) evict the first from L1
    for (int i = 0; i < 5; i++) access(48'h0004_0000_3000 + i * 16 * 4096, 0);
    access(48'h0004_0000_3008, 0); check(last_src == SRC_L2TLB, "L2 TLB hit after L1 eviction");
    // RestSeg 4KB: fetch TAR/SF, then a second page of the same set from the cached TAR set
    begin
      logic [VPN_W-1:0] a, b; bit got;
      got = 0;
      foreach (pool4[i]) if (ref4[pool4[i]].kind == 2 && !got)
        foreach (pool4[j]) if (j != i && ref4[pool4[j]].kind == 2 && pool4[j] % SETS0 == pool4[i] % SETS0 && !got) begin
          a = pool4[i]; b = pool4[j]; got = 1;
        end
      check(got, "two RestSeg pages share a set");
      access({a, 12'h008}, 0); check(last_src == SRC_RSW, "RestSeg hit");
      access({b, 12'h010}, 0); check(last_src == SRC_RSW && last_lat == LAT_RSW, "RestSeg hit from cached TAR set");
      access({a, 12'h100}, 0); check(last_src == SRC_L1TLB, "RestSeg result filled L1");
    end
    // RestSeg 2MB, then another 4KB piece of it hits the 2MB L1 D-TLB
    foreach (pool2[i]) if (ref2[pool2[i]].kind == 3) rs2m = pool2[i];
    foreach (pool2[i]) if (ref2[pool2[i]].kind == 1) fl2m = pool2[i];
    access({rs2m, 21'h1_2345}, 0); check(last_src == SRC_RSW, "2MB RestSeg hit");
    access({rs2m, 21'h0_0040}, 0); check(last_src == SRC_L1TLB, "2MB L1 hit");
    // FlexSeg 2MB
    access({fl2m, 21'h0_0777}, 0); check(last_src == SRC_FSW, "2MB FlexSeg walk");
    // fault
    access(48'hFFF0_0000_0000, 0); check(last_src == SRC_FAULT, "page fault");
    // INVLPG drops a RestSeg page the OS removed
    begin
      logic [VPN_W-1:0] v; int set;
      v = 36'h6_0000_0000 + 36'd77 + VPN_W'(SETS0) * 36'd5000;   // not placed earlier (range ends at 4095)
      void'(rs_place(0, v, '{1, 1, 0}));
      do_invlpg({v, 12'h0});          // the OS changed a TAR set that may be cached
      access({v, 12'h0}, 0); check(last_src == SRC_RSW, "new RestSeg page");
      set = int'(v % SETS0);
      put_entry(0, set, int'(occ[0][set]) - 1, 23'h0, 10'h0);
      ref4.delete(v);
      do_invlpg({v, 12'h0});
      access({v, 12'h0}, 0); check(last_src == SRC_FAULT, "removed page faults after INVLPG");
    end
    // migration: low thresholds, walk the same FlexSeg page repeatedly
    thr_freq = 4'd2; thr_cost = 5'd1;
    fv = 36'h0_0040_0005;
    for (int k = 0; k < 6 && !mig_irq; k++) begin
      mem.forget_cache();
      do_flush();
      access({fv, 12'h0}, 0);
      @(negedge clk);
    end
    check(mig_irq, "migration interrupt");
    if (mig_irq) begin
      check(mig_vpn == fv, "migration vpn");
      serve_migration();
      access({fv, 12'h0}, 0); check(last_src == SRC_RSW, "migrated page now in the RestSeg");
    end
    thr_freq = '1; thr_cost = '1;

    // ---------------- random ----------------
    pool4.delete();
    foreach (ref4[v]) pool4.push_back(v);
    for (int k = 0; k < 3000; k++) begin
      int r; logic [VA_W-1:0] va;
      r = $urandom_range(0, 99);
      if (r < 60)      va = {pool4[$urandom_range(0, pool4.size() - 1)], 12'($urandom)};
      else if (r < 85) va = {pool2[$urandom_range(0, pool2.size() - 1)], 21'($urandom)};
      else if (r < 92) va = {pool4[$urandom_range(0, 7)], 12'($urandom)};        // hot pages
      else             va = VA_W'({$urandom, $urandom}) | 48'h8000_0000_0000;   // unmapped
      access(va, $urandom_range(0, 9) == 0);
      if (k % 500 == 499) do_flush();
      if (k % 300 == 150) do_invlpg(va);
      if (mig_irq) serve_migration();
    end

    // ---------------- every mechanism must have happened ----------------
    $display("L1-I %0d  L1-D %0d  L2 %0d  RSW4K %0d  RSW2M %0d  FSW4K %0d  FSW2M %0d  fault %0d",
             n_l1i, n_l1d, n_l2, n_rsw4, n_rsw2, n_fsw4, n_fsw2, n_fault);
    $display("SF-filter %0d  TAR/SF fetch %0d  PWC hit %0d  L2 abort %0d  migration %0d  INVLPG %0d  flush %0d",
             n_filter, n_fetch, n_pwc, n_abort, n_mig, n_inv, n_flush);
    check(n_l1i > 0, "no I-TLB hit");       check(n_l1d > 0, "no D-TLB hit");
    check(n_l2 > 0, "no L2 TLB hit");       check(n_rsw4 > 0, "no 4KB RestSeg hit");
    check(n_rsw2 > 0, "no 2MB RestSeg hit"); check(n_fsw4 > 0, "no 4KB FlexSeg walk");
    check(n_fsw2 > 0, "no 2MB FlexSeg walk"); check(n_fault > 0, "no page fault");
    check(n_filter > 0, "no SF filtering");  check(n_fetch > 0, "no TAR/SF fetch");
    check(n_pwc > 0, "no PWC hit");          check(n_abort > 0, "no aborted L2 lookup");
    check(n_mig > 0, "no migration");        check(n_inv > 0, "no INVLPG");
    check(n_flush > 0, "no flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
