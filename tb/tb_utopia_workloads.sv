// tb_utopia_workloads -- the paper's workload kinds, scaled down, on the
// full-size MMU (default parameters).
//
// Each workload of the evaluation is reproduced as an address stream with its
// input size scaled by about 1/20000 (48 regions per GB of input) and its
// share of 2MB pages, both from the paper's workload table. Workloads that differ only
// in size share this testbench; two access patterns stand for the kinds:
// uniform random (GUPS random access, k-mer counting, sparse-length sum) and
// skewed (graph kernels and the particle simulation: 80% of the accesses go
// to 10% of the pages). Pages are placed so that the 4KB RestSeg sets
// overflow and part of the footprint ends up in the FlexSeg.
//
// The testbench plays the OS the way the design expects: on a page fault it
// places the page into its RestSeg set if a way is free (otherwise into the
// FlexSeg), issues INVLPG and retries; on a migration interrupt it moves the
// FlexSeg page into its 4KB RestSeg set, evicting a random way of a full set
// to the FlexSeg (the paper's OS evicts; its policy is not modelled). To let
// the PTW-tracking counters grow, the cache state of the memory model is
// forgotten every 64 accesses (other data pushes the page tables out). Every
// response is
// checked against the reference map and the latency table as in the
// end-to-end test. Per workload it prints how the translations were
// resolved, and it fails if a workload never used a RestSeg, the FlexSeg or
// the L1 TLB, or if no workload triggered a migration.
module tb_utopia_workloads;
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



  // ------------------------------------------------------------ run
  initial begin
    #400000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { bit big; logic [VPN_W-1:0] vpn; } region_t;
  region_t regions [$];
  bit big_region [logic [VPN_W-1:0]];
  int n_evict = 0;
  longint unsigned next_flex4k = 64'h50_0000, next_flex2m = 64'h80_0000;

  // page fault handler: RestSeg first, FlexSeg when the set is full
  task automatic os_fault(logic [VA_W-1:0] va);
    logic [VPN_W-1:0] v; perm_t pm;
    pm = '{1, 1, 0};
    v = va >> 12;
    if (big_region.exists(va >> 21)) begin
      if (!rs_place(1, va >> 21, pm)) begin flex2m(va >> 21, next_flex2m, pm); next_flex2m += 512; end
    end else begin
      if (!rs_place(0, v, pm)) begin flex4k(v, next_flex4k, pm); next_flex4k++; end
    end
    do_invlpg(va);
  endtask

  // migration handler: move the FlexSeg page into its 4KB RestSeg set; when
  // the set is full, a random victim of that set is moved to the FlexSeg
  task automatic os_migrate();
    logic [VPN_W-1:0] v, victim; perm_t pm; int set, way; bit got;
    v = mig_vpn;
    mig_ack = 1; @(negedge clk); mig_ack = 0;
    if (!mig_is2m && ref4.exists(v) && ref4[v].kind == 0) begin
      set = int'(v % SETS0);
      pm = ref4[v].p;
      mem.write64(ref4[v].pte_addr, 64'h0);              // leaves the FlexSeg
      ref4.delete(v);
      if (!occ[0].exists(set) || occ[0][set] < WAYS) begin
        void'(rs_place(0, v, pm));
      end else begin
        way = $urandom_range(0, WAYS - 1);
        got = 0;
        foreach (ref4[u])
          if (!got && ref4[u].kind == 2 && ref4[u].ppn == (restseg_base[0] >> 12) + set * WAYS + way) begin
            victim = u; got = 1;
          end
        check(got, "victim found");
        flex4k(victim, next_flex4k, ref4[victim].p); next_flex4k++;
        put_entry(0, set, way, 23'(v / SETS0), {6'b0, pm.nx, pm.user, pm.writable, 1'b1});
        ref4[v] = '{2, (restseg_base[0] >> 12) + set * WAYS + way, pm, 0};
        do_invlpg({victim, 12'h0});
        n_evict++;
      end
      do_invlpg({v, 12'h0});
      n_mig++;
    end
  endtask

  task automatic run_workload(string name, real gb, int pct2m, bit skewed, int n_acc, int idx);
    int n_regions, l1, l2, rsw, fsw, flt, mg, ok0;
    logic [VPN_W-1:0] base;
    regions.delete();
    big_region.delete();
    n_regions = int'(gb * 48.0);
    base = VPN_W'(36'h1_0000_0000) + VPN_W'(idx) * 36'h0_1000_0000;
    for (int i = 0; i < n_regions; i++) begin
      region_t r;
      r.big = ($urandom_range(0, 99) < pct2m);
      if (r.big) begin
        r.vpn = (base >> 9) + VPN_W'(i % 4) + VPN_W'(16 * (i + 1));   // 2MB sets 0..3
        big_region[r.vpn] = 1;
      end else begin
        // 4KB pages crowd into 6 sets of the 4KB RestSeg so that they overflow
        r.vpn = base + VPN_W'(i % 6) + VPN_W'(SETS0) * VPN_W'(i + 1) + 36'h0_0800_0000;
      end
      regions.push_back(r);
    end
    l1 = n_l1d; l2 = n_l2; rsw = n_rsw4 + n_rsw2; fsw = n_fsw4 + n_fsw2; flt = n_fault; mg = n_mig;
    // a new process: the previous one has exited and freed its RestSeg pages;
    // fresh page table, TAR and SF, registers reloaded, TLBs flushed
    while (!req_ready) @(negedge clk);
    occ[0].delete(); occ[1].delete();
    ref4.delete(); ref2.delete();
    root = alloc_tbl();
    cr3  = PPN_W'(root);
    tar_base[0] = 52'h0_9000_0000 + PA_W'(idx) * 52'h100_0000;
    tar_base[1] = tar_base[0] + 52'h10_0000;
    sf_base[0]  = tar_base[0] + 52'h20_0000;
    sf_base[1]  = tar_base[0] + 52'h20_4000;
    do_flush();
    for (int k = 0; k < n_acc; k++) begin
      int ri; logic [VA_W-1:0] va;
      if (skewed && $urandom_range(0, 9) < 8) ri = $urandom_range(0, n_regions / 10);
      else ri = $urandom_range(0, n_regions - 1);
      va = regions[ri].big ? {regions[ri].vpn, 21'($urandom)} : {regions[ri].vpn, 12'($urandom)};
      access(va, 0);
      if (last_src == SRC_FAULT) begin
        os_fault(va);
        access(va, 0);
        check(last_src != SRC_FAULT, "retry after allocation");
      end
      if (mig_irq) os_migrate();
      if (k % 64 == 63) mem.forget_cache();     // other data pushes the tables out of the caches
    end
    $display("%-5s %5.1f GB %2d%% 2MB: L1 %0d  L2 %0d  RestSeg %0d  FlexSeg %0d  faults %0d  migrations %0d",
             name, gb, pct2m, n_l1d - l1, n_l2 - l2, n_rsw4 + n_rsw2 - rsw, n_fsw4 + n_fsw2 - fsw,
             n_fault - flt, n_mig - mg);
    check(n_rsw4 + n_rsw2 > rsw, {name, ": no RestSeg translation"});
    check(n_fsw4 + n_fsw2 > fsw, {name, ": no FlexSeg translation"});
    check(n_l1d > l1, {name, ": no L1 hit"});
  endtask

  initial begin
    restseg_base[0] = 52'h1_0000_0000;  restseg_base[1] = 52'h1_2000_0000;
    tar_base[0]     = 52'h0_8000_0000;  tar_base[1]     = 52'h0_8010_0000;
    sf_base[0]      = 52'h0_8020_0000;  sf_base[1]      = 52'h0_8020_4000;
    root = alloc_tbl();
    cr3  = PPN_W'(root);
    thr_freq = 4'd2; thr_cost = 5'd2;
    repeat (4) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    // name, input size (GB) and share of 2MB pages from the workload table
    run_workload("BC",   8.0,  36, 1, 1200, 0);
    run_workload("BFS",  8.0,  46, 1, 1200, 1);
    run_workload("CC",   8.0,  55, 1, 1200, 2);
    run_workload("GC",   8.0,  52, 1, 1200, 3);
    run_workload("PR",   8.0,  51, 1, 1200, 4);
    run_workload("TC",   8.0,  32, 1, 1200, 5);
    run_workload("SP",   8.0,  46, 1, 1200, 6);
    run_workload("XS",   9.0,  43, 1, 1200, 7);
    run_workload("RND", 10.0,  51, 0, 1200, 8);
    run_workload("DLRM", 10.3, 46, 0, 1200, 9);
    run_workload("GEN", 33.0,  51, 0, 2000, 10);
    $display("migrations %0d (with eviction %0d), INVLPG %0d, SF filtering %0d, TAR/SF fetches %0d", n_mig, n_evict, n_inv, n_filter, n_fetch);
    check(n_mig > 0, "no migration in any workload");
    check(n_evict > 0, "no migration that needed an eviction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
