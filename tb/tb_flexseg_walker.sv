// tb_flexseg_walker -- self-checking test of the FlexSeg walker (x86-64
// four-level walk, three split page walk caches, PTW-tracking write-back).
//
// The testbench builds a real four-level page table in a behavioural memory
// (4KB and 2MB leaves, random permissions), then walks random mapped and
// unmapped addresses. Checked: translation, page size, permissions and
// faults against the reference map; the number of page-table reads per walk
// (4 on a cold walk, 1 after a PD-cache hit, 2 after a PDP-cache hit, 3
// after a PML4-cache hit), the first request three cycles after start (2-cycle PWC lookup plus
// one cycle to pick the start level),
// the PTE write-back with frequency +1 and cost + DRAM reads, and that
// `migrate` rises exactly when both counters pass their thresholds.
module tb_flexseg_walker;
  import utopia_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, fault, is2m, migrate, pwc_flush = 0;
  logic [VPN_W-1:0] vpn = '0;
  logic [PPN_W-1:0] cr3, ppn;
  perm_t perm;
  logic [PTW_FREQ_W-1:0] thr_freq = '1;
  logic [PTW_COST_W-1:0] thr_cost = '1;
  logic pt_req_valid, pt_req_ready, pt_resp_valid, rs_req_ready, rs_resp_valid;
  pt_req_t pt_req;
  pt_resp_t pt_resp;
  rs_resp_t rs_resp;

  flexseg_walker dut (.*);
  utopia_mem_model mem (.clk, .pt_req_valid, .pt_req_ready, .pt_req, .pt_resp_valid, .pt_resp,
                        .rs_req_valid(1'b0), .rs_req_ready, .rs_req('0), .rs_resp_valid, .rs_resp);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---- page-table builder ----
  longint unsigned next_tbl = 64'h10_0000;      // table pages from PPN 0x100000
  function automatic longint unsigned alloc_tbl();
    next_tbl++;
    return next_tbl;
  endfunction

  // returns the PPN of the next-level table, creating it when absent
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

  longint unsigned root;
  typedef struct { longint unsigned ppn; perm_t p; bit big; longint unsigned pte_addr; } map_t;
  map_t ref4 [logic [VPN_W-1:0]];
  map_t ref2 [logic [VPN_W-1:0]];     // key: vpn >> 9

  function automatic void map4k(logic [VPN_W-1:0] v, longint unsigned p, perm_t pm);
    longint unsigned t;
    t = child(root, int'(v[35:27]));
    t = child(t, int'(v[26:18]));
    t = child(t, int'(v[17:9]));
    mem.write64(t * 4096 + v[8:0] * 8, leaf(p, pm, 0));
    ref4[v] = '{p, pm, 0, t * 4096 + v[8:0] * 8};
  endfunction

  function automatic void map2m(logic [VPN_W-1:0] v2, longint unsigned p, perm_t pm);
    longint unsigned t;
    logic [VPN_W-1:0] v;
    v = v2 << 9;
    t = child(root, int'(v[35:27]));
    t = child(t, int'(v[26:18]));
    mem.write64(t * 4096 + v[17:9] * 8, leaf(p, pm, 1));
    ref2[v2] = '{p, pm, 1, t * 4096 + v[17:9] * 8};
  endfunction

  // ---- walk ----
  int unsigned first_req;
  task automatic walk(logic [VPN_W-1:0] v, output int reads, output int writes, output int cyc);
    int r0, w0;
    r0 = mem.pt_reads; w0 = mem.pt_writes;
    first_req = 0;
    @(negedge clk); start = 1; vpn = v;
    @(negedge clk); start = 0; cyc = 1;
    while (!done && cyc < 1000) begin
      if (pt_req_valid && first_req == 0) first_req = cyc;
      @(negedge clk); cyc++;
    end
    reads = mem.pt_reads - r0; writes = mem.pt_writes - w0;
  endtask

  task automatic walk_check(logic [VPN_W-1:0] v, output int reads);
    int writes, cyc;
    logic [63:0] pte_old, pte_new;
    map_t m;
    bit mapped;
    mapped = 0;
    if (ref4.exists(v)) begin m = ref4[v]; mapped = 1; end
    else if (ref2.exists(v >> 9)) begin m = ref2[v >> 9]; mapped = 1; end
    if (mapped) pte_old = mem.read64(m.pte_addr);
    walk(v, reads, writes, cyc);
    check(first_req == 3, $sformatf("first request %0d cycles after start (PWC latency 2, plus 1)", first_req));
    if (!mapped) begin
      check(fault, $sformatf("unmapped %h must fault", v));
      check(writes == 0, "no write-back on fault");
    end else begin
      logic [PPN_W-1:0] exp;
      int ef, ec, dram;
      exp = m.big ? PPN_W'((m.ppn & ~64'h1FF) | (v & 36'h1FF)) : PPN_W'(m.ppn);
      check(!fault && ppn == exp && is2m == m.big && perm == m.p,
            $sformatf("walk %h: fault %b ppn %h exp %h is2m %b", v, fault, ppn, exp, is2m));
      check(writes == 1, "one PTE write-back");
      pte_new = mem.read64(m.pte_addr);
      ef = pte_old[55:52] == 15 ? 15 : pte_old[55:52] + 1;
      check(pte_new[55:52] == 4'(ef), "frequency counter +1");
      ec = pte_old[58:56] * 4 + pte_old[10:9];
      dram = mem.pt_dram - dram_before;
      ec = ec + dram > 31 ? 31 : ec + dram;
      check({pte_new[58:56], pte_new[10:9]} == 5'(ec), $sformatf("cost counter %0d exp %0d", {pte_new[58:56], pte_new[10:9]}, ec));
      check(migrate == (ef > thr_freq && ec > thr_cost), "migrate flag");
      check(pte_new[51:11] == pte_old[51:11] && pte_new[8:0] == pte_old[8:0] && pte_new[63] == pte_old[63], "translation bits untouched");
    end
  endtask

  int unsigned dram_before;
  always @(negedge clk) if (start) dram_before = mem.pt_dram;

  initial begin
    #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [VPN_W-1:0] keys [$];
  initial begin
    int r; int nmig;
    root = alloc_tbl();
    cr3 = PPN_W'(root);
    // a dense region (shares PT pages) and scattered pages
    for (int i = 0; i < 64; i++) map4k(36'h0_1234_5000 + i, 64'h20_0000 + i * 7, perm_t'(3'(i)));
    map4k(36'h0_1234_5000 + 512 * 3, 64'h20_1000, perm_t'(3'd1));
    map4k(36'h0_1234_5000 + (36'd1 << 18), 64'h20_2000, perm_t'(3'd2));
    for (int i = 0; i < 150; i++) begin
      logic [VPN_W-1:0] v;
      v = VPN_W'({$urandom, $urandom}) & 36'h7_FFFF_FFFF;      // user half
      if (!ref4.exists(v) && !ref2.exists(v >> 9)) map4k(v, 64'h30_0000 + i, perm_t'(3'($urandom)));
    end
    for (int i = 0; i < 20; i++) begin
      logic [VPN_W-1:0] v2;
      v2 = VPN_W'($urandom) & 36'h3FF_FFFF;
      if (!ref2.exists(v2)) map2m(v2, 64'h40_0000 + i * 512, perm_t'(3'($urandom)));
    end
    foreach (ref4[v]) keys.push_back(v);
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);

    // cold walk: 4 reads; neighbour in the same PT page: PD-cache hit, 1 read
    walk_check(36'h0_1234_5000, r); check(r == 4, $sformatf("cold walk reads %0d", r));
    walk_check(36'h0_1234_5001, r); check(r == 1, $sformatf("PD-PWC hit reads %0d", r));
    // same PD table, other PT page: PDP-cache hit, 2 reads
    walk_check(36'h0_1234_5000 + 512 * 3, r); check(r == 2, $sformatf("PDP-PWC hit reads %0d", r));
    // same PDP table, other PD table: PML4-cache hit, 3 reads
    walk_check(36'h0_1234_5000 + (36'd1 << 18), r); check(r == 3, $sformatf("PML4-PWC hit reads %0d", r));
    // flush: cold again
    @(negedge clk); pwc_flush = 1; @(negedge clk); pwc_flush = 0;
    walk_check(36'h0_1234_5002, r); check(r == 4, $sformatf("pte_new flush reads %0d", r));

    // random walks: mapped 4KB, mapped 2MB, unmapped
    for (int k = 0; k < 300; k++) begin
      int sel;
      sel = $urandom_range(0, 2);
      if (sel == 0) walk_check(keys[$urandom_range(0, keys.size() - 1)], r);
      else if (sel == 1) begin
        logic [VPN_W-1:0] v2s [$];
        foreach (ref2[v2]) v2s.push_back(v2);
        walk_check((v2s[$urandom_range(0, v2s.size() - 1)] << 9) + VPN_W'($urandom_range(0, 511)), r);
      end else walk_check(VPN_W'({$urandom, $urandom}) | 36'h8_0000_0000, r);
      if (k % 50 == 0) mem.forget_cache();
    end

    // migration: thresholds low, walk the same page until migrate
    thr_freq = 4'd3; thr_cost = 5'd2;
    nmig = 0;
    for (int k = 0; k < 6; k++) begin
      mem.forget_cache();
      walk_check(36'h0_1234_5020, r);
      nmig += migrate;
    end
    check(nmig > 0, "migrate raised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
