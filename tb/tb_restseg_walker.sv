// tb_restseg_walker -- self-checking test of the RestSeg walker with its SF
// and TAR caches, at the paper's geometry (two 512MB 16-way RestSegs: 8192
// sets of 4KB pages, 16 sets of 2MB pages).
//
// The testbench plays the OS: it places random 4KB and 2MB pages into the
// RestSegs, writing the TAR entries and SF counters into a behavioural
// memory, and keeps a reference of where each page went. Walks are then
// issued for present pages, for absent pages in occupied sets (tag
// mismatch) and for absent pages in empty sets (SF filtering). Checked:
// found/is2m/ppn/perm against PA = RestSegBase + (set*16 + way)*pagesize,
// the 3-cycle walk when both caches hit, that filtered walks never hit,
// that fetches happen on cache misses, and that INVLPG drops stale cached
// TAR/SF contents so a removed page is no longer found.
module tb_restseg_walker;
  import utopia_pkg::*;
  localparam int SETS0 = 8192, SETS1 = 16, WAYS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, found, is2m, inv_valid = 0, inv_ready, ev_sf_filter, ev_fetch;
  logic [VPN_W-1:0] vpn = '0, inv_vpn = '0;
  logic [PPN_W-1:0] ppn;
  perm_t perm;
  logic [PA_W-1:0] restseg_base [NSEG], tar_base [NSEG], sf_base [NSEG];
  logic rs_req_valid, rs_req_ready, rs_resp_valid, pt_req_ready, pt_resp_valid;
  rs_req_t rs_req;
  rs_resp_t rs_resp;
  pt_resp_t pt_resp;

  restseg_walker dut (.*);
  utopia_mem_model mem (.clk, .pt_req_valid(1'b0), .pt_req_ready, .pt_req('0),
                        .pt_resp_valid, .pt_resp, .rs_req_valid, .rs_req_ready, .rs_req,
                        .rs_resp_valid, .rs_resp);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---- OS side: place a page into a RestSeg ----
  int unsigned occ [2][int];          // ways used per set
  int unsigned cnt_filter = 0, cnt_fetch = 0;
  always @(posedge clk) begin cnt_filter += ev_sf_filter; cnt_fetch += ev_fetch; end

  function automatic longint unsigned tar_addr(int seg, int set);
    return tar_base[seg] + longint'(set) * 66;
  endfunction

  function automatic void put_entry(int seg, int set, int way, logic [22:0] tag, logic [9:0] meta);
    logic [RS_LINE_W-1:0] line;
    longint unsigned a;
    a = tar_addr(seg, set);
    for (int i = 0; i < 66; i++) line[i*8 +: 8] = mem.rd8(a + i);
    line[way*33 +: 33] = {tag, meta};
    for (int i = 0; i < 66; i++) mem.write8(a + i, line[i*8 +: 8]);
  endfunction

  // returns the way used, -1 when the set is full
  function automatic int place(int seg, logic [VPN_W-1:0] v, logic [9:0] meta);
    int set, way; logic [22:0] tag;
    set = (seg == 0) ? int'(v % SETS0) : int'((v >> 9) % SETS1);
    tag = (seg == 0) ? 23'(v / SETS0) : 23'((v >> 9) / SETS1);
    way = occ[seg].exists(set) ? int'(occ[seg][set]) : 0;
    if (way >= WAYS) return -1;
    occ[seg][set] = way + 1;
    put_entry(seg, set, way, tag, meta);
    mem.write8(sf_base[seg] + set, 8'(way + 1));
    return way;
  endfunction

  // ---- reference ----
  typedef struct { int seg; int set; int way; perm_t p; } where_t;
  where_t ref4 [logic [VPN_W-1:0]];   // key: 4KB VPN
  where_t ref2 [logic [VPN_W-1:0]];   // key: 2MB VPN (vpn >> 9)

  function automatic logic [PPN_W-1:0] exp_ppn(where_t w, logic [VPN_W-1:0] v);
    if (w.seg == 0) return PPN_W'((restseg_base[0] >> 12) + w.set * WAYS + w.way);
    return PPN_W'((restseg_base[1] >> 12) + (w.set * WAYS + w.way) * 512 + (v % 512));
  endfunction

  task automatic walk(logic [VPN_W-1:0] v, output int cyc);
    @(negedge clk); start = 1; vpn = v;
    @(negedge clk); start = 0; cyc = 1;
    while (!done && cyc < 500) begin @(negedge clk); cyc++; end
  endtask

  task automatic walk_check(logic [VPN_W-1:0] v, output int cyc);
    walk(v, cyc);
    if (ref4.exists(v)) begin
      check(found && !is2m && ppn == exp_ppn(ref4[v], v) && perm == ref4[v].p,
            $sformatf("4KB page %h: found %b is2m %b ppn %h exp %h", v, found, is2m, ppn, exp_ppn(ref4[v], v)));
    end else if (ref2.exists(v >> 9)) begin
      check(found && is2m && ppn == exp_ppn(ref2[v >> 9], v) && perm == ref2[v >> 9].p,
            $sformatf("2MB page %h: found %b is2m %b ppn %h exp %h", v, found, is2m, ppn, exp_ppn(ref2[v >> 9], v)));
    end else begin
      check(!found, $sformatf("absent page %h found", v));
    end
  endtask

  initial begin
    #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [VPN_W-1:0] keys4 [$], keys2 [$];
  initial begin
    int cyc, n_fast, f0, fe0;
    restseg_base[0] = 52'h1_0000_0000;  restseg_base[1] = 52'h1_2000_0000;
    tar_base[0]     = 52'h0_8000_0000;  tar_base[1]     = 52'h0_8010_0000;
    sf_base[0]      = 52'h0_8020_0000;  sf_base[1]      = 52'h0_8020_4000;
    // 4KB pages in a small window of sets so that sets fill up
    for (int i = 0; i < 400; i++) begin
      logic [VPN_W-1:0] v; int way; perm_t p; logic [9:0] meta;
      v = VPN_W'($urandom_range(0, 255)) + VPN_W'(SETS0) * VPN_W'($urandom_range(1, 1 << 20));
      if (ref4.exists(v)) continue;
      p = perm_t'(3'($urandom));
      meta = {6'b0, p.nx, p.user, p.writable, 1'b1};
      way = place(0, v, meta);
      if (way < 0) continue;
      ref4[v] = '{0, int'(v % SETS0), way, p};
      keys4.push_back(v);
    end
    // 2MB pages in the upper half of the address space (no overlap with 4KB ones)
    for (int i = 0; i < 40; i++) begin
      logic [VPN_W-1:0] v2; int way; perm_t p; logic [9:0] meta;
      v2 = VPN_W'(27'h400_0000 + $urandom_range(0, 1 << 16));
      if (ref2.exists(v2) || (v2 % SETS1) == 15) continue;     // keep 2MB set 15 empty
      p = perm_t'(3'($urandom));
      meta = {6'b0, p.nx, p.user, p.writable, 1'b1};
      way = place(1, v2 << 9, meta);
      if (way < 0) continue;
      ref2[v2] = '{1, int'(v2 % SETS1), way, p};
      keys2.push_back(v2);
    end
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);

    // present 4KB pages: first walk fetches, second one hits in 3 cycles
    n_fast = 0;
    for (int k = 0; k < 150; k++) begin
      logic [VPN_W-1:0] v;
      v = keys4[$urandom_range(0, keys4.size() - 1)];
      walk_check(v, cyc);
      walk_check(v, cyc);
      check(cyc == 3, $sformatf("cached walk took %0d cycles", cyc));
    end
    check(cnt_fetch > 0, "fetches happened");
    // present 2MB pages at random offsets
    foreach (keys2[i]) begin
      logic [VPN_W-1:0] v;
      v = (keys2[i] << 9) + VPN_W'($urandom_range(0, 511));
      walk_check(v, cyc);
      walk_check(v, cyc);
      check(cyc == 3, $sformatf("cached 2MB walk took %0d cycles", cyc));
    end
    // absent pages in occupied sets (tag mismatch) and in empty sets (filter)
    for (int k = 0; k < 100; k++) begin
      logic [VPN_W-1:0] v;
      v = VPN_W'($urandom_range(0, 255)) + VPN_W'(SETS0) * VPN_W'($urandom_range(1 << 21, 1 << 22));
      walk_check(v, cyc);
    end
    f0 = cnt_filter;
    for (int k = 0; k < 100; k++) begin
      logic [VPN_W-1:0] v;
      v = VPN_W'($urandom_range(1000, 8000)) + VPN_W'(SETS0) * VPN_W'($urandom_range(1, 1 << 20));
      v = (v & ~VPN_W'(15 << 9)) | VPN_W'(15 << 9);          // 2MB set 15 is empty too
      walk_check(v, cyc);
    end
    check(cnt_filter - f0 >= 100, $sformatf("set filtering events %0d", cnt_filter - f0));

    // INVLPG: remove a cached page in memory; it stays visible until INVLPG
    begin
      logic [VPN_W-1:0] v; where_t w;
      v = keys4[0];
      w = ref4[v];
      walk_check(v, cyc);                                      // now cached
      put_entry(0, w.set, w.way, 23'h0, 10'h0);               // OS unmaps it
      walk(v, cyc);
      check(found, "stale cached TAR still hits before INVLPG");
      fe0 = cnt_fetch;
      @(negedge clk);
      while (!inv_ready) @(negedge clk);
      inv_valid = 1; inv_vpn = v; @(negedge clk); inv_valid = 0;
      ref4.delete(v);
      walk_check(v, cyc);
      check(cnt_fetch > fe0, "INVLPG forced a refetch");
    end
    $display("walks done: filter events %0d, fetch events %0d", cnt_filter, cnt_fetch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
