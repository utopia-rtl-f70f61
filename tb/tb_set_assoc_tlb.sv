// tb_set_assoc_tlb -- self-checking test of the L1 TLB (64 entries, 4-way).
// Fills up to WAYS pages per set and checks that each hits one cycle after
// the lookup with the right PPN, that other pages miss, that a fifth page in
// a full set evicts exactly one entry, and that invalidate and flush work.
module tb_set_assoc_tlb;
  import utopia_pkg::*;
  localparam int ENTRIES = 64, WAYS = 4, SETS = ENTRIES / WAYS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lk_valid = 0, lk_hit, fill_valid = 0, inv_valid = 0, flush = 0;
  logic [VPN_W-1:0] lk_vpn = '0, fill_vpn = '0, inv_vpn = '0;
  logic [PPN_W-1:0] lk_ppn, fill_ppn = '0;
  perm_t lk_perm, fill_perm = '0;

  set_assoc_tlb dut (.*);

  function automatic logic [VPN_W-1:0] vpn_of(int set, int k);
    return VPN_W'((k + 7) * SETS + set);       // index = set, tag = k+7
  endfunction
  function automatic logic [PPN_W-1:0] ppn_of(logic [VPN_W-1:0] v);
    return PPN_W'(v * 3 + 40'h1_0000);
  endfunction

  task automatic fill(logic [VPN_W-1:0] v);
    @(negedge clk); fill_valid = 1; fill_vpn = v; fill_ppn = ppn_of(v); fill_perm = '{1, 0, 1};
    @(negedge clk); fill_valid = 0;
  endtask

  task automatic lookup(logic [VPN_W-1:0] v, output logic hit, output logic [PPN_W-1:0] p);
    @(negedge clk); lk_valid = 1; lk_vpn = v;
    @(negedge clk); lk_valid = 0; hit = lk_hit; p = lk_ppn;   // one cycle later
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic h; logic [PPN_W-1:0] p; int nh;
    repeat (3) @(negedge clk); rst_n = 1;
    // empty TLB misses
    lookup(vpn_of(0, 0), h, p); check(!h, "empty miss");
    // fill WAYS pages in every set
    for (int s = 0; s < SETS; s++) for (int k = 0; k < WAYS; k++) fill(vpn_of(s, k));
    for (int s = 0; s < SETS; s++) for (int k = 0; k < WAYS; k++) begin
      lookup(vpn_of(s, k), h, p);
      check(h && p == ppn_of(vpn_of(s, k)), $sformatf("hit s%0d k%0d", s, k));
    end
    check(lk_perm == '{1, 0, 1}, "perm");
    lookup(vpn_of(3, 9), h, p); check(!h, "miss on unknown tag");
    // fifth page into set 5 evicts exactly one
    fill(vpn_of(5, 4));
    nh = 0;
    for (int k = 0; k <= WAYS; k++) begin lookup(vpn_of(5, k), h, p); nh += h; end
    check(nh == WAYS, $sformatf("after eviction %0d hits", nh));
    lookup(vpn_of(5, 4), h, p); check(h, "new page present");
    // refill of a present page does not evict
    fill(vpn_of(6, 0));
    nh = 0;
    for (int k = 0; k < WAYS; k++) begin lookup(vpn_of(6, k), h, p); nh += h; end
    check(nh == WAYS, "refill keeps set");
    // invalidate
    @(negedge clk); inv_valid = 1; inv_vpn = vpn_of(7, 2);
    @(negedge clk); inv_valid = 0;
    lookup(vpn_of(7, 2), h, p); check(!h, "invalidated");
    lookup(vpn_of(7, 1), h, p); check(h, "neighbour kept");
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    nh = 0;
    for (int s = 0; s < SETS; s++) begin lookup(vpn_of(s, 1), h, p); nh += h; end
    check(nh == 0, "flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
