// tb_l2_tlb -- self-checking test of the unified L2 TLB (1536 entries,
// 12-way, 12-cycle latency, 4KB and 2MB entries).
// Checks: response exactly LATENCY cycles after the lookup, 4KB and 2MB
// hits (2MB hit returns base PPN | vpn[8:0]), misses, abort suppresses the
// response, invalidate of one page, flush, and a random fill/lookup run
// against a reference map that tolerates capacity evictions only as misses.
module tb_l2_tlb;
  import utopia_pkg::*;
  localparam int LATENCY = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lk_valid = 0, lk_abort = 0, rsp_valid, rsp_hit, rsp_is2m;
  logic fill_valid = 0, fill_is2m = 0, inv_valid = 0, flush = 0;
  logic [VPN_W-1:0] lk_vpn = '0, fill_vpn = '0, inv_vpn = '0;
  logic [PPN_W-1:0] rsp_ppn, fill_ppn = '0;
  perm_t rsp_perm, fill_perm = '0;

  l2_tlb dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic fill(logic [VPN_W-1:0] v, logic [PPN_W-1:0] p, logic is2m);
    @(negedge clk); fill_valid = 1; fill_vpn = v; fill_ppn = p; fill_is2m = is2m; fill_perm = '{1, 1, 0};
    @(negedge clk); fill_valid = 0;
  endtask

  // lookup and count cycles until rsp_valid; must be exactly LATENCY
  task automatic lookup(logic [VPN_W-1:0] v, output logic h, output logic is2m, output logic [PPN_W-1:0] p);
    int n;
    @(negedge clk); lk_valid = 1; lk_vpn = v;
    @(negedge clk); lk_valid = 0; n = 1;
    while (!rsp_valid && n < 40) begin @(negedge clk); n++; end
    check(n == LATENCY, $sformatf("latency %0d", n));
    h = rsp_hit; is2m = rsp_is2m; p = rsp_ppn;
  endtask

  initial begin
    #3000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [PPN_W-1:0] ref4 [logic [VPN_W-1:0]];
  initial begin
    logic h, m; logic [PPN_W-1:0] p; int n; int nhit;
    repeat (3) @(negedge clk); rst_n = 1;
    lookup(36'h12345, h, m, p); check(!h, "cold miss");
    // 4KB page
    fill(36'h12345, 40'hABCDE, 0);
    lookup(36'h12345, h, m, p); check(h && !m && p == 40'hABCDE, "4KB hit");
    check(rsp_perm == '{1, 1, 0}, "perm");
    lookup(36'h12346, h, m, p); check(!h, "neighbour 4KB miss");
    // 2MB page covering vpn 0x40000..0x401FF
    fill(36'h40000, 40'h8_0000, 1);
    lookup(36'h40123, h, m, p); check(h && m && p == 40'h8_0123, "2MB hit inside page");
    lookup(36'h401FF, h, m, p); check(h && m && p == 40'h8_01FF, "2MB hit last 4KB");
    lookup(36'h40200, h, m, p); check(!h, "next 2MB region miss");
    // abort: no response must come
    @(negedge clk); lk_valid = 1; lk_vpn = 36'h12345;
    @(negedge clk); lk_valid = 0;
    repeat (3) @(negedge clk);
    lk_abort = 1; @(negedge clk); lk_abort = 0;
    n = 0;
    repeat (20) begin @(negedge clk); n += rsp_valid; end
    check(n == 0, "abort suppresses response");
    // invalidate 4KB, 2MB by any address inside it
    @(negedge clk); inv_valid = 1; inv_vpn = 36'h12345; @(negedge clk); inv_valid = 0;
    lookup(36'h12345, h, m, p); check(!h, "4KB invalidated");
    @(negedge clk); inv_valid = 1; inv_vpn = 36'h40077; @(negedge clk); inv_valid = 0;
    lookup(36'h40000, h, m, p); check(!h, "2MB invalidated");
    // random run: 600 4KB pages, all must hit (fewer than 12 per set expected)
    for (int i = 0; i < 600; i++) begin
      logic [VPN_W-1:0] v; v = VPN_W'({$urandom, $urandom}) & 36'h0_00FF_FFFF;
      while (ref4.exists(v)) v = v + 1;
      ref4[v] = PPN_W'($urandom);
      fill(v, ref4[v], 0);
    end
    nhit = 0;
    foreach (ref4[v]) begin
      lookup(v, h, m, p);
      if (h) begin nhit++; check(p == ref4[v] && !m, "random hit value"); end
    end
    check(nhit > 590, $sformatf("random hits %0d of 600", nhit));
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    nhit = 0;
    foreach (ref4[v]) begin lookup(v, h, m, p); nhit += h; if (nhit > 0) break; end
    check(nhit == 0, "flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
