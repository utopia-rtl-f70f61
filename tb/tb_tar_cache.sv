// tb_tar_cache -- self-checking test of the TAR cache (32 TAR sets of 66
// bytes, 2-cycle latency, two read ports).
// TAR sets are placed 66 bytes apart as in memory; checks hits with the
// exact data, the 2-cycle latency, misses, replacement and invalidate.
module tb_tar_cache;
  import utopia_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] lk_valid = '0, rsp_valid, rsp_hit;
  logic [PA_W-1:0] lk_addr [2];
  logic [RS_LINE_W-1:0] rsp_set [2];
  logic fill_valid = 0, inv_valid = 0;
  logic [PA_W-1:0] fill_addr = '0, inv_addr = '0;
  logic [RS_LINE_W-1:0] fill_set = '0;

  tar_cache dut (.*);

  function automatic logic [RS_LINE_W-1:0] set_of(logic [PA_W-1:0] a);
    logic [RS_LINE_W-1:0] d;
    for (int i = 0; i < RS_LINE_W / 32; i++) d[i*32 +: 32] = 32'(a * 2654435761 + i);
    return d;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic fill(logic [PA_W-1:0] a);
    @(negedge clk); fill_valid = 1; fill_addr = a; fill_set = set_of(a);
    @(negedge clk); fill_valid = 0;
  endtask

  task automatic lookup2(logic [PA_W-1:0] a0, logic [PA_W-1:0] a1, output logic [1:0] h);
    @(negedge clk); lk_valid = 2'b11; lk_addr[0] = a0; lk_addr[1] = a1;
    @(negedge clk); lk_valid = 2'b00; check(rsp_valid == 2'b00, "not after 1 cycle");
    @(negedge clk); check(rsp_valid == 2'b11, "valid after 2 cycles");
    h = rsp_hit;
    check(!h[0] || rsp_set[0] == set_of(a0), "data port 0");
    check(!h[1] || rsp_set[1] == set_of(a1), "data port 1");
  endtask

  initial begin
    #500000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] h; logic [PA_W-1:0] base; int nh;
    lk_addr[0] = '0; lk_addr[1] = '0;
    base = 52'h7_0000_0000;
    repeat (3) @(negedge clk); rst_n = 1;
    lookup2(base, base + 66, h); check(h == 2'b00, "cold miss");
    for (int i = 0; i < 32; i++) fill(base + i * 66);
    nh = 0;
    for (int k = 0; k < 200; k++) begin
      int i0, i1;
      i0 = $urandom_range(0, 31); i1 = $urandom_range(0, 31);
      lookup2(base + i0 * 66, base + i1 * 66, h);
      check(h == 2'b11, $sformatf("hit sets %0d %0d", i0, i1));
    end
    lookup2(base + 32 * 66, base + 1, h); check(h == 2'b00, "absent sets miss");
    // set 32 maps to the same cache set as set 0; one of 0,8,16,24 is evicted
    fill(base + 32 * 66);
    for (int i = 0; i < 32; i += 8) begin lookup2(base + i * 66, base + i * 66, h); nh += h[0]; end
    check(nh == 3, $sformatf("one eviction (%0d kept)", nh));
    lookup2(base + 32 * 66, base + 32 * 66, h); check(h == 2'b11, "new set present");
    @(negedge clk); inv_valid = 1; inv_addr = base + 5 * 66; @(negedge clk); inv_valid = 0;
    lookup2(base + 5 * 66, base + 6 * 66, h); check(h == 2'b10, "invalidated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
