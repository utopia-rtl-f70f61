// tb_sf_cache -- self-checking test of the Set Filter cache (2KB, 2-cycle).
// Fills lines whose bytes hold known counters, then checks both read ports
// in the same cycle, the exact 2-cycle latency, misses, replacement within a
// set, and invalidate.
module tb_sf_cache;
  import utopia_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] lk_valid = '0, rsp_valid, rsp_hit;
  logic [PA_W-1:0] lk_addr [2];
  logic [4:0] rsp_cnt [2];
  logic fill_valid = 0, inv_valid = 0;
  logic [PA_W-1:0] fill_addr = '0, inv_addr = '0;
  logic [511:0] fill_line = '0;

  sf_cache dut (.*);

  function automatic logic [4:0] cnt_of(logic [PA_W-1:0] a);
    return 5'((a ^ (a >> 6)) % 17);           // 0..16
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic fill(logic [PA_W-1:0] line);
    @(negedge clk); fill_valid = 1; fill_addr = line;
    for (int i = 0; i < 64; i++) fill_line[i*8 +: 8] = {3'b000, cnt_of(line + i)};
    @(negedge clk); fill_valid = 0;
  endtask

  task automatic lookup2(logic [PA_W-1:0] a0, logic [PA_W-1:0] a1,
                         output logic [1:0] h, output logic [4:0] c0, output logic [4:0] c1);
    @(negedge clk); lk_valid = 2'b11; lk_addr[0] = a0; lk_addr[1] = a1;
    @(negedge clk); lk_valid = 2'b00; check(rsp_valid == 2'b00, "not after 1 cycle");
    @(negedge clk); check(rsp_valid == 2'b11, "valid after 2 cycles");
    h = rsp_hit; c0 = rsp_cnt[0]; c1 = rsp_cnt[1];
  endtask

  initial begin
    #500000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] h; logic [4:0] c0, c1; logic [PA_W-1:0] lines [32]; int nh;
    lk_addr[0] = '0; lk_addr[1] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    lookup2(52'h1000, 52'h2000, h, c0, c1); check(h == 2'b00, "cold misses");
    for (int i = 0; i < 32; i++) begin
      lines[i] = PA_W'(64'h40_0000 + i * 64);
      fill(lines[i]);
    end
    for (int k = 0; k < 300; k++) begin
      logic [PA_W-1:0] a0, a1;
      a0 = lines[$urandom_range(0, 31)] + $urandom_range(0, 63);
      a1 = lines[$urandom_range(0, 31)] + $urandom_range(0, 63);
      lookup2(a0, a1, h, c0, c1);
      check(h == 2'b11 && c0 == cnt_of(a0) && c1 == cnt_of(a1),
            $sformatf("read %h %h -> %b %0d %0d", a0, a1, h, c0, c1));
    end
    // a 5th line in set 0 evicts exactly one of the 4 there (sets use bits 8:6)
    fill(52'h40_0000 + 32 * 64);
    nh = 0;
    for (int i = 0; i < 32; i += 8) begin lookup2(lines[i], lines[i], h, c0, c1); nh += h[0]; end
    lookup2(52'h40_0000 + 32 * 64, 52'h40_0000 + 32 * 64 + 5, h, c0, c1);
    check(h == 2'b11 && c1 == cnt_of(52'h40_0000 + 32 * 64 + 5), "new line present");
    check(nh == 3, $sformatf("one eviction (%0d of 4 old kept)", nh));
    // invalidate by any byte address in the line
    @(negedge clk); inv_valid = 1; inv_addr = lines[1] + 17; @(negedge clk); inv_valid = 0;
    lookup2(lines[1], lines[2], h, c0, c1); check(h == 2'b10, "invalidated line misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
