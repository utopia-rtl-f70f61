// tb_page_walk_cache -- self-checking test of one page walk cache
// (32 entries, 4-way, 2-cycle latency, 27-bit key as for the PD level).
module tb_page_walk_cache;
  import utopia_pkg::*;
  localparam int KEY_W = 27;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lk_valid = 0, rsp_valid, rsp_hit, fill_valid = 0, flush = 0;
  logic [KEY_W-1:0] lk_key = '0, fill_key = '0;
  logic [PPN_W-1:0] rsp_base, fill_base = '0;

  page_walk_cache dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fill(logic [KEY_W-1:0] k);
    @(negedge clk); fill_valid = 1; fill_key = k; fill_base = PPN_W'(k) ^ 40'hAB_CDEF; @(negedge clk); fill_valid = 0;
  endtask

  // lookup; response must appear exactly two cycles later
  task automatic lookup(logic [KEY_W-1:0] k, output logic h, output logic [PPN_W-1:0] b);
    @(negedge clk); lk_valid = 1; lk_key = k;
    @(negedge clk); lk_valid = 0; check(!rsp_valid, "no response after one cycle");
    @(negedge clk); check(rsp_valid, "response after two cycles"); h = rsp_hit; b = rsp_base;
  endtask

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic h; logic [PPN_W-1:0] b; int nh;
    repeat (3) @(negedge clk); rst_n = 1;
    lookup(27'h123, h, b); check(!h, "cold miss");
    for (int i = 0; i < 32; i++) fill(KEY_W'(i * 8 + 3 + (i % 8)));   // 4 per set
    nh = 0;
    for (int i = 0; i < 32; i++) begin
      lookup(KEY_W'(i * 8 + 3 + (i % 8)), h, b);
      nh += h;
      check(!h || b == (PPN_W'(i * 8 + 3 + (i % 8)) ^ 40'hAB_CDEF), "base value");
    end
    check(nh == 32, $sformatf("all 32 present (%0d)", nh));
    lookup(27'h7FF_FFF0, h, b); check(!h, "unknown key misses");
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    lookup(KEY_W'(3), h, b); check(!h, "flushed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
