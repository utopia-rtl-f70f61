// sf_cache -- Set Filter (SF) cache of the RestSeg walker.
//
// The Set Filter of a RestSeg is an array, kept in kernel memory per process,
// with one counter per RestSeg set that holds how many ways of the set are
// occupied (log2(associativity)+1 bits; 5 bits for the 16-way RestSegs). A
// zero counter tells the walker the page cannot be in that set, so the Tag
// Array need not be searched. This 2KB cache (size and 2-cycle latency from
// the paper) keeps recently used SF lines close to the walker. It is
// physically addressed, so it needs no flush on a context switch.
//
// Organisation (own choice; the paper gives only the size): 64-byte lines,
// one counter per byte in memory (the counter value is the low CNT_W bits),
// 32 lines in 8 sets of 4 ways, first-invalid/round-robin replacement.
// Two independent read ports serve the 4KB and the 2MB RestSeg walks in the
// same cycle; one fill port and one invalidate port (INVLPG) update it.
//
// Timing: lk_valid[p] with the counter's byte address in cycle t gives
// rsp_valid[p]/rsp_hit[p]/rsp_cnt[p] in cycle t+2. Fill and invalidate act at
// the next edge; invalidate wins over a fill of the same line.
module sf_cache
  import utopia_pkg::*;
#(
  parameter int unsigned BYTES      = 2048,
  parameter int unsigned LINE_BYTES = 64,
  parameter int unsigned WAYS       = 4,
  parameter int unsigned CNT_W      = 5,
  parameter int unsigned NPORT      = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NPORT-1:0]          lk_valid,
  input  logic [PA_W-1:0]           lk_addr  [NPORT],
  output logic [NPORT-1:0]          rsp_valid,
  output logic [NPORT-1:0]          rsp_hit,
  output logic [CNT_W-1:0]          rsp_cnt  [NPORT],
  input  logic                      fill_valid,
  input  logic [PA_W-1:0]           fill_addr,
  input  logic [LINE_BYTES*8-1:0]   fill_line,
  input  logic                      inv_valid,
  input  logic [PA_W-1:0]           inv_addr
);
  localparam int unsigned LINES = BYTES / LINE_BYTES;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned OFFW  = $clog2(LINE_BYTES);
  localparam int unsigned IDXW  = $clog2(SETS);
  localparam int unsigned TAGW  = PA_W - OFFW - IDXW;
  localparam int unsigned WAYW  = $clog2(WAYS);

  logic                    valid [SETS][WAYS];
  logic [TAGW-1:0]         tag   [SETS][WAYS];
  logic [LINE_BYTES*8-1:0] data  [SETS][WAYS];
  logic [WAYW-1:0]         rr_ptr[SETS];

  function automatic logic [IDXW-1:0] idx_of(input logic [PA_W-1:0] a);
    return a[OFFW +: IDXW];
  endfunction
  function automatic logic [TAGW-1:0] tag_of(input logic [PA_W-1:0] a);
    return a[PA_W-1:OFFW+IDXW];
  endfunction

  // ---- stage 1: compare and select, stage 2: output register ----
  logic [NPORT-1:0] s1_v, s1_h;
  logic [CNT_W-1:0] s1_c [NPORT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v      <= '0;
      s1_h      <= '0;
      rsp_valid <= '0;
      rsp_hit   <= '0;
      for (int p = 0; p < NPORT; p++) begin
        s1_c[p]    <= '0;
        rsp_cnt[p] <= '0;
      end
    end else begin
      for (int p = 0; p < NPORT; p++) begin
        logic             h;
        logic [7:0]       b;
        logic [IDXW-1:0]  s;
        h = 1'b0;
        b = '0;
        s = idx_of(lk_addr[p]);
        for (int w = 0; w < WAYS; w++)
          if (valid[s][w] && tag[s][w] == tag_of(lk_addr[p])) begin
            h = 1'b1;
            b = data[s][w][lk_addr[p][OFFW-1:0]*8 +: 8];
          end
        s1_v[p]      <= lk_valid[p];
        s1_h[p]      <= lk_valid[p] && h;
        s1_c[p]      <= b[CNT_W-1:0];
        rsp_valid[p] <= s1_v[p];
        rsp_hit[p]   <= s1_h[p];
        rsp_cnt[p]   <= s1_c[p];
      end
    end
  end

  // ---- fill / invalidate ----
  logic [WAYW-1:0] fill_way;
  logic            keep_ptr;
  always_comb begin
    logic [IDXW-1:0] s;
    logic            found_inv;
    s         = idx_of(fill_addr);
    fill_way  = rr_ptr[s];
    keep_ptr  = 1'b0;
    found_inv = 1'b0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!valid[s][w]) begin
        found_inv = 1'b1;
        fill_way  = WAYW'(w);
      end
    for (int w = 0; w < WAYS; w++)
      if (valid[s][w] && tag[s][w] == tag_of(fill_addr)) begin
        keep_ptr = 1'b1;
        fill_way = WAYW'(w);
      end
    if (found_inv) keep_ptr = 1'b1;
  end

  logic fill_is_inv;
  assign fill_is_inv = inv_valid && (inv_addr[PA_W-1:OFFW] == fill_addr[PA_W-1:OFFW]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_ptr[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          valid[s][w] <= 1'b0;
          tag[s][w]   <= '0;
          data[s][w]  <= '0;
        end
      end
    end else begin
      if (fill_valid && !fill_is_inv) begin
        valid[idx_of(fill_addr)][fill_way] <= 1'b1;
        tag  [idx_of(fill_addr)][fill_way] <= tag_of(fill_addr);
        data [idx_of(fill_addr)][fill_way] <= fill_line;
        if (!keep_ptr) rr_ptr[idx_of(fill_addr)] <= rr_ptr[idx_of(fill_addr)] + 1'b1;
      end
      if (inv_valid)
        for (int w = 0; w < WAYS; w++)
          if (tag[idx_of(inv_addr)][w] == tag_of(inv_addr))
            valid[idx_of(inv_addr)][w] <= 1'b0;
    end
  end

endmodule
