// tar_cache -- Tag Array (TAR) cache of the RestSeg walker.
//
// The Tag Array of a RestSeg stores, for every way of every set, the virtual
// page tag of the page held there plus 10 metadata bits (valid and access
// permissions). It lives in kernel memory, one per process and RestSeg. A
// 16-way set with 23-bit tags occupies 16 x 33 bits = 66 bytes and is read
// as one unit, so the RestSeg walk needs only one TAR access. This cache
// (2KB and 2-cycle latency in the paper) keeps recently used TAR sets; it is
// physically addressed, so a context switch does not flush it.
//
// Organisation (own choice; the paper gives only the size): each entry holds
// one whole TAR set (SET_W bits), keyed by the set's physical byte address;
// 32 entries (32 x 66 B = 2112 B, the nearest to 2KB) in 8 sets of 4 ways.
// The cache set is picked by address bits [IDXW:1]: TAR sets are 66 = 2 x 33
// bytes apart, and since 33 is odd, consecutive TAR sets land in consecutive
// cache sets. Replacement: first invalid way, else round-robin.
//
// Timing: lk_valid[p]/lk_addr[p] in cycle t gives rsp_valid[p]/rsp_hit[p]/
// rsp_set[p] in cycle t+2. Two read ports (4KB and 2MB RestSeg walks), one
// fill port, one invalidate port (INVLPG); invalidate wins over a fill of
// the same address.
module tar_cache
  import utopia_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned SET_W   = RS_LINE_W,
  parameter int unsigned NPORT   = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NPORT-1:0] lk_valid,
  input  logic [PA_W-1:0]  lk_addr [NPORT],
  output logic [NPORT-1:0] rsp_valid,
  output logic [NPORT-1:0] rsp_hit,
  output logic [SET_W-1:0] rsp_set [NPORT],
  input  logic             fill_valid,
  input  logic [PA_W-1:0]  fill_addr,
  input  logic [SET_W-1:0] fill_set,
  input  logic             inv_valid,
  input  logic [PA_W-1:0]  inv_addr
);
  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned IDXW = $clog2(SETS);
  localparam int unsigned WAYW = $clog2(WAYS);

  logic             valid [SETS][WAYS];
  logic [PA_W-1:0]  key   [SETS][WAYS];
  logic [SET_W-1:0] data  [SETS][WAYS];
  logic [WAYW-1:0]  rr_ptr[SETS];

  function automatic logic [IDXW-1:0] idx_of(input logic [PA_W-1:0] a);
    return a[1 +: IDXW];
  endfunction

  logic [NPORT-1:0] s1_v, s1_h;
  logic [SET_W-1:0] s1_d [NPORT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v      <= '0;
      s1_h      <= '0;
      rsp_valid <= '0;
      rsp_hit   <= '0;
      for (int p = 0; p < NPORT; p++) begin
        s1_d[p]    <= '0;
        rsp_set[p] <= '0;
      end
    end else begin
      for (int p = 0; p < NPORT; p++) begin
        logic             h;
        logic [SET_W-1:0] d;
        logic [IDXW-1:0]  s;
        h = 1'b0;
        d = '0;
        s = idx_of(lk_addr[p]);
        for (int w = 0; w < WAYS; w++)
          if (valid[s][w] && key[s][w] == lk_addr[p]) begin
            h = 1'b1;
            d = data[s][w];
          end
        s1_v[p]      <= lk_valid[p];
        s1_h[p]      <= lk_valid[p] && h;
        s1_d[p]      <= d;
        rsp_valid[p] <= s1_v[p];
        rsp_hit[p]   <= s1_h[p];
        rsp_set[p]   <= s1_d[p];
      end
    end
  end

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
      if (valid[s][w] && key[s][w] == fill_addr) begin
        keep_ptr = 1'b1;
        fill_way = WAYW'(w);
      end
    if (found_inv) keep_ptr = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_ptr[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          valid[s][w] <= 1'b0;
          key[s][w]   <= '0;
          data[s][w]  <= '0;
        end
      end
    end else begin
      if (fill_valid && !(inv_valid && inv_addr == fill_addr)) begin
        valid[idx_of(fill_addr)][fill_way] <= 1'b1;
        key  [idx_of(fill_addr)][fill_way] <= fill_addr;
        data [idx_of(fill_addr)][fill_way] <= fill_set;
        if (!keep_ptr) rr_ptr[idx_of(fill_addr)] <= rr_ptr[idx_of(fill_addr)] + 1'b1;
      end
      if (inv_valid)
        for (int w = 0; w < WAYS; w++)
          if (key[idx_of(inv_addr)][w] == inv_addr)
            valid[idx_of(inv_addr)][w] <= 1'b0;
    end
  end

endmodule
