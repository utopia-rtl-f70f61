// page_walk_cache -- one split page walk cache (PWC) of the FlexSeg walker.
//
// The MMU has three of them, one per upper page-table level (PML4, PDP, PD),
// each with 32 entries, 4-way set-associative and a 2-cycle latency, as in
// the paper's simulated system. An entry maps the virtual-address bits that
// select a table entry at that level (the "key": VA[47:39] for PML4,
// VA[47:30] for PDP, VA[47:21] for PD) to the physical page number of the
// next-level table, so a hit lets the walker skip the levels above it.
//
// Timing: lk_valid in cycle t returns rsp_valid/rsp_hit/rsp_base in cycle
// t+LATENCY (a small shift register; a new lookup may start every cycle).
// Fill and flush act at the next clock edge. The key's low bits index the
// set. Replacement: first invalid way, else per-set round-robin (own choice;
// the paper gives no PWC replacement policy).
module page_walk_cache
  import utopia_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned KEY_W   = 27,
  parameter int unsigned LATENCY = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  logic [KEY_W-1:0] lk_key,
  output logic             rsp_valid,
  output logic             rsp_hit,
  output logic [PPN_W-1:0] rsp_base,
  input  logic             fill_valid,
  input  logic [KEY_W-1:0] fill_key,
  input  logic [PPN_W-1:0] fill_base,
  input  logic             flush
);
  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned IDXW = $clog2(SETS);
  localparam int unsigned TAGW = KEY_W - IDXW;
  localparam int unsigned WAYW = $clog2(WAYS);

  typedef struct packed {
    logic             valid;
    logic [TAGW-1:0]  tag;
    logic [PPN_W-1:0] base;
  } entry_t;

  entry_t          mem   [SETS][WAYS];
  logic [WAYW-1:0] rr_ptr[SETS];

  // ---- compare in the request cycle ----
  logic             hit_c;
  logic [PPN_W-1:0] base_c;
  always_comb begin
    hit_c  = 1'b0;
    base_c = '0;
    for (int w = 0; w < WAYS; w++)
      if (mem[lk_key[IDXW-1:0]][w].valid && mem[lk_key[IDXW-1:0]][w].tag == lk_key[KEY_W-1:IDXW]) begin
        hit_c  = 1'b1;
        base_c = mem[lk_key[IDXW-1:0]][w].base;
      end
  end

  // ---- latency shift register ----
  logic             v_sr [LATENCY];
  logic             h_sr [LATENCY];
  logic [PPN_W-1:0] b_sr [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) begin
        v_sr[i] <= 1'b0;
        h_sr[i] <= 1'b0;
        b_sr[i] <= '0;
      end
    end else begin
      v_sr[0] <= lk_valid;
      h_sr[0] <= hit_c && !flush;
      b_sr[0] <= base_c;
      for (int i = 1; i < LATENCY; i++) begin
        v_sr[i] <= v_sr[i-1];
        h_sr[i] <= h_sr[i-1];
        b_sr[i] <= b_sr[i-1];
      end
    end
  end

  assign rsp_valid = v_sr[LATENCY-1];
  assign rsp_hit   = h_sr[LATENCY-1];
  assign rsp_base  = b_sr[LATENCY-1];

  // ---- fill ----
  logic [WAYW-1:0] fill_way;
  logic            keep_ptr;
  always_comb begin
    logic [IDXW-1:0] s;
    logic            found_inv;
    s         = fill_key[IDXW-1:0];
    fill_way  = rr_ptr[s];
    keep_ptr  = 1'b0;
    found_inv = 1'b0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!mem[s][w].valid) begin
        found_inv = 1'b1;
        fill_way  = WAYW'(w);
      end
    for (int w = 0; w < WAYS; w++)
      if (mem[s][w].valid && mem[s][w].tag == fill_key[KEY_W-1:IDXW]) begin
        keep_ptr = 1'b1;
        fill_way = WAYW'(w);
      end
    if (found_inv) keep_ptr = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_ptr[s] <= '0;
        for (int w = 0; w < WAYS; w++) mem[s][w] <= '0;
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) mem[s][w].valid <= 1'b0;
    end else if (fill_valid) begin
      mem[fill_key[IDXW-1:0]][fill_way] <= '{valid: 1'b1, tag: fill_key[KEY_W-1:IDXW], base: fill_base};
      if (!keep_ptr)
        rr_ptr[fill_key[IDXW-1:0]] <= rr_ptr[fill_key[IDXW-1:0]] + 1'b1;
    end
  end

endmodule
