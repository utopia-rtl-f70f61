// utopia_mem_model -- behavioural model of the memory hierarchy behind the MMU.
//
// Not synthesizable; testbench only. A sparse byte-addressed memory serves
// the two MMU memory ports:
//  * page-table port: 64-bit reads (answered after LAT cycles, in order) and
//    64-bit writes (no response);
//  * RestSeg port: reads of RS_LINE_W bits starting at any byte address.
// Every response says whether it came "from DRAM": the first access to a
// 64-byte line counts as a DRAM access, later ones as cache hits, unless
// the testbench calls forget_cache(). Counters of reads and writes per port
// let a testbench check how many memory accesses a walk made.
// Unwritten bytes read as zero.
module utopia_mem_model
  import utopia_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic     clk,
  input  logic     pt_req_valid,
  output logic     pt_req_ready,
  input  pt_req_t  pt_req,
  output logic     pt_resp_valid,
  output pt_resp_t pt_resp,
  input  logic     rs_req_valid,
  output logic     rs_req_ready,
  input  rs_req_t  rs_req,
  output logic     rs_resp_valid,
  output rs_resp_t rs_resp
);
  byte unsigned mem [longint unsigned];
  bit           touched [longint unsigned];

  int unsigned pt_reads = 0, pt_writes = 0, rs_reads = 0, pt_dram = 0;

  function automatic byte unsigned rd8(input longint unsigned a);
    return mem.exists(a) ? mem[a] : 8'h00;
  endfunction

  function automatic void write8(input longint unsigned a, input byte unsigned d);
    mem[a] = d;
  endfunction

  function automatic void write64(input longint unsigned a, input logic [63:0] d);
    for (int i = 0; i < 8; i++) mem[a + i] = d[i*8 +: 8];
  endfunction

  function automatic logic [63:0] read64(input longint unsigned a);
    logic [63:0] d;
    for (int i = 0; i < 8; i++) d[i*8 +: 8] = rd8(a + i);
    return d;
  endfunction

  function automatic void forget_cache();
    touched.delete();
  endfunction

  function automatic bit is_dram(input longint unsigned a);
    longint unsigned line;
    line = a >> 6;
    if (touched.exists(line)) return 1'b0;
    touched[line] = 1'b1;
    return 1'b1;
  endfunction

  // response queues: {ready-time, data, dram}
  typedef struct { longint unsigned t; logic [63:0] d; bit dram; } pt_item_t;
  typedef struct { longint unsigned t; logic [RS_LINE_W-1:0] d; bit dram; } rs_item_t;
  pt_item_t ptq[$];
  rs_item_t rsq[$];
  longint unsigned now = 0;

  assign pt_req_ready = 1'b1;
  assign rs_req_ready = 1'b1;

  initial begin
    pt_resp_valid = 1'b0;
    pt_resp       = '0;
    rs_resp_valid = 1'b0;
    rs_resp       = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    // responses
    pt_resp_valid <= 1'b0;
    rs_resp_valid <= 1'b0;
    if (ptq.size() > 0 && ptq[0].t <= now) begin
      pt_item_t it;
      it = ptq.pop_front();
      pt_resp_valid <= 1'b1;
      pt_resp.rdata <= it.d;
      pt_resp.dram  <= it.dram;
    end
    if (rsq.size() > 0 && rsq[0].t <= now) begin
      rs_item_t it;
      it = rsq.pop_front();
      rs_resp_valid <= 1'b1;
      rs_resp.rdata <= it.d;
      rs_resp.dram  <= it.dram;
    end
    // requests
    if (pt_req_valid) begin
      if (pt_req.write) begin
        write64(pt_req.addr, pt_req.wdata);
        pt_writes++;
      end else begin
        pt_item_t it;
        it.t    = now + LAT;
        it.d    = read64(pt_req.addr);
        it.dram = is_dram(pt_req.addr);
        if (it.dram) pt_dram++;
        ptq.push_back(it);
        pt_reads++;
      end
    end
    if (rs_req_valid) begin
      rs_item_t it;
      it.t = now + LAT;
      for (int i = 0; i < RS_LINE_W / 8; i++) it.d[i*8 +: 8] = rd8(rs_req.addr + i);
      it.dram = is_dram(rs_req.addr);
      rsq.push_back(it);
      rs_reads++;
    end
  end

endmodule
