// ptw_tracker -- PTW-Tracking counters that pick costly-to-translate pages.
//
// Every FlexSeg walk (a page-table walk after an L2 TLB miss) passes the leaf
// PTE through this block. Following the paper, two counters held in bits of
// the PTE that the hardware ignores are updated: the PTW frequency counter
// is incremented by one and the PTW cost counter is increased by the number
// of DRAM accesses the walk made. When both counters exceed their thresholds
// (programmable registers thr_freq and thr_cost), `migrate` asks the OS,
// through an interrupt raised by the MMU, to move the page into a RestSeg.
//
// Own choices: the 9 ignored bits are split into a 4-bit frequency counter
// (PTE[55:52]) and a 5-bit cost counter (PTE[58:56], PTE[10:9]); both
// saturate instead of wrapping; "exceed" means strictly greater than the
// threshold, compared on the updated values. The paper has the OS clear the
// counters when it rewrites the PTE after the migration, so the block leaves
// them as they are when it raises `migrate`.
//
// Purely combinational: pte_out/migrate follow pte_in in the same cycle.
module ptw_tracker
  import utopia_pkg::*;
(
  input  logic [63:0]           pte_in,
  input  logic [2:0]            dram_accesses,
  input  logic [PTW_FREQ_W-1:0] thr_freq,
  input  logic [PTW_COST_W-1:0] thr_cost,
  output logic [63:0]           pte_out,
  output logic                  migrate
);
  logic [PTW_FREQ_W-1:0] f_old, f_new;
  logic [PTW_COST_W-1:0] c_old, c_new;
  logic [PTW_COST_W:0]   c_sum;

  always_comb begin
    f_old   = pte_freq(pte_in);
    c_old   = pte_cost(pte_in);
    f_new   = (f_old == '1) ? f_old : f_old + 1'b1;
    c_sum   = {1'b0, c_old} + (PTW_COST_W + 1)'(dram_accesses);
    c_new   = c_sum[PTW_COST_W] ? '1 : c_sum[PTW_COST_W-1:0];
    pte_out = pte_set_counters(pte_in, f_new, c_new);
    migrate = (f_new > thr_freq) && (c_new > thr_cost);
  end

endmodule
