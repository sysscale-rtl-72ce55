// sysscale_budget: redistribution of the SoC power budget across domains.
//
// The SoC runs under a thermal design power (TDP). Without SysScale the IO
// and memory domains get a fixed budget sized for their worst case. With
// SysScale their budget follows the operating point, and whatever the IO and
// memory domains do not get goes to the compute domain, whose own budget
// manager (PBM, not part of this design) then raises core or graphics
// frequencies. This block computes
//   io_budget      = io_budget_tbl[op]
//   mem_budget     = mem_budget_tbl[op]
//   compute_budget = tdp - io_budget - mem_budget   (0 if negative)
// for the operating point `op` the transition flow reports. The per-point
// budgets and the TDP (4.5 W in the paper's main system) are firmware
// registers; their values are not given in the paper.
//
// Timing: outputs are registered, one cycle after `op` or a table input
// changes. `changed` pulses when the compute budget takes a new value.
module sysscale_budget
  import sysscale_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  op_idx_t                op,
  input  logic [PWR_W-1:0]       tdp_mw,
  input  logic [PWR_W-1:0]       io_budget_tbl  [NUM_OP],
  input  logic [PWR_W-1:0]       mem_budget_tbl [NUM_OP],
  output logic [PWR_W-1:0]       io_budget_mw,
  output logic [PWR_W-1:0]       mem_budget_mw,
  output logic [PWR_W-1:0]       compute_budget_mw,
  output logic                   changed
);

  logic [PWR_W:0]   iomem;
  logic [PWR_W-1:0] cmp_nxt;

  always_comb begin
    iomem   = (PWR_W+1)'(io_budget_tbl[op]) + (PWR_W+1)'(mem_budget_tbl[op]);
    cmp_nxt = ((PWR_W+1)'(tdp_mw) > iomem) ? PWR_W'((PWR_W+1)'(tdp_mw) - iomem) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      io_budget_mw      <= '0;
      mem_budget_mw     <= '0;
      compute_budget_mw <= '0;
      changed           <= 1'b0;
    end else begin
      io_budget_mw      <= io_budget_tbl[op];
      mem_budget_mw     <= mem_budget_tbl[op];
      compute_budget_mw <= cmp_nxt;
      changed           <= (cmp_nxt != compute_budget_mw);
    end
  end

endmodule
