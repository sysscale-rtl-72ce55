// sysscale_top: SysScale multi-domain DVFS controller.
//
// SysScale lowers the voltage and frequency of the IO interconnect and the
// memory subsystem when the workload and the attached peripherals do not need
// their full bandwidth, and gives the power saved to the compute domain. This
// top wires its three parts together:
//   * demand prediction: four performance counters (sysscale_perf_counters)
//     sampled every SAMPLE_CYCLES and summed over an evaluation interval
//     (sysscale_eval_sampler), a static-demand table indexed by the
//     peripheral configuration (sysscale_static_demand), and the five-condition
//     threshold test (sysscale_demand_predictor);
//   * the transition flow (sysscale_pm_flow) with its helpers: the MRC value
//     SRAM (sysscale_mrc_sram) and loader (sysscale_mrc_loader), and two
//     block-and-drain gates (sysscale_block_drain), one on the IO interconnect
//     path to the memory controller and one on the LLC path to it;
//   * the budget redistribution (sysscale_budget).
// The blocks SysScale controls but does not contain (voltage regulators,
// PLL/DLLs, DRAM self-refresh through the MC, the configuration registers of
// MC/DDRIO/DRAM, the request paths, the compute-domain budget manager)
// connect through the ports. The paper implements prediction and the
// algorithm in PMU firmware and notes a hardware implementation is possible;
// this design does all of it in hardware, clocked by one PMU clock
// (100 MHz assumed, which makes SAMPLE_CYCLES = 100,000 one millisecond).
//
// Timing: a decision is made once per evaluation interval
// (SAMPLE_CYCLES x samples per interval, 30 ms by default) and starts a
// transition two cycles after the interval ends if it changes the point.
// The number of samples per interval is a firmware register (`eval_we`,
// `eval_wdata`), reset to SAMPLES_PER_EVAL: the paper makes the evaluation
// interval configurable with 30 ms as the default.
//
// Lint may report rst_n as both an asynchronous reset and a synchronous
// signal here; the synchronous use is only the `disable iff` of the
// assertions in the flow and the gates, which are not synthesized.
module sysscale_top
  import sysscale_pkg::*;
#(
  parameter int unsigned SAMPLE_CYCLES    = 100_000,
  parameter int unsigned SAMPLES_PER_EVAL = 30,      // reset value of the interval register
  parameter int unsigned NUM_CR           = 64,
  parameter int unsigned IO_DW            = 64,
  parameter int unsigned LLC_DW           = 64,
  localparam int unsigned MRC_AW          = $clog2(NUM_OP * NUM_CR),
  localparam int unsigned CR_AW           = $clog2(NUM_CR)
) (
  input  logic               clk,
  input  logic               rst_n,
  // firmware control
  input  logic               sysscale_en,        // 0: return to and stay at point 0 (SysScale off)
  input  logic               eval_we,            // set the samples per evaluation interval
  input  logic [EVAL_W-1:0]  eval_wdata,
  input  logic               dram_active,        // package C-state keeps DRAM active
  input  thr_t [NUM_OP-2:0]  thr,                // thresholds per boundary
  input  logic               tbl_we,
  input  logic [CFG_W-1:0]   tbl_addr,
  input  logic [BW_W-1:0]    tbl_wdata,
  input  logic               mrc_we,             // MRC training results at reset
  input  logic [MRC_AW-1:0]  mrc_waddr,
  input  logic [31:0]        mrc_wdata,
  input  logic [PWR_W-1:0]   tdp_mw,
  input  logic [PWR_W-1:0]   io_budget_tbl  [NUM_OP],
  input  logic [PWR_W-1:0]   mem_budget_tbl [NUM_OP],
  // events for the performance counters
  input  logic [1:0]         gfx_llc_miss,
  input  logic [5:0]         llc_occupancy,
  input  logic               llc_stall,
  input  logic               io_rpq_stall,
  // peripheral configuration (display engine and ISP CSRs)
  input  periph_cfg_t        periph_cfg,
  // voltage regulators V_SA and V_IO
  output logic               vr_req,
  output logic [11:0]        vsa_target_mv,
  output logic [11:0]        vio_target_mv,
  input  logic               vr_ack,
  // DRAM self-refresh (through the memory controller)
  output logic               dram_sr_req,
  input  logic               dram_sr_ack,
  // PLL/DLL relock
  output logic               pll_req,
  output logic [15:0]        dram_mhz,
  output logic [15:0]        mc_mhz,
  output logic [15:0]        ic_mhz,
  input  logic               pll_ack,
  // configuration registers of MC, DDRIO and DRAM
  output logic               cr_we,
  output logic [CR_AW-1:0]   cr_addr,
  output logic [31:0]        cr_data,
  // IO interconnect -> memory controller request path
  input  logic               io_src_valid,
  output logic               io_src_ready,
  input  logic [IO_DW-1:0]   io_src_data,
  output logic               io_dst_valid,
  input  logic               io_dst_ready,
  output logic [IO_DW-1:0]   io_dst_data,
  input  logic               io_cpl,
  // LLC -> memory controller request path
  input  logic               llc_src_valid,
  output logic               llc_src_ready,
  input  logic [LLC_DW-1:0]  llc_src_data,
  output logic               llc_dst_valid,
  input  logic               llc_dst_ready,
  output logic [LLC_DW-1:0]  llc_dst_data,
  input  logic               llc_cpl,
  // power budgets for the compute-domain budget manager
  output logic [PWR_W-1:0]   io_budget_mw,
  output logic [PWR_W-1:0]   mem_budget_mw,
  output logic [PWR_W-1:0]   compute_budget_mw,
  output logic               budget_changed,
  // status
  output op_idx_t            cur_op,
  output flow_state_t        flow_state,
  output logic               flow_busy,
  output logic               flow_held,          // decision waiting for DRAM to be active
  output logic               decision_valid,
  output op_idx_t            target_op,
  output cond_t              cond,
  output logic [31:0]        trans_count,
  output logic [31:0]        last_latency,
  output logic               mrc_busy,
  output logic [5:0]         io_outstanding,
  output logic [5:0]         llc_outstanding
);

  op_point_t    op_tbl [NUM_OP];
  perf_sample_t sample_v;
  perf_sum_t    sums;
  logic         sample, sample_valid, eval_valid;
  logic [BW_W-1:0] static_bw;
  logic         block_req, io_drained, llc_drained;
  logic         mrc_start, mrc_done, sram_re;
  op_idx_t      mrc_op, budget_op;
  logic [MRC_AW-1:0] sram_raddr;
  logic [31:0]  sram_rdata;
  logic [EVAL_W-1:0] eval_samples, eval_n;

  // evaluation-interval register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       eval_samples <= EVAL_W'(SAMPLES_PER_EVAL);
    else if (eval_we) eval_samples <= eval_wdata;
  end

  always_comb begin
    for (int i = 0; i < NUM_OP; i++) op_tbl[i] = default_op(i);
  end

  sysscale_perf_counters #(.MISS_W(2), .OCC_W(6)) u_cnt (
    .clk, .rst_n,
    .gfx_llc_miss, .llc_occupancy, .llc_stall, .io_rpq_stall,
    .sample, .sample_o(sample_v), .sample_valid
  );

  sysscale_eval_sampler #(.SAMPLE_CYCLES(SAMPLE_CYCLES)) u_smp (
    // keep evaluating after SysScale is switched off until point 0 is back
    .clk, .rst_n, .enable(sysscale_en || cur_op != '0),
    .samples_per_eval(eval_samples),
    .sample, .sample_i(sample_v), .sample_valid,
    .sum_o(sums), .n_o(eval_n), .eval_valid
  );

  sysscale_static_demand u_static (
    .clk, .rst_n, .tbl_we, .tbl_addr, .tbl_wdata,
    .cfg(periph_cfg), .static_bw
  );

  sysscale_demand_predictor u_pred (
    .clk, .rst_n, .enable(sysscale_en), .eval_valid, .sums, .n_samples(eval_n), .static_bw,
    .cur_op, .thr, .decision_valid, .target_op, .cond
  );

  sysscale_pm_flow u_flow (
    .clk, .rst_n, .op_tbl,
    .req_valid(decision_valid), .req_op(target_op), .dram_active,
    .vr_req, .vsa_target_mv, .vio_target_mv, .vr_ack,
    .block_req, .drained(io_drained && llc_drained),
    .dram_sr_req, .dram_sr_ack,
    .mrc_start, .mrc_op, .mrc_done,
    .pll_req, .dram_mhz, .mc_mhz, .ic_mhz, .pll_ack,
    .state(flow_state), .busy(flow_busy), .cur_op, .budget_op, .held(flow_held),
    .trans_count, .last_latency
  );

  sysscale_mrc_sram #(.NUM_OP(NUM_OP), .NUM_CR(NUM_CR), .DW(32)) u_sram (
    .clk, .we(mrc_we), .waddr(mrc_waddr), .wdata(mrc_wdata),
    .re(sram_re), .raddr(sram_raddr), .rdata(sram_rdata)
  );

  sysscale_mrc_loader #(.NUM_OP(NUM_OP), .NUM_CR(NUM_CR), .DW(32)) u_mrc (
    .clk, .rst_n, .start(mrc_start), .op(mrc_op), .busy(mrc_busy), .done(mrc_done),
    .sram_re, .sram_raddr, .sram_rdata,
    .cr_we, .cr_addr, .cr_data
  );

  sysscale_block_drain #(.DW(IO_DW), .OUTST_W(6)) u_io_gate (
    .clk, .rst_n, .block(block_req), .drained(io_drained), .outstanding(io_outstanding),
    .src_valid(io_src_valid), .src_ready(io_src_ready), .src_data(io_src_data),
    .dst_valid(io_dst_valid), .dst_ready(io_dst_ready), .dst_data(io_dst_data),
    .cpl(io_cpl)
  );

  sysscale_block_drain #(.DW(LLC_DW), .OUTST_W(6)) u_llc_gate (
    .clk, .rst_n, .block(block_req), .drained(llc_drained), .outstanding(llc_outstanding),
    .src_valid(llc_src_valid), .src_ready(llc_src_ready), .src_data(llc_src_data),
    .dst_valid(llc_dst_valid), .dst_ready(llc_dst_ready), .dst_data(llc_dst_data),
    .cpl(llc_cpl)
  );

  sysscale_budget u_budget (
    .clk, .rst_n, .op(budget_op), .tdp_mw, .io_budget_tbl, .mem_budget_tbl,
    .io_budget_mw, .mem_budget_mw, .compute_budget_mw, .changed(budget_changed)
  );

endmodule
