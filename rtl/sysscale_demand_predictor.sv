// sysscale_demand_predictor: SysScale's operating-point decision.
//
// At the end of every evaluation interval the predictor tests the five
// conditions of the paper against the thresholds of one boundary between two
// adjacent operating points:
//   1. static bandwidth demand        > STATIC_BW_THR
//   2. GFX_LLC_MISSES (average)        > GFX_THR   (graphics bandwidth-limited)
//   3. LLC_Occupancy_Tracer (average)  > Core_THR  (cores bandwidth-limited)
//   4. LLC_STALLS (average)            > LAT_THR   (memory latency bottleneck)
//   5. IO_RPQ (average)                > IO_THR    (IO latency bottleneck)
// If any holds, the SoC goes to (or stays at) the higher-performance point;
// if none holds, it goes to the next lower-performance point. With more than
// two points each boundary k (between point k and k+1) has its own
// thresholds, and one decision moves at most one step, as the paper
// describes. Index 0 is the highest-performance point.
//
// Averages are never divided out: a counter sum over N samples exceeds
// threshold x N exactly when its average exceeds the threshold. N is
// `n_samples`, which the sampler reports with the sums, so a change of the
// evaluation interval needs no change to the thresholds.
// When `enable` is low SysScale is off and the target is point 0 (the
// paper's baseline keeps the IO and memory domains at their highest point).
//
// Timing: `decision_valid` pulses one cycle after `eval_valid`, with
// `target_op` and the condition flags of that decision.
module sysscale_demand_predictor
  import sysscale_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic              eval_valid,
  input  perf_sum_t         sums,
  input  logic [EVAL_W-1:0] n_samples,  // samples the sums cover
  input  logic [BW_W-1:0]   static_bw,
  input  op_idx_t           cur_op,
  input  thr_t [NUM_OP-2:0] thr,        // thr[k]: boundary between point k and k+1
  output logic              decision_valid,
  output op_idx_t           target_op,
  output cond_t             cond         // conditions tested at the last decision
);

  localparam int unsigned PW = SUM_W + EVAL_W;

  // Conditions against the boundary above (up) and below (down) cur_op.
  cond_t   c_up, c_dn;
  logic    any_up, any_dn;
  op_idx_t nxt_op;

  function automatic cond_t eval_cond(input thr_t t, input perf_sum_t s,
                                      input logic [BW_W-1:0] sbw,
                                      input logic [EVAL_W-1:0] n);
    cond_t c;
    c.static_bw = sbw > t.static_bw;
    c.gfx  = PW'(s.gfx_llc_misses) > PW'(t.gfx)  * PW'(n);
    c.core = PW'(s.llc_occupancy)  > PW'(t.core) * PW'(n);
    c.lat  = PW'(s.llc_stalls)     > PW'(t.lat)  * PW'(n);
    c.io   = PW'(s.io_rpq)         > PW'(t.io)   * PW'(n);
    return c;
  endfunction

  always_comb begin
    thr_t t_up, t_dn;
    t_up   = (cur_op != '0) ? thr[cur_op - 1'b1] : thr[0];
    t_dn   = (int'(cur_op) < NUM_OP - 1) ? thr[cur_op] : thr[NUM_OP-2];
    c_up   = eval_cond(t_up, sums, static_bw, n_samples);
    c_dn   = eval_cond(t_dn, sums, static_bw, n_samples);
    any_up = |c_up;
    any_dn = |c_dn;
    nxt_op = cur_op;
    if (!enable) begin
      nxt_op = '0;
    end else if (cur_op != '0 && any_up) begin
      nxt_op = cur_op - 1'b1;                       // demand above this boundary: step up
    end else if (int'(cur_op) < NUM_OP - 1 && !any_dn) begin
      nxt_op = cur_op + 1'b1;                       // no condition holds: step down
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      decision_valid <= 1'b0;
      target_op      <= '0;
      cond           <= '0;
    end else begin
      decision_valid <= eval_valid;
      if (eval_valid) begin
        target_op <= nxt_op;
        cond      <= (cur_op != '0) ? c_up : c_dn;
      end
    end
  end

endmodule
