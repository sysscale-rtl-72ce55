// sysscale_eval_sampler: sample timer and evaluation-interval accumulator.
//
// The paper's PMU reads the performance counters several times per
// evaluation interval (every 1 ms, interval 30 ms by default) and feeds the
// average of each counter to the power-management algorithm. This block does
// that in hardware: a free-running timer pulses `sample` every SAMPLE_CYCLES
// cycles, the returned window values are added into 40-bit sums, and after
// `samples_per_eval` samples the sums are presented with a one-cycle
// `eval_valid` pulse, together with the number of samples they hold (`n_o`),
// and the accumulators restart. The averages are not divided out: the demand
// predictor compares each sum with threshold times n_o, which is the same
// test as average > threshold.
//
// The evaluation interval is configurable at run time, as the paper's is
// (30 ms by default, set at the top): `samples_per_eval` may change at any
// time and takes effect in the running interval; 0 counts as 1. n_o always
// tells how many samples a sum really covers.
//
// Default sample period: 1 ms at the assumed 100 MHz PMU clock = 100,000
// cycles; the 1 ms is the paper's, the clock frequency this design's
// assumption. Sums saturate.
module sysscale_eval_sampler
  import sysscale_pkg::*;
#(
  parameter int unsigned SAMPLE_CYCLES    = 100_000
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,        // 0 holds the timer and accumulators at zero
  input  logic [EVAL_W-1:0] samples_per_eval,
  output logic         sample,        // to sysscale_perf_counters
  input  perf_sample_t sample_i,
  input  logic         sample_valid,
  output perf_sum_t    sum_o,         // sums over the interval just ended
  output logic [EVAL_W-1:0] n_o,     // samples summed in sum_o
  output logic         eval_valid     // one-cycle pulse, sum_o and n_o valid from then on
);

  localparam int unsigned TW = $clog2(SAMPLE_CYCLES + 1);
  logic [TW-1:0]     timer;
  logic [EVAL_W-1:0] nsamp;   // samples already in acc
  logic              last;
  perf_sum_t     acc, acc_nxt;

  function automatic logic [SUM_W-1:0] sat_acc(input logic [SUM_W-1:0] a,
                                               input logic [CNT_W-1:0] b);
    logic [SUM_W:0] s;
    s = {1'b0, a} + (SUM_W+1)'(b);
    return s[SUM_W] ? '1 : s[SUM_W-1:0];
  endfunction

  always_comb begin
    acc_nxt.gfx_llc_misses = sat_acc(acc.gfx_llc_misses, sample_i.gfx_llc_misses);
    acc_nxt.llc_occupancy  = sat_acc(acc.llc_occupancy,  sample_i.llc_occupancy);
    acc_nxt.llc_stalls     = sat_acc(acc.llc_stalls,     sample_i.llc_stalls);
    acc_nxt.io_rpq         = sat_acc(acc.io_rpq,         sample_i.io_rpq);
  end

  // The sample now arriving completes the interval.
  assign last = ({1'b0, nsamp} + 1'b1) >= {1'b0, samples_per_eval};

  // Sample timer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer  <= '0;
      sample <= 1'b0;
    end else if (!enable) begin
      timer  <= '0;
      sample <= 1'b0;
    end else begin
      sample <= (timer == TW'(SAMPLE_CYCLES - 1));
      timer  <= (timer == TW'(SAMPLE_CYCLES - 1)) ? '0 : timer + 1'b1;
    end
  end

  // Accumulate the returned samples over the evaluation interval.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      nsamp      <= '0;
      sum_o      <= '0;
      n_o        <= '0;
      eval_valid <= 1'b0;
    end else begin
      eval_valid <= 1'b0;
      if (!enable) begin
        acc   <= '0;
        nsamp <= '0;
      end else if (sample_valid) begin
        if (last) begin
          sum_o      <= acc_nxt;
          n_o        <= nsamp + 1'b1;
          eval_valid <= 1'b1;
          acc        <= '0;
          nsamp      <= '0;
        end else begin
          acc   <= acc_nxt;
          nsamp <= nsamp + 1'b1;
        end
      end
    end
  end

endmodule
