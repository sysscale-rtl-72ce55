// tb_sysscale_eval_sampler: checks the sample period, the number of samples per
// evaluation interval and the sums, with a small period and interval. The
// interval length is changed between intervals and once in the middle of
// one, where the interval must end at the next sample; the reported sample
// count must always match the samples counted here.
// The sample values fed back are random; the expected sums are kept here.
module tb_sysscale_eval_sampler;
  import sysscale_pkg::*;
  localparam int SC = 20;
  int sn = 5;
  bit sn_changed = 0;
  logic [EVAL_W-1:0] samples_per_eval, n_o;
  logic clk = 0, rst_n = 0, enable;
  logic sample, sample_valid, eval_valid;
  perf_sample_t sample_i;
  perf_sum_t sum_o;
  int checks = 0, failures = 0;
  longint cyc = 0, last_sample = -1, last_eval = -1;
  longint ref_g, ref_o, ref_s, ref_i;
  int nsamp = 0, nevals = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  sysscale_eval_sampler #(.SAMPLE_CYCLES(SC)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Behave like the counter block: answer every sample one cycle later.
  always_ff @(posedge clk) begin
    sample_valid <= sample;
    if (sample) begin
      sample_i.gfx_llc_misses <= $urandom;
      sample_i.llc_occupancy  <= $urandom;
      sample_i.llc_stalls     <= $urandom % 1000;
      sample_i.io_rpq         <= $urandom % 1000;
    end
  end

  always @(posedge clk) if (rst_n && enable) begin
    if (sample) begin
      if (last_sample >= 0) check(cyc - last_sample == SC, $sformatf("sample period %0d", cyc - last_sample));
      last_sample = cyc;
    end
    if (sample_valid) begin
      ref_g += sample_i.gfx_llc_misses; ref_o += sample_i.llc_occupancy;
      ref_s += sample_i.llc_stalls;     ref_i += sample_i.io_rpq;
      nsamp++;
    end
    if (eval_valid) begin
      if (!sn_changed) check(nsamp == sn, $sformatf("samples per interval %0d, expected %0d", nsamp, sn));
      check(int'(n_o) == nsamp, $sformatf("reported %0d samples, counted %0d", n_o, nsamp));
      check(sum_o.gfx_llc_misses == 40'(ref_g), "gfx sum");
      check(sum_o.llc_occupancy  == 40'(ref_o), "occ sum");
      check(sum_o.llc_stalls     == 40'(ref_s), "stall sum");
      check(sum_o.io_rpq         == 40'(ref_i), "rpq sum");
      if (last_eval >= 0 && !sn_changed) check(cyc - last_eval == SC*sn, $sformatf("interval %0d", cyc - last_eval));
      sn_changed = 0;
      last_eval = cyc;
      ref_g = 0; ref_o = 0; ref_s = 0; ref_i = 0; nsamp = 0;
      nevals++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_g = 0; ref_o = 0; ref_s = 0; ref_i = 0;
    enable = 1; sample_valid = 0; sample_i = '0;
    samples_per_eval = EVAL_W'(sn);
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (nevals == 6);
    // disabling stops the timer and clears the partial interval
    @(negedge clk) enable = 0;
    repeat (3 * SC) begin
      @(negedge clk);
      check(!sample && !eval_valid, "quiet while disabled");
    end
    ref_g = 0; ref_o = 0; ref_s = 0; ref_i = 0; nsamp = 0; last_sample = -1; last_eval = -1;
    // a shorter interval set while disabled
    sn = 3; samples_per_eval = EVAL_W'(sn);
    enable = 1;
    wait (nevals == 8);
    check(nevals == 8, "evaluations after re-enable");
    // a longer interval set between intervals
    @(negedge clk) sn = 7; samples_per_eval = EVAL_W'(sn); sn_changed = 1;
    wait (nevals == 11);
    // shortened to 2 with 4 samples already summed: ends at the next sample
    wait (nsamp == 4);
    @(negedge clk) sn = 2; samples_per_eval = EVAL_W'(sn); sn_changed = 1;
    wait (nevals == 12);
    @(negedge clk);
    check(n_o == EVAL_W'(5), $sformatf("interval cut short after %0d samples", n_o));
    // 0 counts as 1
    @(negedge clk) sn = 1; samples_per_eval = '0; sn_changed = 1;
    wait (nevals == 15);
    check(n_o == EVAL_W'(1), "interval of one sample for 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
