// tb_sysscale_demand_predictor: drives random counter sums and static demand
// against fixed thresholds and checks the five-condition decision with a
// reference written here, for the two operating points of the default
// configuration (one boundary, one threshold set). The number of samples the
// sums cover changes randomly between decisions (1 to 255).
module tb_sysscale_demand_predictor;
  import sysscale_pkg::*;
  int N = 30;
  logic [EVAL_W-1:0] n_samples;
  logic clk = 0, rst_n = 0, enable, eval_valid, decision_valid;
  perf_sum_t sums;
  logic [BW_W-1:0] static_bw;
  op_idx_t cur_op, target_op;
  thr_t [NUM_OP-2:0] thr;
  cond_t cond;
  int checks = 0, failures = 0;
  int ups = 0, downs = 0, stays = 0;

  always #5 clk = ~clk;
  sysscale_demand_predictor dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Values near a threshold: sum = (thr*N) plus or minus a little.
  function automatic logic [SUM_W-1:0] near(input logic [CNT_W-1:0] t);
    int r;
    r = $urandom % 5;
    case (r)
      0: return SUM_W'(t) * N - 1;
      1: return SUM_W'(t) * N;
      2: return SUM_W'(t) * N + 1;
      3: return SUM_W'($urandom % 1000);
      default: return SUM_W'(t) * N * 2;
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enable = 1; eval_valid = 0; n_samples = EVAL_W'(N); sums = '0; static_bw = 0; cur_op = 0;
    thr[0] = '{static_bw: 16'd4352, gfx: 32'd5000, core: 32'd20000, lat: 32'd3000, io: 32'd700};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      bit c_s, c_g, c_c, c_l, c_i, anyc;
      op_idx_t exp_op;
      @(negedge clk);
      cur_op = op_idx_t'($urandom % NUM_OP);
      N = ($urandom % 4 == 0) ? 1 + $urandom % 255 : 30;
      n_samples = EVAL_W'(N);
      enable = ($urandom % 10) != 0;
      // mostly quiet, with one or two conditions sometimes near their limit
      sums.gfx_llc_misses = ($urandom % 3 == 0) ? near(thr[0].gfx)  : SUM_W'($urandom % 100);
      sums.llc_occupancy  = ($urandom % 3 == 0) ? near(thr[0].core) : SUM_W'($urandom % 100);
      sums.llc_stalls     = ($urandom % 3 == 0) ? near(thr[0].lat)  : SUM_W'($urandom % 100);
      sums.io_rpq         = ($urandom % 3 == 0) ? near(thr[0].io)   : SUM_W'($urandom % 100);
      static_bw = ($urandom % 3 == 0) ? BW_W'(thr[0].static_bw + ($urandom % 3) - 1) : BW_W'($urandom % 1000);
      eval_valid = 1;
      c_s = static_bw > thr[0].static_bw;
      c_g = longint'(sums.gfx_llc_misses) > longint'(thr[0].gfx)  * N;
      c_c = longint'(sums.llc_occupancy)  > longint'(thr[0].core) * N;
      c_l = longint'(sums.llc_stalls)     > longint'(thr[0].lat)  * N;
      c_i = longint'(sums.io_rpq)         > longint'(thr[0].io)   * N;
      anyc = c_s | c_g | c_c | c_l | c_i;
      exp_op = (!enable || anyc) ? op_idx_t'(0) : op_idx_t'(1);
      @(negedge clk);
      eval_valid = 0;
      check(decision_valid, "decision one cycle after eval_valid");
      check(target_op == exp_op, $sformatf("n=%0d target %0d expected %0d (en=%0d cur=%0d)", n, target_op, exp_op, enable, cur_op));
      check(cond == {c_s, c_g, c_c, c_l, c_i}, "condition flags");
      if (exp_op < cur_op) ups++; else if (exp_op > cur_op) downs++; else stays++;
      @(negedge clk);
      check(!decision_valid, "decision_valid is a pulse");
    end
    check(ups > 0 && downs > 0 && stays > 0, "all three decisions seen");
    $display("decisions: up %0d down %0d stay %0d", ups, downs, stays);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
