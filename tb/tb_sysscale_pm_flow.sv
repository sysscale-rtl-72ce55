// tb_sysscale_pm_flow: runs the transition sequencer against behavioural
// regulator, PLL/DLL and DRAM self-refresh models and simple drain and MRC
// responders. For transitions down (to the lower point) and up it checks the
// exact order of steps of the flow chart, that voltages rise before and fall
// after the clocks change, that the operating point, counters and budget
// point update, that a request for the current point is ignored, that a
// request made while DRAM is not active is held (a newer one replaces it, one
// for the current point cancels it) and carried out once DRAM is active, and
// that the flow's own overhead on top of the waits
// stays under 1 us (100 cycles at 100 MHz) and the whole transition under
// 10 us, the paper's figures.
module tb_sysscale_pm_flow;
  import sysscale_pkg::*;
  logic clk = 0, rst_n = 0;
  op_point_t op_tbl [NUM_OP];
  logic req_valid, dram_active;
  op_idx_t req_op, mrc_op, cur_op, budget_op;
  logic vr_req, vr_ack, block_req, drained, dram_sr_req, dram_sr_ack;
  logic mrc_start, mrc_done, pll_req, pll_ack, busy, held;
  logic [11:0] vsa_target_mv, vio_target_mv;
  logic [15:0] dram_mhz, mc_mhz, ic_mhz;
  flow_state_t state;
  logic [31:0] trans_count, last_latency;
  int checks = 0, failures = 0;
  int vsa_uv, vio_uv, vr_busy, cur_dram, cur_ic, relocks, pll_busy, sr_entries, sr_viol, sr_busy;
  int n_held = 0;
  int drain_busy = 0, mrc_busy_c = 0, mrc_cnt = -1, drain_delay = 0;

  always #5 clk = ~clk;

  sysscale_pm_flow dut (.*);
  tb_vr_model u_vr (.clk, .vr_req, .vsa_target_mv, .vio_target_mv, .vr_ack,
                    .vsa_uv, .vio_uv, .busy_cycles(vr_busy));
  tb_pll_model u_pll (.clk, .pll_req, .dram_mhz, .ic_mhz, .pll_ack,
                      .cur_dram_mhz(cur_dram), .cur_ic_mhz(cur_ic), .relocks, .busy_cycles(pll_busy));
  tb_dram_sr_model u_sr (.clk, .dram_sr_req, .traffic(rst_n && !block_req),
                         .dram_sr_ack, .entries(sr_entries), .violations(sr_viol), .busy_cycles(sr_busy));

  // drain responder: in-flight requests need drain_delay cycles to finish
  int dcnt = 0;
  always @(posedge clk) begin
    if (!block_req) dcnt <= 0;
    else if (dcnt < drain_delay) begin dcnt <= dcnt + 1; drain_busy++; end
  end
  assign drained = block_req && dcnt >= drain_delay;

  // MRC responder: done NUM_CR + 2 cycles after start
  always @(posedge clk) begin
    mrc_done <= 0;
    if (mrc_start) mrc_cnt <= 1;
    else if (mrc_cnt > 0) begin
      mrc_busy_c++;
      if (mrc_cnt == 64) begin mrc_done <= 1; mrc_cnt <= -1; end
      else mrc_cnt <= mrc_cnt + 1;
    end
  end

  // record the visited states and the order of voltage and clock changes
  int seq[$];
  int ev_v, ev_f, evn;
  flow_state_t prev_state;
  logic [11:0] prev_vsa;
  logic [15:0] prev_dram;
  always @(posedge clk) if (rst_n) begin
    if (state != prev_state) seq.push_back(int'(state));
    if (vsa_target_mv != prev_vsa) begin ev_v = evn; evn++; end
    if (dram_mhz != prev_dram) begin ev_f = evn; evn++; end
    prev_state = state; prev_vsa = vsa_target_mv; prev_dram = dram_mhz;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic request(input int op);
    @(negedge clk) req_valid = 1; req_op = op_idx_t'(op);
    @(negedge clk) req_valid = 0;
  endtask

  task automatic transition(input int op, input bit up, input bit from_held = 0);
    int exp_seq[$];
    int waits, lat;
    int vr0, pll0, sr0, dr0, mrc0;
    seq.delete(); evn = 0; ev_v = -1; ev_f = -1;
    vr0 = vr_busy; pll0 = pll_busy; sr0 = sr_busy; dr0 = drain_busy; mrc0 = mrc_busy_c;
    drain_delay = 10 + $urandom % 80;
    if (from_held) begin
      // the held decision starts as soon as DRAM is active again
      @(negedge clk) dram_active = 1;
      @(negedge clk);
    end else begin
      request(op);
    end
    check(busy, "flow started");
    check(!held, "nothing held once started");
    wait (!busy);
    @(negedge clk);
    @(negedge clk);   // the recorder samples one edge late
    if (up) exp_seq = '{2, 3, 4, 5, 6, 8, 9, 1};
    else    exp_seq = '{3, 4, 5, 6, 7, 8, 9, 1};
    check(seq == exp_seq, $sformatf("step order %p, expected %p", seq, exp_seq));
    if (up) check(ev_v >= 0 && ev_f >= 0 && ev_v < ev_f, "voltage raised before the clocks");
    else    check(ev_v >= 0 && ev_f >= 0 && ev_f < ev_v, "voltage lowered after the clocks");
    check(cur_op == op_idx_t'(op), "current point updated");
    check(cur_dram == int'(op_tbl[op].dram_mhz) && cur_ic == int'(op_tbl[op].ic_mhz), "PLLs locked at the new point");
    check(vsa_uv == int'(op_tbl[op].vsa_mv) * 1000 && vio_uv == int'(op_tbl[op].vio_mv) * 1000, "rails at the new point");
    check(!dram_sr_ack && !block_req, "DRAM out of self-refresh and traffic released");
    waits = (vr_busy - vr0) + (pll_busy - pll0) + (sr_busy - sr0) + (drain_busy - dr0) + (mrc_busy_c - mrc0);
    lat = int'(last_latency);
    $display("transition to %0d: %0d cycles, %0d waiting on the outside, overhead %0d", op, lat, waits, lat - waits);
    check(lat - waits < 100, "flow overhead under 1 us");
    check(lat < 1000, "transition under 10 us");
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NUM_OP; i++) op_tbl[i] = default_op(i);
    req_valid = 0; req_op = 0; dram_active = 1; mrc_done = 0;
    prev_state = FLOW_IDLE; prev_vsa = op_tbl[0].vsa_mv; prev_dram = op_tbl[0].dram_mhz;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == FLOW_IDLE && cur_op == 0, "reset at point 0");
    check(vsa_target_mv == op_tbl[0].vsa_mv && dram_mhz == op_tbl[0].dram_mhz, "reset targets");
    // a request for the current point does nothing
    request(0);
    repeat (5) @(negedge clk);
    check(!busy && trans_count == 0, "same point ignored");
    for (int r = 0; r < 4; r++) begin
      // down, with a check of the budget point during the flow
      fork
        transition(1, 0);
        begin
          @(negedge clk); @(negedge clk);
          check(budget_op == 0, "budget stays at the high point while going down");
        end
      join
      check(budget_op == 1, "budget moves to the low point after going down");
      // not while DRAM is in a deep package state: the decision is held
      dram_active = 0;
      request(0);
      repeat (5) @(negedge clk);
      check(!busy && cur_op == 1, "no transition while DRAM is not active");
      check(held, "decision held while DRAM is not active");
      n_held++;
      if (r % 2 == 1) begin
        // a decision for the current point cancels the held one
        request(1);
        check(!held && !busy, "held decision cancelled");
        dram_active = 1;
        repeat (5) @(negedge clk);
        check(!busy && cur_op == 1, "cancelled decision not carried out");
      end
      fork
        transition(0, 1, r % 2 == 0);
        begin
          @(negedge clk); @(negedge clk);
          check(budget_op == 0, "budget granted to IO/memory as soon as going up");
        end
      join
    end
    check(trans_count == 8, "transition count");
    check(sr_entries == 8 && relocks == 8, "one self-refresh and one relock per transition");
    check(sr_viol == 0, "no traffic during self-refresh");
    check(n_held == 4, "held decisions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
