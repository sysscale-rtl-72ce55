// tb_sysscale_top: end-to-end test of the SysScale controller at its default
// sizes (1 ms samples at 100 MHz, 30 ms evaluation interval, 64 MRC registers
// per point, two operating points).
//
// The testbench plays the rest of the SoC: behavioural regulator, PLL/DLL and
// DRAM self-refresh models, an MRC training pass that fills the SRAM at
// reset, firmware that fills the static-demand table and the thresholds,
// random request traffic on the IO and LLC paths to the memory controller
// with completions after 20-60 cycles, and configuration-register storage
// for the MC/DDRIO/DRAM. Workload phases change at every decision:
//   quiet -> graphics-bound -> quiet -> core-bandwidth-bound -> quiet ->
//   memory-latency-bound -> quiet -> IO-bound -> quiet -> three 4K displays
//   (static demand) -> quiet with DRAM in a deep package state (the decision
//   is held and carried out when DRAM is active again) -> SysScale switched
//   off.
// After each decision it checks the target point and which condition fired,
// the completed transition (point, clocks, rails, all 64 registers holding
// the new point's MRC values, budget = TDP - IO - memory), that no request
// reached the memory controller while DRAM was in self-refresh, and that the
// transition took under 10 us. It counts each mechanism (step down, step up
// through each of the five conditions, requests stalled by the block, drains
// with requests in flight, MRC reloads, budget moves, a decision held back
// while DRAM is not active and carried out when it wakes, the return to
// point 0 when switched off) and
// fails any that never happened.
module tb_sysscale_top;
  import sysscale_pkg::*;
  localparam int NUM_CR = 64;
  localparam int MRC_AW = $clog2(NUM_OP * NUM_CR);

  logic clk = 0, rst_n = 0;
  logic sysscale_en, dram_active;
  logic eval_we = 0;
  logic [EVAL_W-1:0] eval_wdata = '0;
  thr_t [NUM_OP-2:0] thr;
  logic tbl_we;
  logic [CFG_W-1:0] tbl_addr;
  logic [BW_W-1:0] tbl_wdata;
  logic mrc_we;
  logic [MRC_AW-1:0] mrc_waddr;
  logic [31:0] mrc_wdata;
  logic [PWR_W-1:0] tdp_mw;
  logic [PWR_W-1:0] io_budget_tbl [NUM_OP];
  logic [PWR_W-1:0] mem_budget_tbl [NUM_OP];
  logic [1:0] gfx_llc_miss;
  logic [5:0] llc_occupancy;
  logic llc_stall, io_rpq_stall;
  periph_cfg_t periph_cfg;
  logic vr_req, vr_ack, dram_sr_req, dram_sr_ack, pll_req, pll_ack;
  logic [11:0] vsa_target_mv, vio_target_mv;
  logic [15:0] dram_mhz, mc_mhz, ic_mhz;
  logic cr_we;
  logic [5:0] cr_addr;
  logic [31:0] cr_data;
  logic io_src_valid, io_src_ready, io_dst_valid, io_dst_ready, io_cpl;
  logic llc_src_valid, llc_src_ready, llc_dst_valid, llc_dst_ready, llc_cpl;
  logic [63:0] io_src_data, io_dst_data, llc_src_data, llc_dst_data;
  logic [PWR_W-1:0] io_budget_mw, mem_budget_mw, compute_budget_mw;
  logic budget_changed, flow_busy, flow_held, decision_valid, mrc_busy;
  op_idx_t cur_op, target_op;
  flow_state_t flow_state;
  cond_t cond;
  logic [31:0] trans_count, last_latency;
  logic [5:0] io_outstanding, llc_outstanding;

  int vsa_uv, vio_uv, vr_busy, cur_dram, cur_ic, relocks, pll_busy, sr_entries, sr_viol, sr_busy;

  always #5 clk = ~clk;   // 100 MHz

  sysscale_top dut (.*);

  tb_vr_model u_vr (.clk, .vr_req, .vsa_target_mv, .vio_target_mv, .vr_ack,
                    .vsa_uv, .vio_uv, .busy_cycles(vr_busy));
  tb_pll_model u_pll (.clk, .pll_req, .dram_mhz, .ic_mhz, .pll_ack,
                      .cur_dram_mhz(cur_dram), .cur_ic_mhz(cur_ic), .relocks, .busy_cycles(pll_busy));
  // a request accepted, or one still completing, while DRAM is in self-refresh is a violation
  tb_dram_sr_model u_sr (.clk, .dram_sr_req,
                         .traffic(rst_n && ((io_dst_valid && io_dst_ready) || (llc_dst_valid && llc_dst_ready) || io_cpl || llc_cpl)),
                         .dram_sr_ack, .entries(sr_entries), .violations(sr_viol), .busy_cycles(sr_busy));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [31:0] mrc_val(input int op, input int cr);
    return 32'h5000_0000 ^ (32'(op) << 24) ^ (32'(cr) * 32'h0001_0307);
  endfunction

  // static demand: displays x pixels x refresh x 4 B + cameras x pixels x 30 x 2 B (MB/s)
  function automatic int unsigned demand(input periph_cfg_t c);
    int unsigned px, d, cam;
    case (c.disp_res)
      0: px = 1280 * 720;
      1: px = 1920 * 1080;
      2: px = 2560 * 1440;
      default: px = 3840 * 2160;
    endcase
    d   = c.num_displays * px / 1000 * (c.disp_refresh ? 120 : 60) * 4 / 1000;
    cam = c.num_cameras * (c.cam_res ? 3840 * 2160 : 1920 * 1080) / 1000 * 30 * 2 / 1000;
    return d + cam;
  endfunction

  // ---------------- workload phases and event generation ----------------
  typedef enum int {PH_QUIET, PH_GFX, PH_CORE, PH_LAT, PH_IO, PH_STATIC} phase_t;
  phase_t phase;

  always @(negedge clk) begin
    gfx_llc_miss  <= (phase == PH_GFX)  ? 2'($urandom % 3)    : 2'(($urandom % 1000) == 0);
    llc_occupancy <= (phase == PH_CORE) ? 6'(8 + $urandom % 5) : 6'($urandom % 2);
    llc_stall     <= (phase == PH_LAT)  ? 1'($urandom % 2)    : (($urandom % 100) == 0);
    io_rpq_stall  <= (phase == PH_IO)   ? (($urandom % 10) == 0) : (($urandom % 200) == 0);
  end

  // ---------------- request traffic and completions ----------------
  longint cyc = 0;
  longint io_done_q[$], llc_done_q[$];
  int stalls = 0, drains_busy = 0;
  logic block_seen;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (io_src_valid && !io_src_ready && io_dst_ready) stalls++;
      if (llc_src_valid && !llc_src_ready && llc_dst_ready) stalls++;
      if (io_dst_valid && io_dst_ready) io_done_q.push_back(cyc + 20 + $urandom % 40);
      if (llc_dst_valid && llc_dst_ready) llc_done_q.push_back(cyc + 20 + $urandom % 40);
    end
  end
  // the flow's block request, seen through the gates: blocked = ready low with the MC ready
  always @(posedge clk) if (rst_n) begin
    logic blk;
    blk = (flow_state == FLOW_DRAIN);
    if (blk && !block_seen && (io_outstanding != 0 || llc_outstanding != 0)) drains_busy++;
    block_seen = blk;
  end
  always @(negedge clk) begin
    io_src_valid  <= ($urandom % 4) == 0;
    io_src_data   <= {$urandom, $urandom};
    llc_src_valid <= ($urandom % 3) == 0;
    llc_src_data  <= {$urandom, $urandom};
    io_dst_ready  <= ($urandom % 8) != 0;
    llc_dst_ready <= ($urandom % 8) != 0;
    io_cpl  <= (io_done_q.size()  > 0 && io_done_q[0]  <= cyc);
    llc_cpl <= (llc_done_q.size() > 0 && llc_done_q[0] <= cyc);
  end
  always @(posedge clk) begin
    if (io_cpl)  void'(io_done_q.pop_front());
    if (llc_cpl) void'(llc_done_q.pop_front());
  end

  // ---------------- MC / DDRIO / DRAM configuration registers ----------------
  logic [31:0] regs [NUM_CR];
  int cr_writes = 0;
  always @(posedge clk) if (rst_n && cr_we) begin
    regs[cr_addr] <= cr_data;
    cr_writes++;
    if (!dram_sr_ack) begin failures++; $display("FAIL CR write with DRAM out of self-refresh"); end
  end

  int budget_moves = 0;
  always @(posedge clk) if (rst_n && budget_changed) budget_moves++;

  // ---------------- mechanism counters ----------------
  int n_down = 0, n_up_static = 0, n_up_gfx = 0, n_up_core = 0, n_up_lat = 0, n_up_io = 0;
  int n_held = 0, n_off = 0, max_lat = 0;

  initial begin
    // 14 evaluation intervals of 3,000,000 cycles, with margin
    repeat (46_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_decision();
    @(posedge clk iff decision_valid);
    @(negedge clk);
  endtask

  task automatic check_point(input int op);
    int bad;
    check(cur_op == op_idx_t'(op), $sformatf("at point %0d", op));
    check(cur_dram == int'(default_op(op).dram_mhz) && cur_ic == int'(default_op(op).ic_mhz), "clocks");
    check(vsa_uv == int'(default_op(op).vsa_mv) * 1000 && vio_uv == int'(default_op(op).vio_mv) * 1000, "rails");
    bad = 0;
    for (int c = 0; c < NUM_CR; c++) if (regs[c] != mrc_val(op, c)) bad++;
    check(bad == 0, $sformatf("%0d MRC registers wrong for point %0d", bad, op));
    repeat (3) @(negedge clk);
    check(int'(compute_budget_mw) == int'(tdp_mw) - int'(io_budget_tbl[op]) - int'(mem_budget_tbl[op]),
          $sformatf("compute budget %0d at point %0d", compute_budget_mw, op));
  endtask

  // one interval: set the phase, wait for the decision, check it and the transition
  task automatic interval(input phase_t ph, input int exp_target, input bit expect_move);
    int n_before;
    phase = ph;
    n_before = int'(trans_count);
    $display("[%0t] interval %s, point %0d, transitions %0d", $time, ph.name(), cur_op, trans_count);
    wait_decision();
    check(target_op == op_idx_t'(exp_target), $sformatf("phase %s: target %0d, expected %0d", ph.name(), target_op, exp_target));
    case (ph)
      PH_GFX:    check(cond.gfx,       "graphics condition");
      PH_CORE:   check(cond.core,      "core condition");
      PH_LAT:    check(cond.lat,       "latency condition");
      PH_IO:     check(cond.io,        "IO condition");
      PH_STATIC: check(cond.static_bw, "static bandwidth condition");
      default:   check(cond == '0,     "no condition in a quiet phase");
    endcase
    if (expect_move) begin
      @(negedge clk);
      check(flow_busy, "transition started");
      wait (!flow_busy);
      @(negedge clk);
      check(int'(trans_count) == n_before + 1, "one transition");
      check(last_latency < 1000, $sformatf("transition took %0d cycles (10 us = 1000)", last_latency));
      if (int'(last_latency) > max_lat) max_lat = int'(last_latency);
      check_point(exp_target);
    end else begin
      repeat (2000) @(negedge clk);
      check(int'(trans_count) == n_before, "no transition");
    end
  endtask

  initial begin
    phase = PH_QUIET;
    sysscale_en = 1; dram_active = 1;
    thr[0] = '{static_bw: 16'd5000, gfx: 32'd1000, core: 32'd200000, lat: 32'd5000, io: 32'd2000};
    tbl_we = 0; tbl_addr = 0; tbl_wdata = 0; mrc_we = 0; mrc_waddr = 0; mrc_wdata = 0;
    tdp_mw = 16'd4500;
    io_budget_tbl  = '{16'd600, 16'd450};
    mem_budget_tbl = '{16'd900, 16'd650};
    periph_cfg = '{num_displays: 2'd1, disp_res: 2'd1, disp_refresh: 1'b0, num_cameras: 2'd0, cam_res: 1'b0};
    io_src_valid = 0; llc_src_valid = 0; io_dst_ready = 0; llc_dst_ready = 0; io_cpl = 0; llc_cpl = 0;
    block_seen = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // MRC training results for every point, and the static-demand table
    for (int a = 0; a < NUM_OP * NUM_CR; a++) begin
      @(negedge clk) mrc_we = 1; mrc_waddr = MRC_AW'(a); mrc_wdata = mrc_val(a / NUM_CR, a % NUM_CR);
    end
    @(negedge clk) mrc_we = 0;
    for (int a = 0; a < 2 ** CFG_W; a++) begin
      @(negedge clk) tbl_we = 1; tbl_addr = CFG_W'(a); tbl_wdata = BW_W'(demand(periph_cfg_t'(a)));
    end
    @(negedge clk) tbl_we = 0;
    // boot-time registers hold point 0's values
    for (int c = 0; c < NUM_CR; c++) regs[c] = mrc_val(0, c);

    interval(PH_QUIET, 1, 1); n_down++;
    interval(PH_GFX,   0, 1); n_up_gfx++;
    interval(PH_QUIET, 1, 1); n_down++;
    interval(PH_CORE,  0, 1); n_up_core++;
    interval(PH_QUIET, 1, 1); n_down++;
    interval(PH_LAT,   0, 1); n_up_lat++;
    interval(PH_QUIET, 1, 1); n_down++;
    interval(PH_IO,    0, 1); n_up_io++;
    interval(PH_QUIET, 1, 1); n_down++;
    periph_cfg = '{num_displays: 2'd3, disp_res: 2'd3, disp_refresh: 1'b0, num_cameras: 2'd0, cam_res: 1'b0};
    interval(PH_STATIC, 0, 1); n_up_static++;
    periph_cfg = '{num_displays: 2'd1, disp_res: 2'd1, disp_refresh: 1'b0, num_cameras: 2'd0, cam_res: 1'b0};
    // DRAM in a deep package state: the decision waits until it is active
    dram_active = 0;
    interval(PH_QUIET, 1, 0);
    check(flow_held, "decision held while DRAM is not active");
    repeat (10_000) @(negedge clk);
    check(!flow_busy && cur_op == 0, "still at the high point while DRAM sleeps");
    begin
      int n_before;
      n_before = int'(trans_count);
      dram_active = 1;
      @(negedge clk);
      check(flow_busy, "held decision started once DRAM is active");
      wait (!flow_busy);
      @(negedge clk);
      check(int'(trans_count) == n_before + 1 && !flow_held, "held decision carried out");
      check(last_latency < 1000, $sformatf("transition took %0d cycles (10 us = 1000)", last_latency));
      check_point(1);
      n_held++; n_down++;
    end
    sysscale_en = 0;
    interval(PH_QUIET, 0, 1); n_off++;
    // switched off at point 0: no more evaluations
    repeat (3_100_000) begin
      @(negedge clk);
      if (decision_valid) begin failures++; $display("FAIL decision while switched off"); end
    end
    checks++;

    check(sr_viol == 0, $sformatf("%0d requests reached the MC during self-refresh", sr_viol));
    check(cr_writes == NUM_CR * int'(trans_count), "one full MRC reload per transition");
    $display("mechanisms: down %0d, up by static %0d gfx %0d core %0d lat %0d io %0d, held %0d, off %0d",
             n_down, n_up_static, n_up_gfx, n_up_core, n_up_lat, n_up_io, n_held, n_off);
    $display("            stalled requests %0d, drains with requests in flight %0d, MRC reloads %0d, budget moves %0d, longest transition %0d cycles",
             stalls, drains_busy, cr_writes / NUM_CR, budget_moves, max_lat);
    check(n_down > 0,       "step down happened");
    check(n_up_static > 0,  "step up on static demand happened");
    check(n_up_gfx > 0,     "step up on graphics misses happened");
    check(n_up_core > 0,    "step up on LLC occupancy happened");
    check(n_up_lat > 0,     "step up on LLC stalls happened");
    check(n_up_io > 0,      "step up on IO RPQ happened");
    check(n_held > 0,       "decision held back with DRAM inactive");
    check(n_off > 0,        "return to point 0 when switched off");
    check(stalls > 0,       "requests stalled by block");
    check(drains_busy > 0,  "drain with requests in flight");
    check(cr_writes > 0,    "MRC reload");
    check(budget_moves > 0, "budget redistribution");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
