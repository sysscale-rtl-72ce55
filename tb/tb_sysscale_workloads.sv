// tb_sysscale_workloads: the whole controller under workload classes of the
// kinds SysScale targets: CPU benchmarks, 3D graphics and battery-life
// workloads.
//
// Time is scaled by 1/10 to keep the run short: a sample is 10,000 cycles
// (0.1 ms at 100 MHz) instead of 1 ms. The evaluation interval is still 30
// samples, and transitions run at real speed against the same regulator,
// PLL/DLL and DRAM models as the end-to-end test. Thresholds are given per
// sample, so they scale with the sample length.
//
// Each workload is a profile of event rates for the four counters:
// - graphics LLC misses per 1000 cycles;
// - mean LLC occupancy;
// - LLC stalls per 1000 cycles;
// - IO RPQ stalls per 1000 cycles.
// A profile also has a peripheral configuration and the share of each video
// frame (33,333 cycles, a 30 fps frame at this scale) in which DRAM is
// active. Package C0/C2 are active; in C8 DRAM is in self-refresh and no
// events or requests occur. The active share comes at the end of each frame.
// The package only enters C8 while no transition is running.
//
// The rates are illustrative and chosen well clear of the thresholds, so the
// right operating point of each profile is known beforehand:
//   compute-bound CPU (gamess-like)         -> low point
//   memory-bandwidth-bound CPU (lbm-like)   -> high point (LLC occupancy)
//   video playback, 15% active (C0 10%, C2 5%, C8 85%) -> low point
//   memory-latency-bound CPU (mcf-like)     -> high point (LLC stalls)
//   video conferencing, display + camera    -> low point
//   3D graphics (3DMark-like)               -> high point (graphics misses)
//   light gaming                            -> low point
//   docked, three 4K panels                 -> high point (static demand)
//   web browsing, 30% active                -> low point
//
// Each profile runs for three evaluation intervals. The testbench checks:
// - every decision, and the condition that caused it;
// - the final point, the clocks and the compute budget;
// - the share of time at the low point after the first decision;
// - that transitions start only with DRAM active;
// - that no request reaches DRAM in self-refresh.
// It reports each profile's low-point residency and mean compute budget, and
// fails unless some decision was held while DRAM slept. At the end firmware
// sets a 10-sample evaluation interval, and the decision spacing is checked.
module tb_sysscale_workloads;
  import sysscale_pkg::*;
  localparam int NUM_CR   = 64;
  localparam int MRC_AW   = $clog2(NUM_OP * NUM_CR);
  localparam int SAMPLE   = 10_000;
  localparam int EVAL     = 30 * SAMPLE;
  localparam int FRAME    = 33_333;

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
  logic [PWR_W-1:0] io_budget_tbl  [NUM_OP];
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

  sysscale_top #(.SAMPLE_CYCLES(SAMPLE)) dut (.*);

  tb_vr_model u_vr (.clk, .vr_req, .vsa_target_mv, .vio_target_mv, .vr_ack,
                    .vsa_uv, .vio_uv, .busy_cycles(vr_busy));
  tb_pll_model u_pll (.clk, .pll_req, .dram_mhz, .ic_mhz, .pll_ack,
                      .cur_dram_mhz(cur_dram), .cur_ic_mhz(cur_ic), .relocks, .busy_cycles(pll_busy));
  tb_dram_sr_model u_sr (.clk, .dram_sr_req,
                         .traffic(rst_n && ((io_dst_valid && io_dst_ready) || (llc_dst_valid && llc_dst_ready) || io_cpl || llc_cpl)),
                         .dram_sr_ack, .entries(sr_entries), .violations(sr_viol), .busy_cycles(sr_busy));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [31:0] mrc_val(input int op, input int cr);
    return 32'h3C00_0000 ^ (32'(op) << 20) ^ (32'(cr) * 32'h0002_0105);
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

  // ---------------- workload profiles ----------------
  typedef struct {
    string       name;
    int          gfx_pm;     // graphics LLC misses per 1000 cycles (at most 3000)
    int          occ_x10;    // mean LLC occupancy x 10
    int          stall_pm;   // LLC stalls per 1000 cycles
    int          rpq_pm;     // IO RPQ stalls per 1000 cycles
    periph_cfg_t cfg;
    int          active_pct; // share of each frame with DRAM active
    int          exp_op;     // expected operating point
    cond_t       exp_cond;   // expected condition at the high point
  } profile_t;

  localparam periph_cfg_t FHD1   = '{num_displays: 2'd1, disp_res: 2'd1, disp_refresh: 1'b0, num_cameras: 2'd0, cam_res: 1'b0};
  localparam periph_cfg_t FHDCAM = '{num_displays: 2'd1, disp_res: 2'd1, disp_refresh: 1'b0, num_cameras: 2'd1, cam_res: 1'b0};
  localparam periph_cfg_t DOCK4K = '{num_displays: 2'd3, disp_res: 2'd3, disp_refresh: 1'b0, num_cameras: 2'd0, cam_res: 1'b0};
  localparam cond_t C_NONE = '0;
  localparam cond_t C_CORE = '{static_bw: 1'b0, gfx: 1'b0, core: 1'b1, lat: 1'b0, io: 1'b0};
  localparam cond_t C_LAT  = '{static_bw: 1'b0, gfx: 1'b0, core: 1'b0, lat: 1'b1, io: 1'b0};
  localparam cond_t C_GFX  = '{static_bw: 1'b0, gfx: 1'b1, core: 1'b0, lat: 1'b0, io: 1'b0};
  localparam cond_t C_STAT = '{static_bw: 1'b1, gfx: 1'b0, core: 1'b0, lat: 1'b0, io: 1'b0};

  profile_t prof [9];
  initial begin
    prof[0] = '{"compute-bound CPU",          5,   5,  10,  2, FHD1,   100, 1, C_NONE};
    prof[1] = '{"memory-bandwidth-bound CPU", 5,  100, 30,  2, FHD1,   100, 0, C_CORE};
    prof[2] = '{"video playback",             5,   3,   5,  5, FHD1,    15, 1, C_NONE};
    prof[3] = '{"memory-latency-bound CPU",   5,  15, 300,  2, FHD1,   100, 0, C_LAT};
    prof[4] = '{"video conferencing",        20,   5,  10, 10, FHDCAM,  40, 1, C_NONE};
    prof[5] = '{"3D graphics",             1500,  10,  20,  2, FHD1,   100, 0, C_GFX};
    prof[6] = '{"light gaming",              50,   5,  10,  2, FHD1,    40, 1, C_NONE};
    prof[7] = '{"docked, three 4K panels",    5,   5,  10,  2, DOCK4K, 100, 0, C_STAT};
    prof[8] = '{"web browsing",              10,   8,  20,  5, FHD1,    30, 1, C_NONE};
  end

  profile_t p;
  bit running = 0;

  // ---------------- package C-state: DRAM active at the end of each frame ----------------
  int frame_t = 0;
  always @(posedge clk) begin
    frame_t <= (frame_t == FRAME - 1) ? 0 : frame_t + 1;
    if (!running || p.active_pct >= 100)                 dram_active <= 1'b1;
    else if (frame_t >= FRAME * (100 - p.active_pct) / 100) dram_active <= 1'b1;
    else if (!flow_busy)                                 dram_active <= 1'b0;  // no C8 entry mid-transition
  end

  // ---------------- counter events ----------------
  always @(negedge clk) begin
    if (!running || !dram_active) begin
      gfx_llc_miss <= '0; llc_occupancy <= '0; llc_stall <= 1'b0; io_rpq_stall <= 1'b0;
    end else begin
      gfx_llc_miss  <= 2'(($urandom % 3000) < p.gfx_pm ? 1 : 0) + 2'(($urandom % 3000) < p.gfx_pm ? 1 : 0)
                     + 2'(($urandom % 3000) < p.gfx_pm ? 1 : 0);
      llc_occupancy <= 6'((p.occ_x10 * 2 * int'($urandom % 1000)) / 10_000);
      llc_stall     <= ($urandom % 1000) < p.stall_pm;
      io_rpq_stall  <= ($urandom % 1000) < p.rpq_pm;
    end
  end

  // ---------------- request traffic and completions ----------------
  longint cyc = 0;
  longint io_done_q[$], llc_done_q[$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (io_dst_valid && io_dst_ready) io_done_q.push_back(cyc + 20 + $urandom % 40);
      if (llc_dst_valid && llc_dst_ready) llc_done_q.push_back(cyc + 20 + $urandom % 40);
    end
  end
  always @(negedge clk) begin
    io_src_valid  <= running && dram_active && ($urandom % 4) == 0;
    io_src_data   <= {$urandom, $urandom};
    llc_src_valid <= running && dram_active && ($urandom % 3) == 0;
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
  always @(posedge clk) if (cr_we) regs[cr_addr] <= cr_data;

  // ---------------- monitors ----------------
  int n_held = 0, n_start_inactive = 0, max_lat = 0;
  logic held_d = 0, busy_d = 0, active_d = 1;
  longint low_cycles = 0, meas_cycles = 0, budget_sum = 0;
  bit measuring = 0;
  always @(posedge clk) if (rst_n) begin
    if (flow_held && !held_d) n_held++;
    if (flow_busy && !busy_d && !active_d) n_start_inactive++;
    if (!flow_busy && busy_d && int'(last_latency) > max_lat) max_lat = int'(last_latency);
    held_d   = flow_held;
    busy_d   = flow_busy;
    active_d = dram_active;
    if (measuring) begin
      meas_cycles++;
      if (cur_op == op_idx_t'(1)) low_cycles++;
      budget_sum += longint'(compute_budget_mw);
    end
  end

  initial begin
    // 27 evaluation intervals of 300,000 cycles, with margin
    repeat (9_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_decision();
    @(posedge clk iff decision_valid);
    @(negedge clk);
  endtask

  task automatic run_profile(input int k);
    int low_pct, bad;
    longint sr0;
    p = prof[k];
    periph_cfg = p.cfg;
    low_cycles = 0; meas_cycles = 0; budget_sum = 0; measuring = 0;
    for (int i = 0; i < 3; i++) begin
      wait_decision();
      measuring = 1;
      check(target_op == op_idx_t'(p.exp_op),
            $sformatf("%s: decision %0d targets %0d, expected %0d", p.name, i, target_op, p.exp_op));
      check(cond == p.exp_cond,
            $sformatf("%s: conditions %b, expected %b", p.name, cond, p.exp_cond));
    end
    // let a held decision or a running transition finish before judging
    wait (!flow_busy && !flow_held);
    @(negedge clk);
    measuring = 0;
    check(cur_op == op_idx_t'(p.exp_op), $sformatf("%s: ends at point %0d", p.name, cur_op));
    check(cur_dram == int'(default_op(p.exp_op).dram_mhz), $sformatf("%s: DRAM clock", p.name));
    bad = 0;
    for (int c = 0; c < NUM_CR; c++) if (regs[c] != mrc_val(p.exp_op, c)) bad++;
    check(bad == 0, $sformatf("%s: %0d MRC registers wrong", p.name, bad));
    repeat (3) @(negedge clk);
    check(int'(compute_budget_mw) == int'(tdp_mw) - int'(io_budget_tbl[p.exp_op]) - int'(mem_budget_tbl[p.exp_op]),
          $sformatf("%s: compute budget %0d", p.name, compute_budget_mw));
    low_pct = int'(low_cycles * 100 / meas_cycles);
    if (p.exp_op == 1) check(low_pct >= 85, $sformatf("%s: low-point residency %0d%%", p.name, low_pct));
    else               check(low_cycles <= 1000, $sformatf("%s: %0d cycles at the low point", p.name, low_cycles));
    $display("%-28s static %5d MB/s  low-point residency %3d%%  mean compute budget %0d mW",
             p.name, demand(p.cfg), low_pct, budget_sum / meas_cycles);
  endtask

  initial begin
    sysscale_en = 1;
    // thresholds per 10,000-cycle sample
    thr[0] = '{static_bw: 16'd5000, gfx: 32'd1000, core: 32'd20000, lat: 32'd500, io: 32'd200};
    tbl_we = 0; tbl_addr = 0; tbl_wdata = 0; mrc_we = 0; mrc_waddr = 0; mrc_wdata = 0;
    tdp_mw = 17'd4500;
    io_budget_tbl  = '{17'd600, 17'd450};
    mem_budget_tbl = '{17'd900, 17'd650};
    periph_cfg = FHD1;
    p = prof[0];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NUM_OP * NUM_CR; a++) begin
      @(negedge clk) mrc_we = 1; mrc_waddr = MRC_AW'(a); mrc_wdata = mrc_val(a / NUM_CR, a % NUM_CR);
    end
    @(negedge clk) mrc_we = 0;
    for (int a = 0; a < 2 ** CFG_W; a++) begin
      @(negedge clk) tbl_we = 1; tbl_addr = CFG_W'(a); tbl_wdata = BW_W'(demand(periph_cfg_t'(a)));
    end
    @(negedge clk) tbl_we = 0;
    for (int c = 0; c < NUM_CR; c++) regs[c] = mrc_val(0, c);
    // start with the first full evaluation interval
    wait_decision();
    running = 1;
    for (int k = 0; k < 9; k++) run_profile(k);
    // firmware shortens the evaluation interval to 10 samples
    begin
      longint t0;
      @(negedge clk) eval_we = 1; eval_wdata = EVAL_W'(10);
      @(negedge clk) eval_we = 0;
      wait_decision();
      t0 = cyc;
      wait_decision();
      check(cyc - t0 == 10 * SAMPLE, $sformatf("interval of %0d cycles after setting 10 samples", cyc - t0));
      check(target_op == op_idx_t'(1), "decision at the shorter interval");
    end
    check(n_held > 0, "a decision was held while DRAM slept");
    check(n_start_inactive == 0, $sformatf("%0d transitions started with DRAM inactive", n_start_inactive));
    check(sr_viol == 0, $sformatf("%0d requests reached DRAM in self-refresh", sr_viol));
    check(max_lat < 1000, $sformatf("longest transition %0d cycles (10 us = 1000)", max_lat));
    $display("transitions %0d, held decisions %0d, longest transition %0d cycles", trans_count, n_held, max_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
