// tb_sysscale_static_demand: fills the static-demand table with a display and
// camera bandwidth formula, then walks configurations and checks the lookup
// value and its one-cycle latency.
module tb_sysscale_static_demand;
  import sysscale_pkg::*;
  logic clk = 0, rst_n = 0;
  logic tbl_we;
  logic [CFG_W-1:0] tbl_addr;
  logic [BW_W-1:0] tbl_wdata, static_bw;
  periph_cfg_t cfg;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  sysscale_static_demand dut (.*);

  // MB/s of one configuration: displays x pixels x refresh x 4 bytes, plus cameras.
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

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tbl_we = 0; tbl_addr = 0; tbl_wdata = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 2 ** CFG_W; a++) begin
      @(negedge clk);
      tbl_we = 1; tbl_addr = CFG_W'(a); tbl_wdata = BW_W'(demand(periph_cfg_t'(a)));
    end
    @(negedge clk) tbl_we = 0;
    for (int n = 0; n < 600; n++) begin
      periph_cfg_t c;
      c = (n < 256) ? periph_cfg_t'(n) : periph_cfg_t'($urandom);
      @(negedge clk) cfg = c;
      @(negedge clk);
      check(static_bw == BW_W'(demand(c)), $sformatf("cfg %h: %0d vs %0d", c, static_bw, demand(c)));
    end
    // three panels need three times the bandwidth of one (4K, 60 Hz)
    @(negedge clk) cfg = '{num_displays: 2'd1, disp_res: 2'd3, disp_refresh: 1'b0, num_cameras: 2'd0, cam_res: 1'b0};
    @(negedge clk);
    begin
      int unsigned one;
      one = static_bw;
      cfg.num_displays = 2'd3;
      @(negedge clk);
      check(static_bw >= 3 * one - 2 && static_bw <= 3 * one + 2, "three displays ~ 3x one display");
    end
    // latency: a change of cfg shows one clock later, not in the same cycle
    @(negedge clk) cfg = '0;
    @(negedge clk) cfg = periph_cfg_t'(8'hff);
    #1 check(static_bw == BW_W'(demand('0)), "old value until the next edge");
    @(negedge clk);
    check(static_bw == BW_W'(demand(periph_cfg_t'(8'hff))), "new value after one edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
