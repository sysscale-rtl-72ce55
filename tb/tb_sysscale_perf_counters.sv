// tb_sysscale_perf_counters: self-checking test of the four SysScale counters.
// Random events and random window lengths are driven; a reference count kept
// in the testbench is compared with each closed window, and the one-cycle
// sample_valid latency is checked.
module tb_sysscale_perf_counters;
  import sysscale_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] gfx_llc_miss;
  logic [5:0] llc_occupancy;
  logic llc_stall, io_rpq_stall, sample, sample_valid;
  perf_sample_t sample_o;
  int checks = 0, failures = 0;
  longint ref_g, ref_o, ref_s, ref_i;

  always #5 clk = ~clk;

  sysscale_perf_counters dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gfx_llc_miss = 0; llc_occupancy = 0; llc_stall = 0; io_rpq_stall = 0; sample = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 60; w++) begin
      int len;
      len = 1 + ($urandom % 400);
      ref_g = 0; ref_o = 0; ref_s = 0; ref_i = 0;
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        gfx_llc_miss  = 2'($urandom);
        llc_occupancy = 6'($urandom);
        llc_stall     = 1'($urandom);
        io_rpq_stall  = ($urandom % 4) == 0;
        sample        = (c == len - 1);
        ref_g += gfx_llc_miss; ref_o += llc_occupancy; ref_s += llc_stall; ref_i += io_rpq_stall;
      end
      @(negedge clk);
      sample = 0; gfx_llc_miss = 0; llc_occupancy = 0; llc_stall = 0; io_rpq_stall = 0;
      check(sample_valid, "sample_valid one cycle after sample");
      check(sample_o.gfx_llc_misses == 32'(ref_g), $sformatf("gfx %0d vs %0d", sample_o.gfx_llc_misses, ref_g));
      check(sample_o.llc_occupancy  == 32'(ref_o), $sformatf("occ %0d vs %0d", sample_o.llc_occupancy, ref_o));
      check(sample_o.llc_stalls     == 32'(ref_s), $sformatf("stall %0d vs %0d", sample_o.llc_stalls, ref_s));
      check(sample_o.io_rpq         == 32'(ref_i), $sformatf("rpq %0d vs %0d", sample_o.io_rpq, ref_i));
      // the window just closed must not leak into the next one: that cycle had no events
      @(negedge clk);
      check(!sample_valid, "sample_valid is a single pulse");
      sample = 1;
      @(negedge clk);
      sample = 0;
      check(sample_o.gfx_llc_misses == 0 && sample_o.llc_stalls == 0, "counters restart after a sample");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
