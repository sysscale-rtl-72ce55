// tb_sysscale_mrc_loader: the loader reads a real MRC SRAM instance; for each
// operating point the testbench checks that every configuration register is
// written exactly once, in order, with that point's value, and that the load
// takes NUM_CR + 2 cycles from start to done (under 1 us at 100 MHz).
module tb_sysscale_mrc_loader;
  localparam int NOP = 2, NCR = 64, DW = 32, AW = $clog2(NOP * NCR), CW = $clog2(NCR);
  logic clk = 0, rst_n = 0;
  logic we, start, busy, done, sram_re, cr_we;
  logic [AW-1:0] waddr, sram_raddr;
  logic [DW-1:0] wdata, sram_rdata, cr_data;
  logic [CW-1:0] cr_addr;
  logic [0:0] op;
  int checks = 0, failures = 0;
  logic [DW-1:0] regs [NCR];
  int nwrites, next_idx;
  bit order_ok;

  always #5 clk = ~clk;
  sysscale_mrc_sram #(.NUM_OP(NOP), .NUM_CR(NCR), .DW(DW)) u_sram (
    .clk, .we, .waddr, .wdata, .re(sram_re), .raddr(sram_raddr), .rdata(sram_rdata));
  sysscale_mrc_loader #(.NUM_OP(NOP), .NUM_CR(NCR), .DW(DW)) dut (.*);

  function automatic logic [DW-1:0] pat(input int a);
    return DW'(32'hA5A5_0000 + a * 7919) ^ DW'(a << 24);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // model of the MC/DDRIO/DRAM configuration registers
  always @(posedge clk) if (cr_we) begin
    regs[cr_addr] <= cr_data;
    if (int'(cr_addr) != next_idx) order_ok = 0;
    next_idx++;
    nwrites++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; start = 0; op = 0;
    for (int c = 0; c < NCR; c++) regs[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NOP * NCR; a++) begin
      @(negedge clk) we = 1; waddr = AW'(a); wdata = pat(a);
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < 6; t++) begin
      int p, cyc;
      p = t % NOP;
      nwrites = 0; next_idx = 0; order_ok = 1;
      @(negedge clk) start = 1; op = 1'(p);
      cyc = 1;
      @(negedge clk) start = 0;
      // a second start while busy must be ignored
      start = 1; op = 1'(1 - p);
      @(negedge clk) start = 0;
      cyc += 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == NCR + 2, $sformatf("load took %0d cycles", cyc));
      check(cyc <= 100, "load under 1 us at 100 MHz");
      @(negedge clk);
      check(!busy, "idle after done");
      check(nwrites == NCR, $sformatf("%0d register writes", nwrites));
      check(order_ok, "registers written in order");
      for (int c = 0; c < NCR; c++)
        check(regs[c] == pat(p * NCR + c), $sformatf("op %0d reg %0d", p, c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
