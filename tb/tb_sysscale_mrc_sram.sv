// tb_sysscale_mrc_sram: writes every word of the MRC SRAM with a pattern,
// reads it back in random order and checks data and one-cycle read latency,
// and that a read with `re` low keeps the last output.
module tb_sysscale_mrc_sram;
  localparam int NOP = 2, NCR = 64, DW = 32, AW = $clog2(NOP * NCR);
  logic clk = 0, we, re;
  logic [AW-1:0] waddr, raddr;
  logic [DW-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  sysscale_mrc_sram #(.NUM_OP(NOP), .NUM_CR(NCR), .DW(DW)) dut (.*);

  function automatic logic [DW-1:0] pat(input int a);
    return DW'(32'h9E37_79B9 * (a + 1)) ^ DW'(a << 20);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < NOP * NCR; a++) begin
      @(negedge clk) we = 1; waddr = AW'(a); wdata = pat(a);
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 500; n++) begin
      int a;
      a = $urandom % (NOP * NCR);
      @(negedge clk) re = 1; raddr = AW'(a);
      @(negedge clk) re = 0;
      check(rdata == pat(a), $sformatf("addr %0d: %h vs %h", a, rdata, pat(a)));
      raddr = AW'(a + 1);
      @(negedge clk);
      check(rdata == pat(a), "output held while re is low");
    end
    // overwrite one point's words and check the other point is untouched
    for (int c = 0; c < NCR; c++) begin
      @(negedge clk) we = 1; waddr = AW'(NCR + c); wdata = ~pat(NCR + c);
    end
    @(negedge clk) we = 0;
    for (int a = 0; a < NOP * NCR; a++) begin
      @(negedge clk) re = 1; raddr = AW'(a);
      @(negedge clk) re = 0;
      check(rdata == ((a >= NCR) ? ~pat(a) : pat(a)), $sformatf("after rewrite addr %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
