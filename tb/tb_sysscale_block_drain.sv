// tb_sysscale_block_drain: random requests flow through the gate to a
// destination that completes them after random delays. The testbench blocks
// the path at random times and checks that nothing passes while blocked,
// that `drained` rises exactly when the last outstanding request completes,
// that payloads pass unchanged, and that the in-flight count matches.
module tb_sysscale_block_drain;
  localparam int DW = 16, OW = 4;
  logic clk = 0, rst_n = 0;
  logic block, drained, src_valid, src_ready, dst_valid, dst_ready, cpl;
  logic [OW-1:0] outstanding;
  logic [DW-1:0] src_data, dst_data;
  int checks = 0, failures = 0;
  int inflight = 0, drains = 0, fulls = 0;
  int pend_q[$];

  always #5 clk = ~clk;
  sysscale_block_drain #(.DW(DW), .OUTST_W(OW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // destination: completes the oldest request after a random delay
  int delay = 0;
  always @(negedge clk) if (rst_n) begin
    cpl = 0;
    if (inflight > 0) begin
      if (delay == 0) begin cpl = 1; delay = $urandom % 8; end
      else delay--;
    end
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (block && dst_valid) begin failures++; $display("FAIL request passed while blocked"); end
    if (dst_valid && dst_data != src_data) begin failures++; $display("FAIL payload changed"); end
    if (int'(outstanding) != inflight) begin failures++; $display("FAIL outstanding %0d vs %0d", outstanding, inflight); end
    if (drained != (block && inflight == 0)) begin failures++; $display("FAIL drained=%0d block=%0d inflight=%0d", drained, block, inflight); end
    if (&outstanding) fulls++;
    inflight += (dst_valid && dst_ready) - cpl;
  end

  initial begin
    block = 0; src_valid = 0; src_data = 0; dst_ready = 0; cpl = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      #1;
      src_valid = ($urandom % 3) != 0;
      src_data  = DW'($urandom);
      dst_ready = ($urandom % 4) != 0;
      if (n % 500 == 100) block = 1;
      if (block && drained) begin
        drains++;
        if ($urandom % 4 == 0) block = 0;
      end
      if (n % 500 == 499) block = 0;
    end
    check(drains > 10, $sformatf("drain completed %0d times", drains));
    check(fulls > 0, "outstanding limit reached");
    $display("drains %0d, cycles at limit %0d", drains, fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
