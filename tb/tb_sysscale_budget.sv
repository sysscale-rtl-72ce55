// tb_sysscale_budget: checks the IO, memory and compute budgets for each
// operating point against TDP minus the IO and memory budgets, including the
// clamp at zero, the one-cycle latency and the `changed` pulse.
module tb_sysscale_budget;
  import sysscale_pkg::*;
  logic clk = 0, rst_n = 0;
  op_idx_t op;
  logic [PWR_W-1:0] tdp_mw, io_budget_mw, mem_budget_mw, compute_budget_mw;
  logic [PWR_W-1:0] io_budget_tbl [NUM_OP];
  logic [PWR_W-1:0] mem_budget_tbl [NUM_OP];
  logic changed;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  sysscale_budget dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev;
    op = 0; tdp_mw = 4500;
    io_budget_tbl  = '{16'd600, 16'd450};
    mem_budget_tbl = '{16'd900, 16'd700};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(compute_budget_mw == 4500 - 1500, "high point: 4.5 W - 1.5 W");
    op = 1;
    @(negedge clk);
    check(compute_budget_mw == 4500 - 1150, "low point: freed budget goes to compute");
    check(io_budget_mw == 450 && mem_budget_mw == 700, "IO and memory budgets at the low point");
    check(changed, "changed pulse");
    @(negedge clk);
    check(!changed, "changed is a pulse");
    // desktop end of the TDP range: 91 W
    tdp_mw = 17'd91000; io_budget_tbl[1] = 17'd5000; mem_budget_tbl[1] = 17'd6000;
    @(negedge clk);
    check(compute_budget_mw == 91000 - 11000, "91 W TDP fits the budget width");
    prev = compute_budget_mw;
    for (int n = 0; n < 3000; n++) begin
      int io, mem, tdp, exp;
      @(negedge clk);
      op = op_idx_t'($urandom % NUM_OP);
      tdp = $urandom % 131072; io = $urandom % 80000; mem = $urandom % 80000;
      if (n % 2 == 0) begin tdp = 3500 + $urandom % 4000; io = $urandom % 1500; mem = $urandom % 1500; end
      tdp_mw = PWR_W'(tdp);
      io_budget_tbl[op] = PWR_W'(io); mem_budget_tbl[op] = PWR_W'(mem);
      exp = (tdp > io + mem) ? tdp - io - mem : 0;
      #1 check(int'(compute_budget_mw) == prev, "registered output");
      @(negedge clk);
      check(int'(compute_budget_mw) == exp, $sformatf("tdp %0d io %0d mem %0d: %0d vs %0d", tdp, io, mem, compute_budget_mw, exp));
      check(int'(io_budget_mw) == io && int'(mem_budget_mw) == mem, "IO and memory budgets");
      check(changed == (exp != prev), "changed flag");
      prev = exp;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
