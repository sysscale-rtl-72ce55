// tb_dram_sr_model: behavioural model of DRAM self-refresh entry and exit as
// seen through the memory controller. dram_sr_ack follows dram_sr_req after
// ENTER_CYCLES (entry) or EXIT_CYCLES (exit; the paper quotes under 5 us with
// fast training). A request reaching the memory controller while the DRAM is
// in or entering self-refresh is counted as a violation.
module tb_dram_sr_model #(
  parameter int ENTER_CYCLES = 20,
  parameter int EXIT_CYCLES  = 450
) (
  input  logic clk,
  input  logic dram_sr_req,
  input  logic traffic,
  output logic dram_sr_ack,
  output int   entries,
  output int   violations,
  output int   busy_cycles
);
  int cnt;
  initial begin cnt = 0; dram_sr_ack = 0; entries = 0; violations = 0; busy_cycles = 0; end
  always @(posedge clk) begin
    if ((dram_sr_req || dram_sr_ack) && traffic) violations++;
    if (dram_sr_req != dram_sr_ack) begin
      busy_cycles++;
      if (cnt == (dram_sr_req ? ENTER_CYCLES : EXIT_CYCLES) - 1) begin
        dram_sr_ack <= dram_sr_req;
        if (dram_sr_req) entries++;
        cnt <= 0;
      end else cnt <= cnt + 1;
    end else cnt <= 0;
  end
endmodule
