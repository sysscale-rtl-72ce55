// tb_pll_model: behavioural model of the IO-interconnect and memory PLL/DLL
// relock for the testbenches. After pll_req rises the clocks are unlocked for
// LOCK_CYCLES, then pll_ack is high until pll_req falls; the frequencies
// applied are captured at lock.
module tb_pll_model #(
  parameter int LOCK_CYCLES = 50
) (
  input  logic        clk,
  input  logic        pll_req,
  input  logic [15:0] dram_mhz,
  input  logic [15:0] ic_mhz,
  output logic        pll_ack,
  output int          cur_dram_mhz,
  output int          cur_ic_mhz,
  output int          relocks,
  output int          busy_cycles
);
  int cnt;
  initial begin cnt = 0; pll_ack = 0; cur_dram_mhz = 1600; cur_ic_mhz = 800; relocks = 0; busy_cycles = 0; end
  always @(posedge clk) begin
    if (!pll_req) begin
      cnt <= 0; pll_ack <= 0;
    end else if (!pll_ack) begin
      busy_cycles++;
      if (cnt == LOCK_CYCLES - 1) begin
        pll_ack <= 1; cur_dram_mhz <= dram_mhz; cur_ic_mhz <= ic_mhz; relocks++;
      end
      cnt <= cnt + 1;
    end
  end
endmodule
