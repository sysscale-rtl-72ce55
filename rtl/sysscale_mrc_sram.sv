// sysscale_mrc_sram: on-chip SRAM for the optimized MRC register values.
//
// Memory reference code (MRC) training produces the configuration-register
// values of the memory controller, the DRAM interface (DDRIO) and the DRAM
// mode registers that are best for one DRAM frequency. SysScale runs the
// training at reset for every supported frequency and keeps the results in
// about 0.5 KB of SRAM, from which the transition flow reloads them. This
// block is that SRAM, written as an array: NUM_OP x NUM_CR words of 32 bits,
// 2 x 64 x 32 bits = 512 bytes by default. The 0.5 KB size is the paper's;
// the split into 64 registers of 32 bits per point is this design's.
//
// Word address = op * NUM_CR + cr. One write port (filled at reset by the
// MRC training) and one read port with one cycle of latency.
module sysscale_mrc_sram #(
  parameter int unsigned NUM_OP = sysscale_pkg::NUM_OP,
  parameter int unsigned NUM_CR = 64,
  parameter int unsigned DW     = 32,
  localparam int unsigned AW    = $clog2(NUM_OP * NUM_CR)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [NUM_OP * NUM_CR];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
