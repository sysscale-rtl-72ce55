// sysscale_static_demand: static bandwidth-demand table.
//
// The static demand of the IO and memory domains depends only on the
// peripheral configuration (number of active displays, their resolution and
// refresh rate, active cameras), which software changes every few tens of
// milliseconds. SysScale keeps a table that maps every configuration to its
// bandwidth demand; the paper keeps it in PMU firmware, here it is a small
// RAM with one entry per encoding of periph_cfg_t (2^CFG_W = 256 entries of
// 16 bits, in MB/s). Firmware fills it through the write port (for example
// with displays x pixels x refresh x 4 bytes, plus the ISP streams); the read
// side looks up the current CSR configuration every cycle.
//
// Timing: `static_bw` is registered, valid one cycle after `cfg` changes
// (or after a write to the entry `cfg` selects). Reset does not clear the
// RAM: firmware must write every entry that can be selected.
module sysscale_static_demand
  import sysscale_pkg::*;
#(
  parameter int unsigned DEPTH = 2 ** CFG_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // firmware programming port
  input  logic                     tbl_we,
  input  logic [$clog2(DEPTH)-1:0] tbl_addr,
  input  logic [BW_W-1:0]          tbl_wdata,
  // current peripheral configuration from the CSRs
  input  periph_cfg_t              cfg,
  output logic [BW_W-1:0]          static_bw
);

  logic [BW_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (tbl_we) mem[tbl_addr] <= tbl_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) static_bw <= '0;
    else        static_bw <= mem[$clog2(DEPTH)'(cfg)];
  end

endmodule
