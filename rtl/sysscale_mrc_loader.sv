// sysscale_mrc_loader: copies one operating point's MRC values into the
// memory-subsystem configuration registers.
//
// During step 5 of the transition flow (DRAM already in self-refresh) the
// configuration registers of the memory controller, the DDRIO and the DRAM
// must take the values optimized for the new DRAM frequency. On `start` the
// loader reads the NUM_CR words of point `op` from sysscale_mrc_sram in
// order and issues one register write per word on the CR write bus
// (cr_we, cr_addr = register index 0..NUM_CR-1, cr_data). Which unit
// (MC, DDRIO or DRAM mode register) decodes each index is left to those
// units; this sequential copy is the simplest loader that does what the paper
// asks and is this design's choice.
//
// Timing: reads are pipelined one per cycle; the first write appears two
// cycles after `start`, the last NUM_CR+1 cycles after it, and `done` pulses
// with the last write (NUM_CR+2 cycles from start to done inclusive). At
// 100 MHz and 64 registers that is well inside the paper's "less than 1 us".
// `start` while busy is ignored.
module sysscale_mrc_loader #(
  parameter int unsigned NUM_OP = sysscale_pkg::NUM_OP,
  parameter int unsigned NUM_CR = 64,
  parameter int unsigned DW     = 32,
  localparam int unsigned AW    = $clog2(NUM_OP * NUM_CR),
  localparam int unsigned CW    = $clog2(NUM_CR),
  localparam int unsigned OW    = (NUM_OP > 1) ? $clog2(NUM_OP) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [OW-1:0] op,
  output logic          busy,
  output logic          done,
  // SRAM read port
  output logic          sram_re,
  output logic [AW-1:0] sram_raddr,
  input  logic [DW-1:0] sram_rdata,
  // configuration-register write bus
  output logic          cr_we,
  output logic [CW-1:0] cr_addr,
  output logic [DW-1:0] cr_data
);

  logic [CW:0]   rd_idx;       // next register to read
  logic [AW-1:0] base;
  logic          rd_pend;      // a read was issued last cycle
  logic [CW-1:0] rd_pend_idx;
  logic          last_pend;

  assign sram_re    = busy && (rd_idx < (CW+1)'(NUM_CR));
  assign sram_raddr = base + AW'(rd_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      rd_idx      <= '0;
      base        <= '0;
      rd_pend     <= 1'b0;
      rd_pend_idx <= '0;
      last_pend   <= 1'b0;
      cr_we       <= 1'b0;
      cr_addr     <= '0;
      cr_data     <= '0;
      done        <= 1'b0;
    end else begin
      done  <= 1'b0;
      cr_we <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        rd_idx <= '0;
        base   <= AW'(op) * AW'(NUM_CR);
      end
      rd_pend <= sram_re;
      if (sram_re) begin
        rd_pend_idx <= CW'(rd_idx);
        last_pend   <= (rd_idx == (CW+1)'(NUM_CR - 1));
        rd_idx      <= rd_idx + 1'b1;
      end
      if (rd_pend) begin
        cr_we   <= 1'b1;
        cr_addr <= rd_pend_idx;
        cr_data <= sram_rdata;
        if (last_pend) begin
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end

endmodule
