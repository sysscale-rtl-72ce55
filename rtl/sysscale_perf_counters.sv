// sysscale_perf_counters: the four performance counters SysScale adds to the SoC.
//
// GFX_LLC_MISSES counts LLC misses caused by the graphics engines (bandwidth
// demand of graphics). LLC_Occupancy_Tracer tracks how many CPU requests wait
// for data from the memory controller (CPU cores bandwidth-limited).
// LLC_STALLS counts stalls on a busy LLC (memory-latency-limited).
// IO_RPQ counts stalls on a full IO read pending queue (IO-limited).
// The counter names and meanings follow the paper; how each is accumulated is
// this design's choice: the occupancy tracer adds the current occupancy every
// cycle (an occupancy integral), the others add the events of the cycle.
//
// Interface: the event inputs are sampled every cycle. A one-cycle pulse on
// `sample` closes the window: the counts up to and including that cycle
// appear on `sample_o` with `sample_valid` one cycle later, and counting
// restarts from zero in the next cycle. Counters saturate instead of wrapping.
module sysscale_perf_counters
  import sysscale_pkg::*;
#(
  parameter int unsigned MISS_W = 2,   // graphics LLC misses reported per cycle (0..3)
  parameter int unsigned OCC_W  = 6    // CPU requests outstanding at the MC (0..63)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [MISS_W-1:0] gfx_llc_miss,    // graphics LLC misses this cycle
  input  logic [OCC_W-1:0]  llc_occupancy,   // CPU requests waiting on the MC now
  input  logic              llc_stall,       // a request stalled on a busy LLC this cycle
  input  logic              io_rpq_stall,    // an IO request stalled on a full RPQ this cycle
  input  logic              sample,          // close the window
  output perf_sample_t      sample_o,
  output logic              sample_valid
);

  perf_sample_t cnt, nxt;

  function automatic logic [CNT_W-1:0] sat_add(input logic [CNT_W-1:0] a,
                                               input logic [CNT_W-1:0] b);
    logic [CNT_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[CNT_W] ? '1 : s[CNT_W-1:0];
  endfunction

  always_comb begin
    nxt.gfx_llc_misses = sat_add(cnt.gfx_llc_misses, CNT_W'(gfx_llc_miss));
    nxt.llc_occupancy  = sat_add(cnt.llc_occupancy,  CNT_W'(llc_occupancy));
    nxt.llc_stalls     = sat_add(cnt.llc_stalls,     CNT_W'(llc_stall));
    nxt.io_rpq         = sat_add(cnt.io_rpq,         CNT_W'(io_rpq_stall));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt          <= '0;
      sample_o     <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= sample;
      if (sample) begin
        sample_o <= nxt;
        cnt      <= '0;
      end else begin
        cnt      <= nxt;
      end
    end
  end

endmodule
