// sysscale_pkg: types and constants shared by the SysScale power-management blocks.
//
// SysScale scales the voltage and frequency of the IO and memory domains of a
// mobile SoC together, based on predicted demand, and hands the power saved
// to the compute domain. This package holds:
//   * the operating-point descriptor and the default operating-point table
//     (index 0 = high-performance point, higher index = lower performance),
//   * the counter sample and threshold bundles used between the counters,
//     the sampler and the demand predictor,
//   * the state encoding of the nine-step transition flow.
// The two operating points (DRAM 1.6 GHz / 1.06 GHz, IO interconnect
// 0.8 GHz / 0.4 GHz, V_SA scaled to 0.8x and V_IO to 0.85x, MC clock at half
// the DDR rate) follow the paper. The paper gives no absolute voltages; the
// nominal V_SA = 500 mV and V_IO = 667 mV are chosen so that the 0.8x and
// 0.85x points are both about 100 mV lower, the swing the paper quotes for
// its transition-time estimate. All bit widths are this design's choices.
package sysscale_pkg;

  // Number of DVFS operating points. The paper's system implements two.
  localparam int unsigned NUM_OP  = 2;
  localparam int unsigned OP_W    = (NUM_OP > 1) ? $clog2(NUM_OP) : 1;

  // Width of one counter sample (one sample window) and of the sum over an
  // evaluation interval.
  localparam int unsigned CNT_W   = 32;
  localparam int unsigned SUM_W   = 40;
  localparam int unsigned EVAL_W  = 8;     // samples per evaluation interval, up to 255
  // Static bandwidth demand, in MB/s.
  localparam int unsigned BW_W    = 16;
  // Power budgets, in mW.
  localparam int unsigned PWR_W   = 17;   // up to 131 W, covers the 91 W top of the Skylake TDP range

  typedef logic [OP_W-1:0] op_idx_t;

  // One DVFS operating point of the IO and memory domains.
  typedef struct packed {
    logic [15:0] dram_mhz;   // DRAM data rate (LPDDR3 "frequency" as the paper quotes it)
    logic [15:0] mc_mhz;     // memory controller clock, half the DDR rate
    logic [15:0] ic_mhz;     // IO interconnect clock
    logic [11:0] vsa_mv;     // shared V_SA rail (IO engines, IO interconnect, MC)
    logic [11:0] vio_mv;     // V_IO rail (DDRIO digital, display/ISP IO)
  } op_point_t;

  // Default operating-point table (Table 1 of the paper: baseline vs MD-DVFS).
  function automatic op_point_t default_op(input int unsigned idx);
    op_point_t p;
    case (idx)
      0:       p = '{dram_mhz: 16'd1600, mc_mhz: 16'd800, ic_mhz: 16'd800,
                     vsa_mv: 12'd500,  vio_mv: 12'd667};
      default: p = '{dram_mhz: 16'd1066, mc_mhz: 16'd533, ic_mhz: 16'd400,
                     vsa_mv: 12'd400,  vio_mv: 12'd567};
    endcase
    return p;
  endfunction

  // The four SysScale performance counters, one value each.
  typedef struct packed {
    logic [CNT_W-1:0] gfx_llc_misses;   // LLC misses caused by graphics
    logic [CNT_W-1:0] llc_occupancy;    // CPU requests waiting on the MC, summed per cycle
    logic [CNT_W-1:0] llc_stalls;       // cycles stalled on a busy LLC
    logic [CNT_W-1:0] io_rpq;           // cycles stalled on a full IO read pending queue
  } perf_sample_t;

  // The same four counters summed over an evaluation interval.
  typedef struct packed {
    logic [SUM_W-1:0] gfx_llc_misses;
    logic [SUM_W-1:0] llc_occupancy;
    logic [SUM_W-1:0] llc_stalls;
    logic [SUM_W-1:0] io_rpq;
  } perf_sum_t;

  // Thresholds for one boundary between adjacent operating points. Counter
  // thresholds are per-sample averages (the paper's mu + sigma).
  typedef struct packed {
    logic [BW_W-1:0]  static_bw;   // STATIC_BW_THR
    logic [CNT_W-1:0] gfx;         // GFX_THR
    logic [CNT_W-1:0] core;        // Core_THR
    logic [CNT_W-1:0] lat;         // LAT_THR
    logic [CNT_W-1:0] io;          // IO_THR
  } thr_t;

  // Peripheral configuration as read from the display engine and ISP CSRs.
  // All active displays are assumed to share one mode.
  typedef struct packed {
    logic [1:0] num_displays;   // 0..3 active display panels
    logic [1:0] disp_res;       // 0: HD, 1: FHD, 2: QHD, 3: 4K
    logic       disp_refresh;   // 0: 60 Hz, 1: 120 Hz
    logic [1:0] num_cameras;    // 0..3 active cameras on the ISP
    logic       cam_res;        // 0: 1080p, 1: 4K capture
  } periph_cfg_t;

  localparam int unsigned CFG_W = $bits(periph_cfg_t);

  // Which of the five high-performance conditions fired.
  typedef struct packed {
    logic static_bw;
    logic gfx;
    logic core;
    logic lat;
    logic io;
  } cond_t;

  // Transition flow states; the numbers are the step numbers of the flow chart.
  typedef enum logic [3:0] {
    FLOW_IDLE     = 4'd1,   // 1: wait for the demand prediction mechanism
    FLOW_V_UP     = 4'd2,   // 2: raise V_SA and V_IO (frequency increase only)
    FLOW_DRAIN    = 4'd3,   // 3: block and drain IO interconnect and LLC->MC traffic
    FLOW_SR_ENTER = 4'd4,   // 4: DRAM enters self-refresh
    FLOW_MRC      = 4'd5,   // 5: load optimized MRC values from SRAM
    FLOW_RELOCK   = 4'd6,   // 6: relock PLLs/DLLs at the new frequencies
    FLOW_V_DOWN   = 4'd7,   // 7: lower V_SA and V_IO (frequency decrease only)
    FLOW_SR_EXIT  = 4'd8,   // 8: DRAM exits self-refresh
    FLOW_RELEASE  = 4'd9    // 9: release the IO interconnect and LLC->MC traffic
  } flow_state_t;

endpackage
