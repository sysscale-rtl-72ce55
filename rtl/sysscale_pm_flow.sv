// sysscale_pm_flow: the SysScale multi-domain DVFS transition sequencer.
//
// One transition moves the IO interconnect and the memory subsystem (MC,
// DDRIO, DRAM) from the current operating point to a new one, in the order of
// the paper's flow chart (state numbers = step numbers):
//   1 IDLE      wait for a new target from the demand predictor
//   2 V_UP      raise V_SA and V_IO first           (only if frequencies rise)
//   3 DRAIN     block and drain IO interconnect and LLC->MC traffic
//   4 SR_ENTER  put DRAM in self-refresh
//   5 MRC       load the optimized MRC values for the new DRAM frequency
//   6 RELOCK    relock PLLs/DLLs at the new frequencies
//   7 V_DOWN    lower V_SA and V_IO last            (only if frequencies fall)
//   8 SR_EXIT   take DRAM out of self-refresh
//   9 RELEASE   release the blocked traffic, back to 1
// The sequence and the rule "voltage up before the clocks rise, down after
// they fall" are the paper's. The handshakes with the outside are this
// design's choice:
//   * VRs and PLL/DLLs: request/acknowledge. vr_req (pll_req) is held high
//     with the targets stable until vr_ack (pll_ack) is seen, then dropped.
//   * DRAM self-refresh: dram_sr_req is a level (1 = be in self-refresh);
//     dram_sr_ack follows it once the DRAM has entered or left.
//   * Drain: block_req is a level from step 3 to step 8; `drained` from the
//     block-and-drain gates ends step 3.
//   * MRC load: one-cycle mrc_start with mrc_op, finished by mrc_done.
// A new target is taken only in IDLE and only if it differs from the current
// point. The paper scales the IO and memory domains only in package states
// where DRAM is active (C0 and C2; in C8 it is already in self-refresh), so
// while `dram_active` is low a decision is held (`held` high) and carried out
// as soon as DRAM is active again; a newer decision replaces a held one, and
// one for the current point cancels it. Holding rather than dropping it is
// this design's choice. Requests that arrive while a transition runs are
// ignored (the predictor decides only once per evaluation interval, far
// longer than a transition). Index 0 is the highest-performance point, so a
// lower target index means rising clocks.
//
// `budget_op` tells the budget block which point's IO/memory budget to
// grant: on the way up the higher budget is granted as the flow starts, on
// the way down the lower one only once the flow has finished, so the SoC is
// never over its TDP during a transition (this design's choice).
// `last_latency` holds the cycle count of the last transition, IDLE to IDLE.
//
// The assertions are switched off during reset (`disable iff (!rst_n)`),
// so a linter may report rst_n as used both asynchronously (flop reset) and
// synchronously (assertion sampling). Assertions are not synthesized, so the
// report stands as harmless.
module sysscale_pm_flow
  import sysscale_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  op_point_t   op_tbl [NUM_OP],
  // request from the demand predictor
  input  logic        req_valid,
  input  op_idx_t     req_op,
  input  logic        dram_active,
  // voltage regulators (V_SA, V_IO)
  output logic        vr_req,
  output logic [11:0] vsa_target_mv,
  output logic [11:0] vio_target_mv,
  input  logic        vr_ack,
  // block and drain
  output logic        block_req,
  input  logic        drained,
  // DRAM self-refresh
  output logic        dram_sr_req,
  input  logic        dram_sr_ack,
  // MRC reload
  output logic        mrc_start,
  output op_idx_t     mrc_op,
  input  logic        mrc_done,
  // PLL/DLL relock
  output logic        pll_req,
  output logic [15:0] dram_mhz,
  output logic [15:0] mc_mhz,
  output logic [15:0] ic_mhz,
  input  logic        pll_ack,
  // status
  output flow_state_t state,
  output logic        busy,
  output op_idx_t     cur_op,
  output op_idx_t     budget_op,
  output logic        held,
  output logic [31:0] trans_count,
  output logic [31:0] last_latency
);

  op_idx_t     tgt_op;
  logic        going_up;
  logic [31:0] lat_cnt;
  op_idx_t     pend_op;
  logic        want_valid;
  op_idx_t     want_op;

  // the newest decision, or the held one
  assign want_valid = req_valid || held;
  assign want_op    = req_valid ? req_op : pend_op;

  assign busy        = (state != FLOW_IDLE);
  assign vr_req      = (state == FLOW_V_UP) || (state == FLOW_V_DOWN);
  assign pll_req     = (state == FLOW_RELOCK);
  assign block_req   = (state == FLOW_DRAIN)  || (state == FLOW_SR_ENTER) ||
                       (state == FLOW_MRC)    || (state == FLOW_RELOCK)   ||
                       (state == FLOW_V_DOWN) || (state == FLOW_SR_EXIT);
  assign dram_sr_req = (state == FLOW_SR_ENTER) || (state == FLOW_MRC) ||
                       (state == FLOW_RELOCK)   || (state == FLOW_V_DOWN);
  assign mrc_op      = tgt_op;
  assign budget_op   = (busy && going_up) ? tgt_op : cur_op;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= FLOW_IDLE;
      cur_op        <= '0;
      tgt_op        <= '0;
      going_up      <= 1'b0;
      held          <= 1'b0;
      pend_op       <= '0;
      vsa_target_mv <= op_tbl[0].vsa_mv;
      vio_target_mv <= op_tbl[0].vio_mv;
      dram_mhz      <= op_tbl[0].dram_mhz;
      mc_mhz        <= op_tbl[0].mc_mhz;
      ic_mhz        <= op_tbl[0].ic_mhz;
      mrc_start     <= 1'b0;
      lat_cnt       <= '0;
      trans_count   <= '0;
      last_latency  <= '0;
    end else begin
      mrc_start <= 1'b0;
      if (busy) lat_cnt <= lat_cnt + 1'b1;
      unique case (state)
        FLOW_IDLE: begin
          lat_cnt <= 32'd1;
          if (want_valid && want_op == cur_op) begin
            held <= 1'b0;
          end else if (want_valid && !dram_active) begin
            held    <= 1'b1;
            pend_op <= want_op;
          end else if (want_valid) begin
            held     <= 1'b0;
            tgt_op   <= want_op;
            going_up <= (want_op < cur_op);
            if (want_op < cur_op) begin
              vsa_target_mv <= op_tbl[want_op].vsa_mv;
              vio_target_mv <= op_tbl[want_op].vio_mv;
              state         <= FLOW_V_UP;
            end else begin
              state         <= FLOW_DRAIN;
            end
          end
        end
        FLOW_V_UP:     if (vr_ack)  state <= FLOW_DRAIN;
        FLOW_DRAIN:    if (drained) state <= FLOW_SR_ENTER;
        FLOW_SR_ENTER: if (dram_sr_ack) begin
          mrc_start <= 1'b1;
          state     <= FLOW_MRC;
        end
        FLOW_MRC: if (mrc_done) begin
          dram_mhz <= op_tbl[tgt_op].dram_mhz;
          mc_mhz   <= op_tbl[tgt_op].mc_mhz;
          ic_mhz   <= op_tbl[tgt_op].ic_mhz;
          state    <= FLOW_RELOCK;
        end
        FLOW_RELOCK: if (pll_ack) begin
          if (going_up) begin
            state <= FLOW_SR_EXIT;
          end else begin
            vsa_target_mv <= op_tbl[tgt_op].vsa_mv;
            vio_target_mv <= op_tbl[tgt_op].vio_mv;
            state         <= FLOW_V_DOWN;
          end
        end
        FLOW_V_DOWN:  if (vr_ack)       state <= FLOW_SR_EXIT;
        FLOW_SR_EXIT: if (!dram_sr_ack) state <= FLOW_RELEASE;
        FLOW_RELEASE: begin
          cur_op       <= tgt_op;
          trans_count  <= trans_count + 1'b1;
          last_latency <= lat_cnt;
          state        <= FLOW_IDLE;
        end
        default: state <= FLOW_IDLE;
      endcase
    end
  end

  // DRAM is only put into self-refresh while the traffic to it is blocked.
  a_sr_blocked: assert property (@(posedge clk) disable iff (!rst_n)
    dram_sr_req |-> block_req);
  // Clocks are only relocked with DRAM in self-refresh.
  a_relock_in_sr: assert property (@(posedge clk) disable iff (!rst_n)
    pll_req |-> dram_sr_req);
  // A transition starts only with DRAM active.
  a_start_active: assert property (@(posedge clk) disable iff (!rst_n)
    (state == FLOW_IDLE) ##1 (state != FLOW_IDLE) |-> $past(dram_active));

endmodule
