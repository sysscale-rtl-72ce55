// sysscale_block_drain: block-and-drain gate on a request path.
//
// Before the clocks of the IO and memory domains can change, the transition
// flow must stop the IO interconnect and the LLC-to-memory-controller traffic:
// all outstanding requests complete, and no new request may enter until the
// flow releases the path. The paper requires the interconnect to support this
// but does not say how; this gate is this design's implementation. It sits
// on a valid/ready request channel and counts requests in flight: +1 for
// every request accepted downstream, -1 for every completion reported by
// the far side. While `block` is high no new request is passed (both
// dst_valid and src_ready are held low), and `drained` is high once the
// count reaches zero. Up to 2^OUTST_W - 1 requests may be in flight.
//
// Timing: `block` acts in the same cycle (combinational gate); `drained` is
// combinational from the registered count. One completion per cycle at most.
//
// The two assertions are switched off during reset (`disable iff (!rst_n)`),
// so a linter may report rst_n as used both asynchronously (flop reset) and
// synchronously (assertion sampling). Assertions are not synthesized, so the
// report stands as harmless.
module sysscale_block_drain #(
  parameter int unsigned DW      = 64,   // request payload width
  parameter int unsigned OUTST_W = 6     // outstanding-request counter width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          block,
  output logic          drained,
  output logic [OUTST_W-1:0] outstanding,
  // request from the source (IO engines or LLC)
  input  logic          src_valid,
  output logic          src_ready,
  input  logic [DW-1:0] src_data,
  // request toward the destination (memory controller)
  output logic          dst_valid,
  input  logic          dst_ready,
  output logic [DW-1:0] dst_data,
  // one request completed (response returned to the source)
  input  logic          cpl
);

  logic full, accept;

  assign full      = &outstanding;
  assign dst_valid = src_valid && !block && !full;
  assign src_ready = dst_ready && !block && !full;
  assign dst_data  = src_data;
  assign accept    = dst_valid && dst_ready;
  assign drained   = block && (outstanding == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              outstanding <= '0;
    else if (accept && !cpl) outstanding <= outstanding + 1'b1;
    else if (!accept && cpl) outstanding <= outstanding - 1'b1;
  end

  // A completion needs a request in flight.
  a_no_spurious_cpl: assert property (@(posedge clk) disable iff (!rst_n)
    cpl |-> (outstanding != '0 || accept));
  // Nothing enters while the path is blocked.
  a_blocked: assert property (@(posedge clk) disable iff (!rst_n)
    block |-> !dst_valid);

endmodule
