// tb_vr_model: behavioural model of the V_SA and V_IO voltage regulators for
// the testbenches. Both rails slew toward their targets in parallel at
// SLEW_MV_PER_US (50 mV/us, the slew rate quoted for the paper's system) with
// a CLK_MHZ clock; vr_ack is high while vr_req is high and both rails have
// reached their targets. Voltages are tracked in units of 1/1000 mV.
module tb_vr_model #(
  parameter int CLK_MHZ        = 100,
  parameter int SLEW_MV_PER_US = 50,
  parameter int INIT_VSA_MV    = 500,
  parameter int INIT_VIO_MV    = 667
) (
  input  logic        clk,
  input  logic        vr_req,
  input  logic [11:0] vsa_target_mv,
  input  logic [11:0] vio_target_mv,
  output logic        vr_ack,
  output int          vsa_uv,
  output int          vio_uv,
  output int          busy_cycles     // cycles spent slewing, all requests together
);
  localparam int STEP = SLEW_MV_PER_US * 1000 / CLK_MHZ;   // microvolts per cycle
  initial begin vsa_uv = INIT_VSA_MV * 1000; vio_uv = INIT_VIO_MV * 1000; busy_cycles = 0; end

  function automatic int toward(input int v, input int t);
    if (v < t) return (t - v > STEP) ? v + STEP : t;
    if (v > t) return (v - t > STEP) ? v - STEP : t;
    return v;
  endfunction

  always @(posedge clk) if (vr_req) begin
    if (vsa_uv != vsa_target_mv * 1000 || vio_uv != vio_target_mv * 1000) busy_cycles++;
    vsa_uv <= toward(vsa_uv, int'(vsa_target_mv) * 1000);
    vio_uv <= toward(vio_uv, int'(vio_target_mv) * 1000);
  end
  assign vr_ack = vr_req && vsa_uv == int'(vsa_target_mv) * 1000 && vio_uv == int'(vio_target_mv) * 1000;
endmodule
