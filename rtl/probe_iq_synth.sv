// probe_iq_synth: maps the sweep phases of both polarizations to the four DAC
// sample streams that drive the dual-polarization IQ modulator.
//
// For every DAC sample the I channel carries cos(phase) and the Q channel
// sin(phase), so each polarization is a single-sideband tone of constant
// envelope: the optical probe moves in frequency but never in power. The X
// and Y polarizations each get their own phase from a chirp_phase_gen.
// One cordic_sincos per lane and polarization (2*LANES in all) does the
// conversion, using the top PIN bits of each phase.
//
// Interface: `phase_x`/`phase_y` carry LANES consecutive samples per clock,
// lane 0 first in time. Outputs are LANES 14-bit two's-complement samples per
// channel, lane 0 first. Timing: latency LAT = ITER + 2 clocks for data,
// `valid` and the `sweep_start` marker alike; one group per clock.
module probe_iq_synth
  import ofdr_pkg::*;
#(
  parameter int unsigned LANES = DAC_LANES,
  parameter int unsigned PW    = PHASE_W,
  parameter int unsigned OW    = DAC_W,
  parameter int unsigned PIN   = 20,
  parameter int unsigned ITER  = 16,
  parameter int unsigned AMP   = 7800
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           valid_i,
  input  logic                           sweep_start_i,
  input  logic [LANES-1:0][PW-1:0]       phase_x,
  input  logic [LANES-1:0][PW-1:0]       phase_y,
  output logic                           valid_o,
  output logic                           sweep_start_o,
  output logic signed [LANES-1:0][OW-1:0] dac_xi,
  output logic signed [LANES-1:0][OW-1:0] dac_xq,
  output logic signed [LANES-1:0][OW-1:0] dac_yi,
  output logic signed [LANES-1:0][OW-1:0] dac_yq
);

  localparam int unsigned LAT = ITER + 2;

  logic [LANES-1:0] vx, vy;

  for (genvar m = 0; m < LANES; m++) begin : g_lane
    cordic_sincos #(.PIN(PIN), .OW(OW), .ITER(ITER), .AMP(AMP)) u_x (
      .clk, .rst_n, .vin(valid_i), .phase(phase_x[m][PW-1 -: PIN]),
      .vout(vx[m]), .cos_o(dac_xi[m]), .sin_o(dac_xq[m])
    );
    cordic_sincos #(.PIN(PIN), .OW(OW), .ITER(ITER), .AMP(AMP)) u_y (
      .clk, .rst_n, .vin(valid_i), .phase(phase_y[m][PW-1 -: PIN]),
      .vout(vy[m]), .cos_o(dac_yi[m]), .sin_o(dac_yq[m])
    );
  end

  assign valid_o = vx[0];

  // sweep_start marker delayed to match the CORDIC pipelines.
  logic [LAT-1:0] ss_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ss_pipe <= '0;
    else        ss_pipe <= {ss_pipe[LAT-2:0], sweep_start_i};
  end
  assign sweep_start_o = ss_pipe[LAT-1];

  // Every lane sees the same valid, so the lane pipelines stay in step.
  a_lanes_in_step: assert property (
    @(posedge clk) disable iff (!rst_n) vx == {LANES{vx[0]}} && vy == vx)
    else $error("probe_iq_synth: lane pipelines out of step");

endmodule
