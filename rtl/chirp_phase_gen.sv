// chirp_phase_gen: phase of a linear frequency sweep, LANES samples per clock.
//
// The probe is a tone whose frequency ramps linearly from f_start by `chirp`
// per DAC sample, then jumps back to f_start after `sweep_cycles` clocks (a
// sawtooth sweep). The phase stays continuous across the jump, so the probe
// keeps constant power and has no phase steps. With the defaults of ofdr_pkg
// the sweep covers 437.5..562.5 MHz, i.e. 125 MHz centred on a 500 MHz
// intermediate frequency, at 6 GS/s; the sweep shape, its period and the
// fixed-point format are this design's choices.
//
// The generator keeps three registers: the sweep cycle count, the frequency
// word F of lane 0 and the phase P of lane 0. Lane m of the current clock has
//     phase[m] = P + m*F + chirp*m*(m-1)/2
// and the next clock starts with
//     P' = P + LANES*F + chirp*LANES*(LANES-1)/2,  F' = F + LANES*chirp.
// All arithmetic is modulo 2^PW (one full turn).
//
// Interface: while `en` is low the state is loaded so that the sweep begins
// at cycle `start_cycle` of the period (phase 0); a second instance with a
// different start_cycle gives a sweep offset in time. While `en` is high a
// new group of LANES phases appears every clock, one clock after the state it
// was computed from: `valid` and `sweep_start` (the group holding the first
// sample of a sweep) are aligned with `phase`. Configuration must be stable
// while `en` is high.
module chirp_phase_gen
  import ofdr_pkg::*;
#(
  parameter int unsigned LANES = DAC_LANES,
  parameter int unsigned PW    = PHASE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic [PW-1:0]       f_start,
  input  logic [PW-1:0]       chirp,
  input  logic [31:0]         sweep_cycles,
  input  logic [31:0]         start_cycle,
  output logic                valid,
  output logic                sweep_start,
  output logic [LANES-1:0][PW-1:0] phase
);

  localparam logic [PW-1:0] LANES_W = PW'(LANES);
  localparam int unsigned   TRI_LI  = LANES * (LANES - 1) / 2;
  localparam logic [PW-1:0] TRI_L   = PW'(TRI_LI);

  // m*(m-1)/2: the chirp contribution of lane m, in samples squared.
  function automatic int unsigned tri_num(input int unsigned m);
    return (m == 0) ? 0 : m * (m - 1) / 2;
  endfunction

  logic [31:0]   cnt;
  logic [PW-1:0] f_q, p_q;
  logic [PW-1:0] step_f;        // frequency advance per clock
  logic [PW-1:0] f_load;

  assign step_f = PW'(chirp * LANES_W);
  assign f_load = PW'(f_start + PW'(step_f * PW'(start_cycle)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      f_q <= '0;
      p_q <= '0;
    end else if (!en) begin
      cnt <= start_cycle;
      f_q <= f_load;
      p_q <= '0;
    end else begin
      p_q <= PW'(p_q + PW'(LANES_W * f_q) + PW'(chirp * TRI_L));
      if (cnt >= sweep_cycles - 32'd1) begin
        cnt <= '0;
        f_q <= f_start;
      end else begin
        cnt <= cnt + 32'd1;
        f_q <= PW'(f_q + step_f);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid       <= 1'b0;
      sweep_start <= 1'b0;
      phase       <= '0;
    end else begin
      valid       <= en;
      sweep_start <= en && (cnt == 32'd0);
      for (int unsigned m = 0; m < LANES; m++) begin
        phase[m] <= PW'(p_q + PW'(PW'(m) * f_q) + PW'(chirp * PW'(tri_num(m))));
      end
    end
  end

endmodule
