// cordic_sincos: pipelined CORDIC that turns a phase into (cos, sin) samples.
//
// The phase is a fraction of a full turn, PIN bits wide. Its two top bits pick
// the quadrant; the remaining bits (an angle in [0, 90) degrees) drive ITER
// CORDIC micro-rotations of the vector (AMP*K, 0), where K = 0.60725 cancels
// the CORDIC gain. The quadrant is then applied by swapping and negating, and
// the result is rounded from GB guard bits to OW-bit two's-complement samples.
// Output magnitude is AMP within about two LSB at any phase, so the vector
// (cos, sin) has constant length: this is what gives the probe constant power.
// The micro-rotation angles atan(2^-i) are given for a 20-bit turn.
//
// Timing: fully pipelined, one phase in and one (cos, sin) pair out per clock,
// latency ITER + 2 clocks. `vin` travels with the data to `vout`.
module cordic_sincos #(
  parameter int unsigned PIN  = 20,    // phase bits used (full turn = 2^PIN)
  parameter int unsigned OW   = 14,    // output sample width
  parameter int unsigned ITER = 16,    // micro-rotations (<= 16)
  parameter int unsigned AMP  = 7800,  // output amplitude in LSB (< 2^(OW-1))
  parameter int unsigned GB   = 3      // guard bits in the datapath
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 vin,
  input  logic [PIN-1:0]       phase,
  output logic                 vout,
  output logic signed [OW-1:0] cos_o,
  output logic signed [OW-1:0] sin_o
);

  localparam int unsigned ZW = 20;          // angle word: full turn = 2^20
  localparam int unsigned IW = OW + GB + 2; // x/y datapath width
  localparam longint X0 = (longint'(AMP) * (longint'(1) << GB) * 39797 + 32768) >>> 16;

  // atan(2^-i) as a fraction of 2^20 per turn.
  function automatic logic signed [ZW:0] atan_tab(input int unsigned i);
    case (i)
      0: return 131072;  1: return 77376;  2: return 40884;  3: return 20753;
      4: return 10417;   5: return 5213;   6: return 2607;   7: return 1304;
      8: return 652;     9: return 326;   10: return 163;   11: return 81;
     12: return 41;     13: return 20;    14: return 10;    15: return 5;
      default: return 0;
    endcase
  endfunction

  // Phase aligned to the 20-bit angle word.
  logic [ZW-1:0] ph20;
  if (PIN >= ZW) begin : g_trunc
    assign ph20 = phase[PIN-1 -: ZW];
  end else begin : g_ext
    assign ph20 = {phase, {(ZW-PIN){1'b0}}};
  end

  logic signed [IW-1:0] x [ITER+1];
  logic signed [IW-1:0] y [ITER+1];
  logic signed [ZW:0]   z [ITER+1];
  logic [1:0]           q [ITER+1];
  logic                 v [ITER+1];

  // Stage 0: split quadrant, start vector on the x axis.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0; q[0] <= '0; v[0] <= 1'b0;
    end else begin
      x[0] <= IW'(X0);
      y[0] <= '0;
      z[0] <= {3'b000, ph20[ZW-3:0]};
      q[0] <= ph20[ZW-1 -: 2];
      v[0] <= vin;
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[i+1] <= '0; y[i+1] <= '0; z[i+1] <= '0; q[i+1] <= '0; v[i+1] <= 1'b0;
      end else begin
        if (!z[i][ZW]) begin
          x[i+1] <= x[i] - (y[i] >>> i);
          y[i+1] <= y[i] + (x[i] >>> i);
          z[i+1] <= z[i] - atan_tab(i);
        end else begin
          x[i+1] <= x[i] + (y[i] >>> i);
          y[i+1] <= y[i] - (x[i] >>> i);
          z[i+1] <= z[i] + atan_tab(i);
        end
        q[i+1] <= q[i];
        v[i+1] <= v[i];
      end
    end
  end

  // Quadrant mapping and rounding.
  logic signed [IW-1:0] xr, yr, xo, yo;
  assign xr = x[ITER];
  assign yr = y[ITER];
  always_comb begin
    unique case (q[ITER])
      2'd0: begin xo =  xr; yo =  yr; end
      2'd1: begin xo = -yr; yo =  xr; end
      2'd2: begin xo = -xr; yo = -yr; end
      default: begin xo =  yr; yo = -xr; end
    endcase
  end

  // Round away the guard bits; saturate in case AMP was set too close to
  // full scale.
  localparam logic signed [OW-1:0] MAXV = {1'b0, {(OW-1){1'b1}}};
  localparam logic signed [OW-1:0] MINV = {1'b1, {(OW-1){1'b0}}};
  function automatic logic signed [OW-1:0] rnd(input logic signed [IW-1:0] a);
    logic signed [IW-1:0] s;
    s = (a + IW'(1 << (GB - 1))) >>> GB;
    if (s > IW'(MAXV))      return MAXV;
    else if (s < IW'(MINV)) return MINV;
    else                    return s[OW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cos_o <= '0; sin_o <= '0; vout <= 1'b0;
    end else begin
      cos_o <= rnd(xo);
      sin_o <= rnd(yo);
      vout  <= v[ITER];
    end
  end

endmodule
