// tb_probe_iq_synth: drives random phases into all lanes of both
// polarizations and compares the four DAC streams with AMP*cos and AMP*sin of
// the phase computed in floating point (tolerance 3 LSB). Also checks the
// pipeline latency of ITER+2 = 18 clocks for data, valid and the sweep_start
// marker, and that the output envelope is constant.
module tb_probe_iq_synth;
  import ofdr_pkg::*;

  localparam int unsigned L   = DAC_LANES;
  localparam int unsigned PW  = PHASE_W;
  localparam int unsigned LAT = 18;
  localparam int unsigned AMP = 7800;
  localparam int unsigned N   = 40;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 1'b0, rst_n = 1'b0;
  logic vi = 1'b0, ssi = 1'b0, vo, sso;
  logic [L-1:0][PW-1:0] phx, phy;
  logic signed [L-1:0][DAC_W-1:0] xi, xq, yi, yq;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  probe_iq_synth dut (.clk, .rst_n, .valid_i(vi), .sweep_start_i(ssi), .phase_x(phx),
                      .phase_y(phy), .valid_o(vo), .sweep_start_o(sso),
                      .dac_xi(xi), .dac_xq(xq), .dac_yi(yi), .dac_yq(yq));

  logic [L-1:0][PW-1:0] hist_x [N];
  logic [L-1:0][PW-1:0] hist_y [N];
  bit                   hist_s [N];
  int cyc = 0, first_in = -1, first_out = -1, nout = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic bit close(input logic signed [DAC_W-1:0] v, input real ref_v);
    real d;
    d = real'(v) - ref_v;
    return (d <= 3.0) && (d >= -3.0);
  endfunction

  function automatic real ang(input logic [PW-1:0] p);
    return TWO_PI * real'(p[PW-1 -: 20]) / 1048576.0;
  endfunction

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // Stimulus: N groups of random phases, driven on the falling edge.
  initial begin
    for (int g = 0; g < N; g++) begin
      for (int m = 0; m < L; m++) begin
        hist_x[g][m] = {$urandom, $urandom};
        hist_y[g][m] = {$urandom, $urandom};
      end
      hist_s[g] = ($urandom % 3 == 0);
    end
    phx = '0; phy = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < N; g++) begin
      @(negedge clk);
      vi = 1'b1; ssi = hist_s[g]; phx = hist_x[g]; phy = hist_y[g];
      if (g == 0) first_in = cyc;
    end
    @(negedge clk) vi = 1'b0; ssi = 1'b0;
  end

  // Checker.
  always @(posedge clk) begin
    #1;
    if (vo) begin
      if (first_out < 0) first_out = cyc;
      check(nout < N, "too many output groups");
      if (nout < N) begin
        check(sso == hist_s[nout], $sformatf("sweep_start of group %0d", nout));
        for (int m = 0; m < L; m++) begin
          real ax, ay, px2;
          ax = ang(hist_x[nout][m]);
          ay = ang(hist_y[nout][m]);
          check(close(xi[m], AMP * $cos(ax)), $sformatf("XI g%0d l%0d %0d vs %f", nout, m, xi[m], AMP * $cos(ax)));
          check(close(xq[m], AMP * $sin(ax)), $sformatf("XQ g%0d l%0d", nout, m));
          check(close(yi[m], AMP * $cos(ay)), $sformatf("YI g%0d l%0d", nout, m));
          check(close(yq[m], AMP * $sin(ay)), $sformatf("YQ g%0d l%0d", nout, m));
          px2 = real'($signed(xi[m])) * real'($signed(xi[m])) + real'($signed(xq[m])) * real'($signed(xq[m]));
          check(px2 > (AMP - 4.0) * (AMP - 4.0) && px2 < (AMP + 4.0) * (AMP + 4.0),
                $sformatf("X envelope g%0d l%0d: %f", nout, m, $sqrt(px2)));
        end
      end
      nout++;
    end else begin
      check(sso == 1'b0, "sweep_start without valid");
    end
  end

  initial begin
    wait (nout == N);
    repeat (5) @(posedge clk);
    #2;
    // first_in is the cycle count when group 0 was driven (before the edge
    // that samples it); the output appears LAT edges later.
    check(first_out - first_in == LAT, $sformatf("latency %0d, expected %0d", first_out - first_in, LAT));
    check(nout == N, "group count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
