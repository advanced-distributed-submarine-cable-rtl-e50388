// tb_chirp_phase_gen: checks the parallel sweep phase generator against a
// sample-by-sample model (phase += freq; freq += chirp; freq back to f_start
// at every sweep boundary), for an X instance starting at cycle 0 and a Y
// instance starting part-way into the sweep. Checks every lane's phase,
// that `valid` follows `en` by one clock, and the period of `sweep_start`.
module tb_chirp_phase_gen;
  import ofdr_pkg::*;

  localparam int unsigned L  = DAC_LANES;
  localparam int unsigned PW = PHASE_W;
  localparam int unsigned SWEEP = 5;
  localparam int unsigned YOFF  = 2;
  localparam int unsigned GROUPS = 23;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [PW-1:0] f_start, chirp;
  logic vx, vy, sx, sy;
  logic [L-1:0][PW-1:0] px, py;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  chirp_phase_gen dut_x (.clk, .rst_n, .en, .f_start, .chirp, .sweep_cycles(SWEEP),
                         .start_cycle(32'd0), .valid(vx), .sweep_start(sx), .phase(px));
  chirp_phase_gen dut_y (.clk, .rst_n, .en, .f_start, .chirp, .sweep_cycles(SWEEP),
                         .start_cycle(YOFF), .valid(vy), .sweep_start(sy), .phase(py));

  // Reference: serial accumulators.
  logic [PW-1:0] rph_x, rfr_x, rph_y, rfr_y;
  int unsigned   rn_x, rn_y;   // sample index inside the sweep

  task automatic step_ref(ref logic [PW-1:0] ph, ref logic [PW-1:0] fr, ref int unsigned n);
    ph = ph + fr;
    n  = n + 1;
    if (n == SWEEP * L) begin n = 0; fr = f_start; end
    else fr = fr + chirp;
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    f_start = {$urandom, $urandom} % (48'd1 << PW-1);
    chirp   = 48'(($urandom % 100000) + 1) << 16;
    rph_x = '0; rfr_x = f_start; rn_x = 0;
    rph_y = '0; rn_y = YOFF * L;
    rfr_y = f_start + chirp * 48'(YOFF * L);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    check(!vx && !vy, "no valid while disabled");
    @(negedge clk) en = 1'b1;
    @(posedge clk); #1;   // first group registered on the first clock edge with enable high
    for (int g = 0; g < GROUPS; g++) begin
      if (g > 0) begin @(posedge clk); #1; end
      check(vx && vy, $sformatf("valid at group %0d", g));
      check(sx == (g % SWEEP == 0), $sformatf("X sweep_start at group %0d", g));
      check(sy == ((g + YOFF) % SWEEP == 0), $sformatf("Y sweep_start at group %0d", g));
      for (int m = 0; m < L; m++) begin
        check(px[m] == rph_x, $sformatf("X phase g%0d lane %0d: %h vs %h", g, m, px[m], rph_x));
        check(py[m] == rph_y, $sformatf("Y phase g%0d lane %0d: %h vs %h", g, m, py[m], rph_y));
        step_ref(rph_x, rfr_x, rn_x);
        step_ref(rph_y, rfr_y, rn_y);
      end
    end
    @(negedge clk) en = 1'b0;
    @(posedge clk); @(posedge clk); #1;
    check(!vx && !vy, "valid falls after enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
