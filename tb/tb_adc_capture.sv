// tb_adc_capture: feeds random 14-bit samples on both channels, with gaps in
// adc_valid, a buffer that is sometimes too full to take a whole group, and
// capture_en dropped mid-group. Each written word is compared with the
// expected sample layout (X sample s in bits [16s+:16], Y in [256+16s+:16],
// sign-extended), start flag and group sequence number; dropped groups must
// skip their sequence number and be counted; a group started must finish
// after capture_en falls. A small group size keeps the run short.
module tb_adc_capture;
  import ofdr_pkg::*;

  localparam int unsigned L = ADC_LANES;
  localparam int unsigned G = 8;     // beats per group in this test
  localparam int unsigned NCYC = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cap_en = 1'b0, av = 1'b0;
  logic signed [L-1:0][ADC_W-1:0] ax, ay;
  logic [15:0] free;
  logic wr_en;
  buf_word_t wr_word;
  logic [31:0] gw, gd;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  adc_capture #(.GROUP(G)) dut (.clk, .rst_n, .capture_en(cap_en), .adc_valid(av),
    .adc_x(ax), .adc_y(ay), .buf_free(free), .wr_en, .wr_word,
    .groups_written(gw), .groups_dropped(gd));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference model state.
  int  r_beat = 0, r_seq = 0, r_written = 0, r_dropped = 0;
  bit  r_keep = 0;
  bit  exp_wr = 0;
  buf_word_t exp_word;
  int  mid_group_stops = 0;

  always @(posedge clk) begin
    // Check what the DUT registered for the previous clock.
    #1;
    if (rst_n) begin
      check(wr_en == exp_wr, $sformatf("wr_en %0b expected %0b", wr_en, exp_wr));
      if (exp_wr && wr_en) begin
        check(wr_word.sop == exp_word.sop, "sop");
        check(wr_word.seq == exp_word.seq, $sformatf("seq %0d expected %0d", wr_word.seq, exp_word.seq));
        check(wr_word.data == exp_word.data, "sample layout");
      end
      check(gw == 32'(r_written) && gd == 32'(r_dropped), "group counters");
    end
  end

  // Drive inputs on the falling edge and advance the model with them.
  initial begin
    ax = '0; ay = '0; free = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      @(negedge clk);
      av = ($urandom % 8) != 0;
      if (c == 20) cap_en = 1'b1;
      if (c > 20 && ($urandom % 60) == 0) cap_en = ~cap_en;
      free = ($urandom % 4 == 0) ? 16'(G - 1 - ($urandom % 3)) : 16'(G + $urandom % 40);
      for (int s = 0; s < L; s++) begin
        ax[s] = ADC_W'($urandom);
        ay[s] = ADC_W'($urandom);
      end
      // model
      exp_wr = 0;
      if (av && (cap_en || r_beat != 0)) begin
        if (r_beat == 0) begin
          r_keep = (free >= G);
          if (r_keep) r_written++; else r_dropped++;
        end
        if (!cap_en && r_beat != 0) mid_group_stops++;
        exp_wr = r_keep;
        exp_word.sop = (r_beat == 0);
        exp_word.seq = r_seq;
        for (int s = 0; s < L; s++) begin
          exp_word.data[16*s +: 16]       = {{2{ax[s][ADC_W-1]}}, ax[s]};
          exp_word.data[256 + 16*s +: 16] = {{2{ay[s][ADC_W-1]}}, ay[s]};
        end
        r_beat++;
        if (r_beat == G) begin r_beat = 0; r_seq++; end
      end
    end
    @(negedge clk) av = 1'b0; exp_wr = 0;
    repeat (3) @(posedge clk);
    #2;
    check(r_written > 5 && r_dropped > 2, $sformatf("written %0d dropped %0d groups", r_written, r_dropped));
    check(mid_group_stops > 0, "capture_en never fell inside a group");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
