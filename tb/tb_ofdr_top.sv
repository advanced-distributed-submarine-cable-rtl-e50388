// tb_ofdr_top: end-to-end run of the interrogator core at its default sizes.
//
// The probe is swept (a short sweep of 16 clocks so that it wraps several
// times) and the DAC outputs of both polarizations are compared with AMP*cos
// and AMP*sin of a sample-by-sample reference sweep. A toy "cable" loops the
// probe back: each ADC channel receives every third DAC I sample of its
// polarization, delayed a few clocks. The packets leaving the AXI-Stream
// are parsed; each one's payload must equal the ADC words of the group named
// by its PSN, its RETH address must point at that group's ring slot, and its
// ICRC and IP checksum must verify. The MAC side stops accepting data for a
// while so that the buffer overflows and whole groups are dropped.
// The rate is checked too: no drops while the MAC accepts 80% of beats, and
// back-to-back packets GROUP+3 MAC clocks apart.
// Mechanisms counted (each must occur): sweep wrap, packet sent, MAC stall,
// buffer overflow (group dropped), ring wrap, capture stop inside a group.
module tb_ofdr_top;
  import ofdr_pkg::*;

  localparam int unsigned SWEEP = 16;
  localparam int unsigned YOFF  = 5;
  localparam int unsigned AMP   = 7800;
  localparam int unsigned G     = GROUP_BEATS;
  localparam int unsigned DLY   = 4;
  localparam int unsigned CAP_CYCLES = 2600;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 1'b0, rst_n = 1'b0, mac_clk = 1'b0, mac_rst_n = 1'b0;
  logic probe_en = 1'b0, capture_en = 1'b0, stream_en = 1'b0;
  sweep_cfg_t scfg;
  net_cfg_t   ncfg;
  logic dac_valid, dac_ss;
  logic signed [DAC_LANES-1:0][DAC_W-1:0] xi, xq, yi, yq;
  logic adc_valid = 1'b0;
  logic signed [ADC_LANES-1:0][ADC_W-1:0] adc_x, adc_y;
  logic [511:0] tdata; logic [63:0] tkeep; logic tvalid, tlast, tready = 1'b1;
  logic [31:0] gw, gd, pkts, stalls, resyncs;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;            // 125 MHz
  always #1.552 mac_clk = ~mac_clk; // ~322 MHz

  ofdr_top dut (.clk, .rst_n, .mac_clk, .mac_rst_n, .probe_en, .capture_en, .stream_en,
    .sweep_cfg(scfg), .net_cfg(ncfg), .dac_valid, .dac_sweep_start(dac_ss),
    .dac_xi(xi), .dac_xq(xq), .dac_yi(yi), .dac_yq(yq), .adc_valid, .adc_x, .adc_y,
    .tx_tdata(tdata), .tx_tkeep(tkeep), .tx_tvalid(tvalid), .tx_tlast(tlast),
    .tx_tready(tready), .groups_written(gw), .groups_dropped(gd), .pkts_sent(pkts),
    .stall_cycles(stalls), .resync_drops(resyncs));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #60us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DAC check against a serial sweep ----------------
  logic [PHASE_W-1:0] rph_x = '0, rfr_x, rph_y = '0, rfr_y;
  int unsigned rn_x = 0, rn_y = YOFF * DAC_LANES;
  int n_wraps = 0, dac_groups = 0;

  task automatic step_ref(ref logic [PHASE_W-1:0] ph, ref logic [PHASE_W-1:0] fr, ref int unsigned n);
    ph = ph + fr;
    n  = n + 1;
    if (n == SWEEP * DAC_LANES) begin n = 0; fr = scfg.f_start; end
    else fr = fr + scfg.chirp;
  endtask

  function automatic bit near(input logic [DAC_W-1:0] v, input real r);
    real d;
    d = real'($signed(v)) - r;
    return d <= 3.0 && d >= -3.0;
  endfunction

  always @(posedge clk) begin
    #1;
    if (dac_valid) begin
      check(dac_ss == (dac_groups % SWEEP == 0), $sformatf("sweep_start at DAC group %0d", dac_groups));
      if (dac_ss && dac_groups > 0) n_wraps++;
      for (int m = 0; m < DAC_LANES; m++) begin
        real ax, ay;
        ax = TWO_PI * real'(rph_x[PHASE_W-1 -: 20]) / 1048576.0;
        ay = TWO_PI * real'(rph_y[PHASE_W-1 -: 20]) / 1048576.0;
        check(near(xi[m], AMP * $cos(ax)) && near(xq[m], AMP * $sin(ax)),
              $sformatf("X DAC group %0d lane %0d", dac_groups, m));
        check(near(yi[m], AMP * $cos(ay)) && near(yq[m], AMP * $sin(ay)),
              $sformatf("Y DAC group %0d lane %0d", dac_groups, m));
        step_ref(rph_x, rfr_x, rn_x);
        step_ref(rph_y, rfr_y, rn_y);
      end
      dac_groups++;
    end
  end

  // ---------------- toy cable: DAC -> delay -> ADC ----------------
  logic signed [ADC_LANES-1:0][ADC_W-1:0] dl_x [DLY];
  logic signed [ADC_LANES-1:0][ADC_W-1:0] dl_y [DLY];
  logic [511:0] words[$];     // every ADC word offered while capture was active
  int cap_beat = 0, stops_mid_group = 0;

  always @(posedge clk) begin
    for (int d = DLY - 1; d > 0; d--) begin dl_x[d] <= dl_x[d-1]; dl_y[d] <= dl_y[d-1]; end
    for (int s = 0; s < ADC_LANES; s++) begin
      dl_x[0][s] <= dac_valid ? xi[3*s] : '0;
      dl_y[0][s] <= dac_valid ? yi[3*s] : '0;
    end
  end
  assign adc_x = dl_x[DLY-1];
  assign adc_y = dl_y[DLY-1];

  // Record what the capture block sees (same rule as the capture spec:
  // a group, once started, is completed).
  always @(posedge clk) begin
    if (rst_n && adc_valid && (capture_en || cap_beat != 0)) begin
      logic [511:0] w;
      for (int s = 0; s < ADC_LANES; s++) begin
        w[16*s +: 16]       = 16'($signed(adc_x[s]));
        w[256 + 16*s +: 16] = 16'($signed(adc_y[s]));
      end
      words.push_back(w);
      if (!capture_en) stops_mid_group++;
      cap_beat = (cap_beat + 1) % G;
    end
  end

  // ---------------- packet parser ----------------
  byte unsigned pk[$];
  int n_pkts = 0, last_seq = -1, ring_wraps = 0, max_seq = -1;
  int stall_seen = 0;
  longint mac_cyc = 0, last_tlast_cyc = -1, min_gap = 1 << 30;
  int drops_before_pause = -1;
  always @(posedge mac_clk) begin
    mac_cyc++;
    if (mac_rst_n && tvalid && !tready) stall_seen++;
    if (mac_rst_n && tvalid && tready && tlast) begin
      if (last_tlast_cyc >= 0 && mac_cyc - last_tlast_cyc < min_gap) min_gap = mac_cyc - last_tlast_cyc;
      last_tlast_cyc = mac_cyc;
    end
    if (mac_rst_n && tvalid && tready) begin
      for (int i = 0; i < 64; i++) if (tkeep[i]) pk.push_back(tdata[8*i +: 8]);
      if (tlast) begin
        int seq;
        logic [63:0] va, exp_va;
        logic [31:0] c, s;
        seq = {pk[51], pk[52], pk[53]};
        for (int i = 0; i < 8; i++) va[8*(7-i) +: 8] = pk[54 + i];
        exp_va = ncfg.va_base + 64'((seq % (1 << ncfg.ring_log2)) * PAYLOAD_BYTES);
        check(pk.size() == HDR_BYTES + PAYLOAD_BYTES + 4, $sformatf("packet size %0d", pk.size()));
        check({pk[36], pk[37]} == 16'd4791 && pk[42] == 8'h2A, "UDP port / BTH opcode");
        check(seq > last_seq, $sformatf("PSN %0d after %0d", seq, last_seq));
        check(va == exp_va, $sformatf("RETH VA %h vs %h", va, exp_va));
        if (seq % (1 << ncfg.ring_log2) == 0 && seq > 0) ring_wraps++;
        // payload against the recorded ADC words
        for (int b = 0; b < G; b++) begin
          logic [511:0] got;
          for (int i = 0; i < 64; i++) got[8*i +: 8] = pk[HDR_BYTES + 64*b + i];
          check(seq * G + b < words.size() && got == words[seq * G + b],
                $sformatf("payload of group %0d beat %0d", seq, b));
        end
        // IP checksum
        s = 0;
        for (int i = 14; i < 34; i += 2) s += {pk[i], pk[i+1]};
        while (s[31:16] != 0) s = s[15:0] + s[31:16];
        check(s[15:0] == 16'hFFFF, "IP header checksum");
        // ICRC
        c = 32'hFFFF_FFFF;
        for (int i = 6; i < pk.size() - 4; i++) begin
          byte unsigned bt;
          bt = (i < 14) ? 8'hFF :
            ((i == 15 || i == 22 || i == 24 || i == 25 || i == 40 || i == 41 || i == 46) ? 8'hFF : pk[i]);
          for (int k = 0; k < 8; k++) begin
            logic fb;
            fb = c[0] ^ bt[k];
            c = c >> 1;
            if (fb) c = c ^ 32'hEDB8_8320;
          end
        end
        c = ~c;
        check({pk[pk.size()-1], pk[pk.size()-2], pk[pk.size()-3], pk[pk.size()-4]} == c, "ICRC");
        last_seq = seq;
        n_pkts++;
        pk.delete();
      end
    end
  end

  // ---------------- sequence ----------------
  initial begin
    scfg.f_start = F_START_DEFAULT;
    scfg.chirp = SPAN_DEFAULT / PHASE_W'(SWEEP * DAC_LANES);
    scfg.sweep_cycles = SWEEP;
    scfg.y_offset = YOFF;
    rfr_x = scfg.f_start;
    rfr_y = scfg.f_start + scfg.chirp * PHASE_W'(YOFF * DAC_LANES);
    ncfg.dst_mac = 48'h02_00_00_00_00_02; ncfg.src_mac = 48'h02_00_00_00_00_01;
    ncfg.src_ip = 32'hC0A8_0001; ncfg.dst_ip = 32'hC0A8_0002; ncfg.udp_src_port = 16'd49152;
    ncfg.dst_qp = 24'h11; ncfg.rkey = 32'hCAFE_0001; ncfg.va_base = 64'h1_0000_0000;
    ncfg.ring_log2 = 5'd3;
    for (int d = 0; d < DLY; d++) begin dl_x[d] = '0; dl_y[d] = '0; end
    #50 rst_n = 1'b1; mac_rst_n = 1'b1;
    @(negedge mac_clk) stream_en = 1'b1;
    @(negedge clk) probe_en = 1'b1; capture_en = 1'b1; adc_valid = 1'b1;
    // MAC throttling: random stalls, then a long pause that overflows the buffer.
    fork
      begin
        repeat (CAP_CYCLES) @(negedge clk);
        capture_en = 1'b0;
        repeat (2 * G) @(negedge clk);
        adc_valid = 1'b0;
      end
      begin
        repeat (1500) @(negedge mac_clk) tready = ($urandom % 5 != 0);
        drops_before_pause = gd;
        tready = 1'b0;
        repeat (5000) @(negedge mac_clk);
        tready = 1'b1;
      end
    join
    // drain
    repeat (3000) @(negedge mac_clk);
    check(32'(n_pkts) == pkts, $sformatf("parsed %0d packets, counter %0d", n_pkts, pkts));
    check(gw == pkts, $sformatf("groups written %0d, packets %0d", gw, pkts));
    check(32'(words.size()) == (gw + gd) * G, "every offered word belongs to a group");
    check(resyncs == 0, "no resynchronisation in normal operation");
    // Rate: with the MAC taking 80% of beats the core keeps up with the full
    // 64 Gbit/s capture stream, and back-to-back packets (while the buffer
    // drains after the pause) leave GROUP+3 MAC clocks apart: 66 beats plus
    // one idle clock.
    check(drops_before_pause == 0, $sformatf("%0d groups dropped at 80%% MAC availability", drops_before_pause));
    check(min_gap == G + 3, $sformatf("closest packets %0d MAC clocks apart, expected %0d", min_gap, G + 3));
    $display("mechanisms: sweep_wraps=%0d packets=%0d mac_stalls=%0d groups_dropped=%0d ring_wraps=%0d beats_after_capture_stop=%0d",
             n_wraps, n_pkts, stall_seen, gd, ring_wraps, stops_mid_group);
    check(n_wraps > 0, "sweep never wrapped");
    check(n_pkts > 0, "no packet sent");
    check(stall_seen > 0 && stalls > 0, "MAC never stalled");
    check(gd > 0, "buffer never overflowed");
    check(ring_wraps > 0, "ring never wrapped");
    check(stops_mid_group > 0, "capture never stopped inside a group");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
