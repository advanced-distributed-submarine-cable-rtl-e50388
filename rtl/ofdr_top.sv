// ofdr_top: digital core of a coherent optical frequency-domain reflectometer
// (OFDR) for submarine-cable monitoring.
//
// Transmit path (125 MHz converter clock `clk`): two chirp_phase_gen
// instances produce the phase of a sawtooth frequency sweep for the X and Y
// polarizations (Y runs `y_offset` cycles ahead of X in the same sweep), and
// probe_iq_synth turns them into the four 14-bit, 48-samples-per-clock DAC
// streams XI, XQ, YI, YQ of a constant-power single-sideband probe for a
// dual-polarization IQ modulator.
//
// Receive path: adc_capture packs the two 14-bit, 16-samples-per-clock ADC
// streams of the polarization-diverse heterodyne receiver into 512-bit words,
// in packet-sized groups; async_fifo carries them into the Ethernet MAC clock
// domain (`mac_clk`), standing in for the DDR capture buffer; and
// rocev2_packetizer sends each group as one RoCEv2 RDMA WRITE into a ring
// buffer of the processing host, on a 512-bit AXI-Stream to a 100G MAC.
//
// Outside this module: the DACs and ADCs, the 100G MAC/PHY, and the host
// that demodulates the data. Configuration is quasi-static: `sweep_cfg` may
// change only while `probe_en` is low, `net_cfg` only while `stream_en` is
// low. Starting `probe_en` and `capture_en` on the same clock makes capture
// word 0 coincide with the generation of the first sweep group, which reaches
// the DAC ports a fixed 18 clocks later; this fixes the time reference the
// host needs to demodulate. Each clock domain has its own
// active-low reset; assert both together.
module ofdr_top
  import ofdr_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 1024   // sample buffer, in 512-bit words
) (
  input  logic clk,
  input  logic rst_n,
  input  logic mac_clk,
  input  logic mac_rst_n,
  // control
  input  logic       probe_en,
  input  logic       capture_en,
  input  logic       stream_en,
  input  sweep_cfg_t sweep_cfg,
  input  net_cfg_t   net_cfg,
  // to the four DACs
  output logic       dac_valid,
  output logic       dac_sweep_start,
  output logic signed [DAC_LANES-1:0][DAC_W-1:0] dac_xi,
  output logic signed [DAC_LANES-1:0][DAC_W-1:0] dac_xq,
  output logic signed [DAC_LANES-1:0][DAC_W-1:0] dac_yi,
  output logic signed [DAC_LANES-1:0][DAC_W-1:0] dac_yq,
  // from the two ADCs
  input  logic       adc_valid,
  input  logic signed [ADC_LANES-1:0][ADC_W-1:0] adc_x,
  input  logic signed [ADC_LANES-1:0][ADC_W-1:0] adc_y,
  // AXI-Stream to the 100G Ethernet MAC (mac_clk)
  output logic [BEAT_W-1:0]     tx_tdata,
  output logic [BEAT_BYTES-1:0] tx_tkeep,
  output logic                  tx_tvalid,
  output logic                  tx_tlast,
  input  logic                  tx_tready,
  // statistics
  output logic [31:0] groups_written,   // clk domain
  output logic [31:0] groups_dropped,   // clk domain
  output logic [31:0] pkts_sent,        // mac_clk domain
  output logic [31:0] stall_cycles,     // mac_clk domain
  output logic [31:0] resync_drops      // mac_clk domain
);

  localparam int unsigned AW = $clog2(BUF_DEPTH);
  localparam int unsigned WW = $bits(buf_word_t);

  // ---------------- transmit: sweep and IQ synthesis ----------------
  logic ph_valid_x, ph_valid_y, ph_start_x, ph_start_y;
  logic [DAC_LANES-1:0][PHASE_W-1:0] phase_x, phase_y;

  chirp_phase_gen u_phase_x (
    .clk, .rst_n, .en(probe_en),
    .f_start(sweep_cfg.f_start), .chirp(sweep_cfg.chirp),
    .sweep_cycles(sweep_cfg.sweep_cycles), .start_cycle(32'd0),
    .valid(ph_valid_x), .sweep_start(ph_start_x), .phase(phase_x)
  );

  chirp_phase_gen u_phase_y (
    .clk, .rst_n, .en(probe_en),
    .f_start(sweep_cfg.f_start), .chirp(sweep_cfg.chirp),
    .sweep_cycles(sweep_cfg.sweep_cycles), .start_cycle(sweep_cfg.y_offset),
    .valid(ph_valid_y), .sweep_start(ph_start_y), .phase(phase_y)
  );

  probe_iq_synth u_iq (
    .clk, .rst_n,
    .valid_i(ph_valid_x), .sweep_start_i(ph_start_x),
    .phase_x, .phase_y,
    .valid_o(dac_valid), .sweep_start_o(dac_sweep_start),
    .dac_xi, .dac_xq, .dac_yi, .dac_yq
  );

  // ---------------- receive: capture, buffer, packetize ----------------
  logic      wr_en;
  buf_word_t wr_word, rd_word;
  logic [AW:0] wr_free, rd_count;
  logic      rd_en;

  adc_capture #(.FREE_W(AW + 1)) u_cap (
    .clk, .rst_n, .capture_en, .adc_valid, .adc_x, .adc_y,
    .buf_free(wr_free), .wr_en, .wr_word, .groups_written, .groups_dropped
  );

  async_fifo #(.W(WW), .DEPTH(BUF_DEPTH)) u_buf (
    .wr_clk(clk), .wr_rst_n(rst_n), .wr_en, .wr_data(wr_word), .wr_free,
    .rd_clk(mac_clk), .rd_rst_n(mac_rst_n), .rd_en, .rd_data(rd_word),
    .rd_empty(), .rd_count
  );

  rocev2_packetizer #(.CNT_W(AW + 1)) u_pkt (
    .clk(mac_clk), .rst_n(mac_rst_n), .en(stream_en), .cfg(net_cfg),
    .rd_word, .rd_count, .rd_en,
    .tdata(tx_tdata), .tkeep(tx_tkeep), .tvalid(tx_tvalid), .tlast(tx_tlast),
    .tready(tx_tready),
    .pkts_sent, .stall_cycles, .resync_drops
  );

  // The two sweep generators share enable and configuration, so they stay
  // in lock step.
  a_sweeps_in_step: assert property (
    @(posedge clk) disable iff (!rst_n)
    ph_valid_x == ph_valid_y && !(ph_start_x && ph_start_y && sweep_cfg.y_offset != 0))
    else $error("ofdr_top: X/Y sweep generators out of step");

endmodule
