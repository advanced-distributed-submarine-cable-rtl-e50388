// ofdr_pkg: shared constants and types of the coherent OFDR interrogator.
//
// The converter side runs on one 125 MHz clock. The transmit DACs run at
// 6 GS/s, so each clock carries 6e9/125e6 = 48 samples per DAC channel; the
// receive ADCs run at 2 GS/s, so each clock carries 16 samples per ADC channel.
// Both converter types are 14 bits wide. These numbers are the design's
// fixed operating point. Everything else here (phase precision, packet size,
// buffer depth, the configuration record) is this design's own choice.
package ofdr_pkg;

  // Converter geometry.
  localparam int unsigned DAC_LANES   = 48;   // 6 GS/s / 125 MHz
  localparam int unsigned DAC_W       = 14;
  localparam int unsigned ADC_LANES   = 16;   // 2 GS/s / 125 MHz
  localparam int unsigned ADC_W       = 14;

  // Sweep phase/frequency words: fraction of a full turn, 48 bits.
  localparam int unsigned PHASE_W     = 48;

  // Stream word towards the Ethernet MAC (one 100G MAC user beat).
  localparam int unsigned BEAT_W      = 512;
  localparam int unsigned BEAT_BYTES  = BEAT_W / 8;

  // RDMA payload per packet: 4096 bytes = 64 stream beats.
  localparam int unsigned PAYLOAD_BYTES = 4096;

  // Default sweep: 437.5 MHz .. 562.5 MHz (125 MHz centred on 500 MHz) at
  // 6 GS/s. Frequency words are f/fs * 2^48.
  localparam logic [PHASE_W-1:0] F_START_DEFAULT = 48'h12AA_AAAA_AAAA; // 437.5/6000 * 2^48
  localparam logic [PHASE_W-1:0] SPAN_DEFAULT    = 48'h0555_5555_5555; // 125/6000 * 2^48

  // Run-time sweep configuration.
  typedef struct packed {
    logic [PHASE_W-1:0] f_start;    // frequency word at the start of a sweep
    logic [PHASE_W-1:0] chirp;      // frequency word increment per DAC sample
    logic [31:0]        sweep_cycles; // clock cycles per sweep (>= 2)
    logic [31:0]        y_offset;   // Y-polarization sweep lead, in cycles (< sweep_cycles)
  } sweep_cfg_t;

  // Run-time network configuration of the RoCEv2 stream.
  typedef struct packed {
    logic [47:0] dst_mac;
    logic [47:0] src_mac;
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] udp_src_port;
    logic [23:0] dst_qp;
    logic [31:0] rkey;
    logic [63:0] va_base;     // start of the receive ring in remote memory
    logic [4:0]  ring_log2;   // ring size is 2^ring_log2 packets
  } net_cfg_t;

  // Stream beats per RDMA packet payload.
  localparam int unsigned GROUP_BEATS = PAYLOAD_BYTES / BEAT_BYTES;

  // One word of the sample buffer: a payload beat plus its packet tag.
  typedef struct packed {
    logic              sop;   // first beat of a packet-sized group
    logic [31:0]       seq;   // group sequence number (counts dropped groups too)
    logic [BEAT_W-1:0] data;  // 16 X samples then 16 Y samples, 16 bits each, little-endian
  } buf_word_t;

  // Fixed protocol values.
  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [15:0] ROCEV2_PORT    = 16'd4791;
  localparam logic [7:0]  BTH_UC_WRITE_ONLY = 8'h2A;
  localparam int unsigned HDR_BYTES  = 14 + 20 + 8 + 12 + 16;  // 70
  localparam int unsigned ICRC_BYTES = 4;

  // CRC-32 (IEEE 802.3 polynomial, bit-reflected) of `n` bytes of `d`,
  // starting at byte `lo` (byte i is d[8*i +: 8], first on the wire).
  // Shared by the RoCEv2 invariant CRC.
  function automatic logic [31:0] crc32_bytes(input logic [31:0] crc,
                                              input logic [BEAT_W-1:0] d,
                                              input int unsigned lo,
                                              input int unsigned n);
    logic [31:0] c;
    c = crc;
    for (int unsigned i = 0; i < BEAT_BYTES; i++) begin
      if (i >= lo && i < lo + n) begin
        c = c ^ {24'h0, d[8*i +: 8]};
        for (int b = 0; b < 8; b++) c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
      end
    end
    return c;
  endfunction

endpackage
