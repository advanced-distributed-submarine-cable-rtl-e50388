// rocev2_packetizer: streams buffered sample words to the receiver's memory as
// RDMA-over-Converged-Ethernet v2 (RoCEv2) RDMA WRITE packets.
//
// Each group of GROUP buffer words (PAYLOAD bytes of samples) becomes one
// Unreliable-Connected "RDMA WRITE Only" packet, so the processing host's
// network card places the samples straight into memory without its CPU:
//   Ethernet (14) | IPv4 (20) | UDP to port 4791 (8) | BTH (12) | RETH (16)
//   | PAYLOAD bytes of samples | ICRC (4)
// The MAC behind the AXI-Stream port adds preamble and FCS. The RETH virtual
// address places group `seq` at slot seq mod 2^ring_log2 of a ring buffer
// starting at va_base; the BTH packet sequence number is seq[23:0], so a
// dropped group shows up at the receiver as a PSN gap and a hole in the ring.
// The ICRC is the CRC-32 of eight 0xFF bytes followed by the packet from the
// IP header to the end of the payload, with the IP TOS, TTL and checksum, the
// UDP checksum and the BTH reserved byte replaced by 0xFF; it is sent least
// significant byte first, like an Ethernet FCS.
//
// The 70-byte header fills beat 0 and the first 6 bytes of beat 1, so every
// payload word goes out split across two beats: beat j carries the last 6
// bytes of word j-2 and the first 58 bytes of word j-1. A packet is
// GROUP + 2 beats; the last carries 10 valid bytes (6 payload + ICRC).
//
// Interface: show-ahead buffer read port (`rd_word`, `rd_count`, `rd_en`) and
// a 512-bit AXI-Stream master (byte i is tdata[8i +: 8], first on the wire),
// which obeys valid/ready: once tvalid is high, tdata/tkeep/tlast hold until
// tready. A packet starts only when a whole group is buffered, so tvalid never
// drops inside a packet. Should the buffer head ever not be a group start
// (it cannot be in normal operation), words are discarded and counted until
// one is. The choice of UC transport, header values (TOS 0,
// TTL 64, DF set, P_Key 0xFFFF) and ring addressing is this design's own.
module rocev2_packetizer
  import ofdr_pkg::*;
#(
  parameter int unsigned PAYLOAD = PAYLOAD_BYTES,   // multiple of 64
  parameter int unsigned CNT_W   = 11
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  net_cfg_t          cfg,
  // buffer read side
  input  buf_word_t         rd_word,
  input  logic [CNT_W-1:0]  rd_count,
  output logic              rd_en,
  // AXI-Stream towards the 100G MAC
  output logic [BEAT_W-1:0] tdata,
  output logic [BEAT_BYTES-1:0] tkeep,
  output logic              tvalid,
  output logic              tlast,
  input  logic              tready,
  // statistics
  output logic [31:0]       pkts_sent,
  output logic [31:0]       stall_cycles,
  output logic [31:0]       resync_drops
);

  localparam int unsigned GROUP = PAYLOAD / BEAT_BYTES;
  localparam int unsigned SPILL = HDR_BYTES - BEAT_BYTES;     // 6 header bytes in beat 1
  localparam int unsigned KEEP  = BEAT_BYTES - SPILL;         // 58 payload bytes per beat
  localparam int unsigned LASTB = SPILL + ICRC_BYTES;         // 10 bytes in the last beat
  localparam logic [15:0] IP_LEN  = 16'(20 + 8 + 12 + 16 + PAYLOAD + ICRC_BYTES);
  localparam logic [15:0] UDP_LEN = 16'(8 + 12 + 16 + PAYLOAD + ICRC_BYTES);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY, S_LAST} state_t;

  state_t                 state;
  logic [31:0]            seq_q;
  logic [$clog2(GROUP+1)-1:0] beat_q;  // payload beats sent in this packet
  logic [SPILL*8-1:0]     carry_q;      // bytes held over to the next beat
  logic [31:0]            crc_q;

  // ---------------- header ----------------
  function automatic logic [15:0] ip_csum(input logic [31:0] src_ip, input logic [31:0] dst_ip);
    logic [31:0] s;
    s = 32'h4500 + 32'(IP_LEN) + 32'h0000 + 32'h4000 + 32'h4011
      + 32'(src_ip[31:16]) + 32'(src_ip[15:0])
      + 32'(dst_ip[31:16]) + 32'(dst_ip[15:0]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    return ~s[15:0];
  endfunction

  logic [HDR_BYTES-1:0][7:0] hdr;   // hdr[i] is byte i of the packet
  logic [63:0] va;
  logic [63:0] slot;

  always_comb begin
    slot = 64'(seq_q) & ((64'd1 << cfg.ring_log2) - 64'd1);
    va   = cfg.va_base + slot * 64'(PAYLOAD);
    hdr  = '0;
    for (int i = 0; i < 6; i++) begin
      hdr[i]     = cfg.dst_mac[8*(5-i) +: 8];
      hdr[6 + i] = cfg.src_mac[8*(5-i) +: 8];
    end
    {hdr[12], hdr[13]} = ETHERTYPE_IPV4;
    // IPv4
    hdr[14] = 8'h45;  hdr[15] = 8'h00;
    {hdr[16], hdr[17]} = IP_LEN;
    {hdr[18], hdr[19]} = 16'h0000;
    {hdr[20], hdr[21]} = 16'h4000;
    hdr[22] = 8'd64;  hdr[23] = 8'd17;
    {hdr[24], hdr[25]} = ip_csum(cfg.src_ip, cfg.dst_ip);
    {hdr[26], hdr[27], hdr[28], hdr[29]} = cfg.src_ip;
    {hdr[30], hdr[31], hdr[32], hdr[33]} = cfg.dst_ip;
    // UDP
    {hdr[34], hdr[35]} = cfg.udp_src_port;
    {hdr[36], hdr[37]} = ROCEV2_PORT;
    {hdr[38], hdr[39]} = UDP_LEN;
    {hdr[40], hdr[41]} = 16'h0000;
    // BTH
    hdr[42] = BTH_UC_WRITE_ONLY;
    hdr[43] = 8'h00;
    {hdr[44], hdr[45]} = 16'hFFFF;
    hdr[46] = 8'h00;
    {hdr[47], hdr[48], hdr[49]} = cfg.dst_qp;
    hdr[50] = 8'h00;
    {hdr[51], hdr[52], hdr[53]} = seq_q[23:0];
    // RETH
    for (int i = 0; i < 8; i++) hdr[54 + i] = va[8*(7-i) +: 8];
    {hdr[62], hdr[63], hdr[64], hdr[65]} = cfg.rkey;
    {hdr[66], hdr[67], hdr[68], hdr[69]} = 32'(PAYLOAD);
  end

  // Beat 0 as covered by the ICRC: variant fields forced to 0xFF.
  logic [BEAT_W-1:0] beat0, beat0_masked;
  always_comb begin
    beat0 = hdr[BEAT_BYTES-1:0];
    beat0_masked = beat0;
    for (int i = 0; i < BEAT_BYTES; i++) begin
      if (i == 15 || i == 22 || i == 24 || i == 25 || i == 40 || i == 41 || i == 46)
        beat0_masked[8*i +: 8] = 8'hFF;
    end
  end

  // ---------------- output beat ----------------
  logic [BEAT_W-1:0] pay_beat;
  logic [31:0]       crc_tail, icrc;
  assign pay_beat = {rd_word.data[KEEP*8-1:0], carry_q};
  assign crc_tail = crc32_bytes(crc_q, {{(BEAT_W-SPILL*8){1'b0}}, carry_q}, 0, SPILL);
  assign icrc     = ~crc_tail;

  always_comb begin
    tvalid = 1'b0;
    tlast  = 1'b0;
    tkeep  = '1;
    tdata  = '0;
    unique case (state)
      S_HDR:  begin tvalid = 1'b1; tdata = beat0; end
      S_PAY:  begin tvalid = 1'b1; tdata = pay_beat; end
      S_LAST: begin
        tvalid = 1'b1;
        tlast  = 1'b1;
        tkeep  = BEAT_BYTES'((65'd1 << LASTB) - 65'd1);
        tdata  = BEAT_W'({icrc, carry_q});
      end
      default: ;
    endcase
  end

  logic start, misaligned;
  assign start      = (state == S_IDLE) && en && (32'(rd_count) >= GROUP) && rd_word.sop;
  assign misaligned = (state == S_IDLE) && en && (rd_count != '0) && !rd_word.sop;
  assign rd_en      = ((state == S_PAY) && tready) || misaligned;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; seq_q <= '0; beat_q <= '0; carry_q <= '0; crc_q <= '0;
      pkts_sent <= '0; stall_cycles <= '0; resync_drops <= '0;
    end else begin
      if (tvalid && !tready) stall_cycles <= stall_cycles + 32'd1;
      if (misaligned) resync_drops <= resync_drops + 32'd1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_HDR;
          seq_q <= rd_word.seq;
        end
        S_HDR: if (tready) begin
          state   <= S_PAY;
          beat_q  <= '0;
          carry_q <= hdr[HDR_BYTES-1:BEAT_BYTES];
          crc_q   <= crc32_bytes(crc32_bytes(32'hFFFF_FFFF, '1, 0, 8),
                                 beat0_masked, 14, BEAT_BYTES - 14);
        end
        S_PAY: if (tready) begin
          crc_q   <= crc32_bytes(crc_q, pay_beat, 0, BEAT_BYTES);
          carry_q <= rd_word.data[BEAT_W-1 -: SPILL*8];
          beat_q  <= beat_q + 1'b1;
          if (32'(beat_q) == GROUP - 1) state <= S_LAST;
        end
        S_LAST: if (tready) begin
          state     <= S_IDLE;
          pkts_sent <= pkts_sent + 32'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Payload beats must come from a whole buffered group.
  a_no_underrun: assert property (
    @(posedge clk) disable iff (!rst_n) state == S_PAY |-> rd_count != '0)
    else $error("rocev2_packetizer: buffer ran dry inside a packet");

endmodule
