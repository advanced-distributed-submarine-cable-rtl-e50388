// tb_rocev2_packetizer: feeds packet-sized groups of random sample words
// (with a skipped sequence number, a stray word that is not a group start,
// and enough groups to wrap the remote ring) while the MAC side throttles
// tready at random. Every packet leaving the AXI-Stream is reassembled byte by
// byte and compared with a packet built here from the RoCEv2 field layout:
// Ethernet, IPv4 (checksum verified by summing), UDP, BTH (UC RDMA WRITE
// Only, PSN = sequence number), RETH (ring address, rkey, length), payload
// and an ICRC computed bit by bit over the masked packet. Also checks tkeep
// and tlast, that stalled beats hold their data, and the counters.
module tb_rocev2_packetizer;
  import ofdr_pkg::*;

  localparam int unsigned PAY = PAYLOAD_BYTES;
  localparam int unsigned G   = PAY / 64;
  localparam int NPKT = 7;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  net_cfg_t cfg;
  buf_word_t rd_word;
  logic [10:0] rd_count;
  logic rd_en;
  logic [511:0] tdata;
  logic [63:0] tkeep;
  logic tvalid, tlast, tready = 1'b0;
  logic [31:0] pkts, stalls, resyncs;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  rocev2_packetizer dut (.clk, .rst_n, .en, .cfg, .rd_word, .rd_count, .rd_en,
    .tdata, .tkeep, .tvalid, .tlast, .tready, .pkts_sent(pkts), .stall_cycles(stalls),
    .resync_drops(resyncs));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Buffer model.
  buf_word_t q[$];
  int seqs[NPKT];
  always_comb begin
    rd_word  = (q.size() > 0) ? q[0] : '0;
    rd_count = 11'(q.size());
  end
  always @(posedge clk) if (rd_en && q.size() > 0) void'(q.pop_front());

  // Expected packet.
  byte unsigned exp_b[$];
  function automatic void put(input logic [63:0] v, input int nbytes);
    for (int i = nbytes - 1; i >= 0; i--) exp_b.push_back(v[8*i +: 8]);
  endfunction

  function automatic logic [31:0] crc_serial(input byte unsigned b[$]);
    logic [31:0] c = 32'hFFFF_FFFF;
    for (int i = 0; i < b.size(); i++)
      for (int k = 0; k < 8; k++) begin
        logic fb;
        fb = c[0] ^ b[i][k];
        c = c >> 1;
        if (fb) c = c ^ 32'hEDB8_8320;
      end
    return ~c;
  endfunction

  function automatic void build(input int seq, input logic [PAY*8-1:0] payload);
    byte unsigned icrc_in[$];
    logic [31:0] icrc, s;
    logic [63:0] va;
    exp_b.delete();
    put(cfg.dst_mac, 6); put(cfg.src_mac, 6); put(16'h0800, 2);
    put(8'h45, 1); put(8'h00, 1); put(16'(PAY + 60), 2); put(16'h0, 2); put(16'h4000, 2);
    put(8'd64, 1); put(8'd17, 1); put(16'h0, 2); put(cfg.src_ip, 4); put(cfg.dst_ip, 4);
    // IP checksum: one's complement of the one's-complement sum of the header.
    s = 0;
    for (int i = 14; i < 34; i += 2) s += {exp_b[i], exp_b[i+1]};
    while (s[31:16] != 0) s = s[15:0] + s[31:16];
    exp_b[24] = ~s[15:8]; exp_b[25] = ~s[7:0];
    put(cfg.udp_src_port, 2); put(16'd4791, 2); put(16'(PAY + 40), 2); put(16'h0, 2);
    put(8'h2A, 1); put(8'h00, 1); put(16'hFFFF, 2); put(8'h00, 1); put(cfg.dst_qp, 3);
    put(8'h00, 1); put(24'(seq), 3);
    va = cfg.va_base + 64'(seq % (1 << cfg.ring_log2)) * PAY;
    put(va, 8); put(cfg.rkey, 4); put(32'(PAY), 4);
    for (int i = 0; i < PAY; i++) exp_b.push_back(payload[8*i +: 8]);
    // ICRC over 8 x 0xFF, then from the IP header on, variant fields masked.
    for (int i = 0; i < 8; i++) icrc_in.push_back(8'hFF);
    for (int i = 14; i < exp_b.size(); i++)
      icrc_in.push_back((i == 15 || i == 22 || i == 24 || i == 25 || i == 40 || i == 41 || i == 46)
                        ? 8'hFF : exp_b[i]);
    icrc = crc_serial(icrc_in);
    for (int i = 0; i < 4; i++) exp_b.push_back(icrc[8*i +: 8]);
  endfunction

  // Capture and check output packets.
  byte unsigned got_b[$];
  logic [PAY*8-1:0] pays[NPKT];
  int npkt_seen = 0;
  logic [511:0] held_data; logic held = 0;
  int nbeats = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (held) check(tvalid && tdata == held_data, "stalled beat changed");
      held = tvalid && !tready;
      held_data = tdata;
      if (tvalid && tready) begin
        nbeats++;
        for (int i = 0; i < 64; i++) if (tkeep[i]) got_b.push_back(tdata[8*i +: 8]);
        if (!tlast) check(tkeep == '1, "partial tkeep before tlast");
        if (tlast) begin
          build(seqs[npkt_seen], pays[npkt_seen]);
          check(nbeats == G + 2, $sformatf("packet beats %0d", nbeats));
          check(got_b.size() == exp_b.size(), $sformatf("packet length %0d vs %0d", got_b.size(), exp_b.size()));
          for (int i = 0; i < exp_b.size() && i < got_b.size(); i++)
            check(got_b[i] == exp_b[i], $sformatf("pkt %0d byte %0d: %h vs %h", npkt_seen, i, got_b[i], exp_b[i]));
          got_b.delete();
          nbeats = 0;
          npkt_seen++;
        end
      end
    end
  end

  initial begin
    cfg.dst_mac = 48'h02_11_22_33_44_55; cfg.src_mac = 48'h02_AA_BB_CC_DD_EE;
    cfg.src_ip = 32'h0A00_0001; cfg.dst_ip = 32'h0A00_0002;
    cfg.udp_src_port = 16'hC0DE; cfg.dst_qp = 24'h00_01_23; cfg.rkey = 32'h1234_5678;
    cfg.va_base = 64'h0000_7F00_0000_0000; cfg.ring_log2 = 5'd2;
    // A stray non-start word ahead of the first group.
    q.push_back('{sop: 1'b0, seq: 32'd99, data: '1});
    for (int p = 0; p < NPKT; p++) begin
      seqs[p] = (p < 3) ? p : p + 2;   // groups 3 and 4 were dropped upstream
      for (int b = 0; b < G; b++) begin
        buf_word_t w;
        w.sop = (b == 0); w.seq = 32'(seqs[p]);
        for (int k = 0; k < 16; k++) w.data[32*k +: 32] = $urandom;
        pays[p][512*b +: 512] = w.data;
        q.push_back(w);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) en = 1'b1;
    while (npkt_seen < NPKT) begin
      @(negedge clk) tready = ($urandom % 4 != 0);
    end
    @(negedge clk) tready = 1'b1;
    repeat (4) @(posedge clk);
    check(pkts == NPKT, $sformatf("pkts_sent %0d", pkts));
    check(resyncs == 1, $sformatf("resync_drops %0d", resyncs));
    check(stalls > 0, "no stall seen");
    check(!tvalid && q.size() == 0, "idle with empty buffer at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
