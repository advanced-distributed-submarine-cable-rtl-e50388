// async_fifo: dual-clock FIFO that buffers captured sample words between the
// 125 MHz converter clock and the Ethernet MAC clock.
//
// It stands in for the large DDR-based capture buffer of the interrogator:
// the capture side writes one word per converter clock while the packet side
// drains it in bursts, one RDMA packet at a time, at the MAC's rate. Here the
// storage is an on-chip array of DEPTH words; a DDR controller would sit
// behind the same two ports.
//
// Classic structure: binary read/write pointers one bit wider than the
// address, exchanged between the domains as Gray code through two-flop
// synchronisers. The write side sees a conservative free-space count
// (`wr_free`), the read side a conservative fill count (`rd_count`).
// Read data is show-ahead: `rd_data` is the oldest word whenever `rd_empty` is
// low, and `rd_en` pops it. Writing while full or reading while empty is a
// protocol error, flagged by assertions. Each domain has its own reset; both
// must be asserted together.
module async_fifo #(
  parameter int unsigned W     = 545,
  parameter int unsigned DEPTH = 1024   // power of two
) (
  input  logic              wr_clk,
  input  logic              wr_rst_n,
  input  logic              wr_en,
  input  logic [W-1:0]      wr_data,
  output logic [$clog2(DEPTH):0] wr_free,
  input  logic              rd_clk,
  input  logic              rd_rst_n,
  input  logic              rd_en,
  output logic [W-1:0]      rd_data,
  output logic              rd_empty,
  output logic [$clog2(DEPTH):0] rd_count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    for (int i = AW; i >= 0; i--) b[i] = (i == AW) ? g[i] : (b[i+1] ^ g[i]);
    return b;
  endfunction

  // ---------------- write domain ----------------
  logic [AW:0] wptr, wptr_gray, rptr_gray_w1, rptr_gray_w2, rptr_w;
  logic [AW:0] rptr, rptr_gray, wptr_gray_r1, wptr_gray_r2, wptr_r;

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wptr <= '0; wptr_gray <= '0; rptr_gray_w1 <= '0; rptr_gray_w2 <= '0;
    end else begin
      rptr_gray_w1 <= rptr_gray;
      rptr_gray_w2 <= rptr_gray_w1;
      if (wr_en) begin
        wptr      <= wptr + 1'b1;
        wptr_gray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en) mem[wptr[AW-1:0]] <= wr_data;
  end

  assign rptr_w  = gray2bin(rptr_gray_w2);
  assign wr_free = (AW+1)'(DEPTH) - (wptr - rptr_w);

  // ---------------- read domain ----------------

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rptr <= '0; rptr_gray <= '0; wptr_gray_r1 <= '0; wptr_gray_r2 <= '0;
    end else begin
      wptr_gray_r1 <= wptr_gray;
      wptr_gray_r2 <= wptr_gray_r1;
      if (rd_en) begin
        rptr      <= rptr + 1'b1;
        rptr_gray <= bin2gray(rptr + 1'b1);
      end
    end
  end

  assign wptr_r   = gray2bin(wptr_gray_r2);
  assign rd_count = wptr_r - rptr;
  assign rd_empty = (rd_count == '0);
  assign rd_data  = mem[rptr[AW-1:0]];

  // ---------------- protocol checks ----------------
  a_no_write_when_full: assert property (
    @(posedge wr_clk) disable iff (!wr_rst_n) !(wr_en && wr_free == '0))
    else $error("async_fifo: write while full");
  a_no_read_when_empty: assert property (
    @(posedge rd_clk) disable iff (!rd_rst_n) !(rd_en && rd_empty))
    else $error("async_fifo: read while empty");

endmodule
