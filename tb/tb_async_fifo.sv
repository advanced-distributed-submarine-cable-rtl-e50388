// tb_async_fifo: writes a numbered sequence at the 125 MHz write clock and
// reads it at an unrelated, faster read clock, both sides throttled at random.
// Checks that every word comes out once and in order, that the write side's
// free count never claims more room than the true free space and the read
// side's fill count never more words than truly stored, that the FIFO
// actually fills up, and that the counts settle to DEPTH free / 0 stored once
// traffic stops.
module tb_async_fifo;

  localparam int unsigned W = 545;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned NWORDS = 600;

  logic wclk = 1'b0, rclk = 1'b0, wrst_n = 1'b0, rrst_n = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0, rd_empty;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH):0] wr_free, rd_count;
  int checks = 0, failures = 0;
  int nwritten = 0, nread = 0, full_seen = 0;

  always #4 wclk = ~wclk;
  always #1.55 rclk = ~rclk;

  async_fifo #(.W(W), .DEPTH(DEPTH)) dut (.wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en,
    .wr_data, .wr_free, .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en, .rd_data, .rd_empty,
    .rd_count);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic logic [W-1:0] word(input int n);
    return {W'(n) * W'(32'h9E37_79B9), 32'(n)};
  endfunction

  initial begin
    #40000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Writer: burst phases and idle phases so that the FIFO fills and drains.
  initial begin
    #20 wrst_n = 1'b1; rrst_n = 1'b1;
    while (nwritten < NWORDS) begin
      @(negedge wclk);
      check(32'(wr_free) <= DEPTH - (nwritten - nread) + 0, "wr_free claims too much room");
      if (wr_free == 0) full_seen++;
      wr_en = (wr_free != 0) && ($urandom % 4 != 0);
      wr_data = word(nwritten);
      if (wr_en) nwritten++;
    end
    @(negedge wclk) wr_en = 1'b0;
  end

  // Reader: slow phases (so the FIFO fills) and fast phases.
  initial begin
    #20;
    while (nread < NWORDS) begin
      @(negedge rclk);
      check(32'(rd_count) <= nwritten - nread, "rd_count claims too many words");
      rd_en = !rd_empty && ((nread / 100) % 2 == 0 ? ($urandom % 16 == 0) : 1'b1);
      if (rd_en) begin
        check(rd_data == word(nread), $sformatf("word %0d out of order", nread));
        nread++;
      end
    end
    @(negedge rclk) rd_en = 1'b0;
    repeat (10) @(negedge wclk);
    check(32'(wr_free) == DEPTH, "free count settles to DEPTH");
    check(rd_count == 0 && rd_empty, "fill count settles to 0");
    check(full_seen > 0, "FIFO never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
