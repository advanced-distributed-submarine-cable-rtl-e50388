// adc_capture: packs the two receiver ADC streams into sample-buffer words.
//
// The polarization-diverse heterodyne receiver delivers two real signals, one
// per polarization, each digitised at 2 GS/s with 14 bits: LANES = 16 samples
// per 125 MHz clock and channel. Each clock's samples become one 512-bit word:
// bits [16*s +: 16] hold X sample s and bits [256 + 16*s +: 16] hold Y sample
// s, sign-extended to 16 bits (little-endian int16 in the receiver's memory).
//
// Words are grouped GROUP beats at a time, one group per outgoing RDMA
// packet. Each group carries a sequence number `seq` and its first word a
// start flag. A group is written only if the buffer has room for all of it
// when it starts; otherwise the whole group is dropped, counted, and its
// sequence number skipped. The number therefore fixes where every group lands
// in the receiver's ring buffer, so a drop leaves a hole there but never
// shifts later data. When `capture_en` falls the current group is completed.
//
// Timing: one cycle from ADC word to buffer write. Sequence number, layout
// and drop policy are this design's choices.
module adc_capture
  import ofdr_pkg::*;
#(
  parameter int unsigned LANES = ADC_LANES,
  parameter int unsigned W     = ADC_W,
  parameter int unsigned GROUP = GROUP_BEATS,
  parameter int unsigned FREE_W = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        capture_en,
  input  logic                        adc_valid,
  input  logic signed [LANES-1:0][W-1:0] adc_x,
  input  logic signed [LANES-1:0][W-1:0] adc_y,
  input  logic [FREE_W-1:0]           buf_free,    // free words in the buffer
  output logic                        wr_en,
  output buf_word_t                   wr_word,
  output logic [31:0]                 groups_written,
  output logic [31:0]                 groups_dropped
);

  localparam int unsigned SW = BEAT_W / (2 * LANES);  // bits per packed sample
  localparam int unsigned BW = (GROUP > 1) ? $clog2(GROUP) : 1;

  logic [BW-1:0] bidx;      // beat index inside the current group
  logic [31:0]   seq;
  logic          keep_q;    // decision for the current group
  logic          active, first, keep, last;

  assign active = adc_valid && (capture_en || bidx != '0);
  assign first  = (bidx == '0);
  assign last   = (32'(bidx) == GROUP - 1);
  assign keep   = first ? (32'(buf_free) >= GROUP) : keep_q;

  function automatic logic [BEAT_W-1:0] pack(input logic signed [LANES-1:0][W-1:0] x,
                                             input logic signed [LANES-1:0][W-1:0] y);
    logic [BEAT_W-1:0] d;
    d = '0;
    for (int s = 0; s < LANES; s++) begin
      d[SW*s +: SW]           = SW'($signed(x[s]));
      d[SW*(LANES+s) +: SW]   = SW'($signed(y[s]));
    end
    return d;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bidx <= '0; seq <= '0; keep_q <= 1'b0;
      wr_en <= 1'b0; wr_word <= '0;
      groups_written <= '0; groups_dropped <= '0;
    end else begin
      wr_en <= active && keep;
      if (active) begin
        wr_word.sop  <= first;
        wr_word.seq  <= seq;
        wr_word.data <= pack(adc_x, adc_y);
        keep_q <= keep;
        if (first) begin
          if (keep) groups_written <= groups_written + 32'd1;
          else      groups_dropped <= groups_dropped + 32'd1;
        end
        if (last) begin
          bidx <= '0;
          seq  <= seq + 32'd1;
        end else begin
          bidx <= bidx + BW'(1);
        end
      end
    end
  end

endmodule
