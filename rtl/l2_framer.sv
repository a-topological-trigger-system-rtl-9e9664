// l2_framer: sends one camera event from L2 to L3 as a frame of link words.
//
// An event (telescope number, GPS time stamp, hit count and first-moment
// sums) is taken when ev_valid is high and the framer is idle; an event that
// arrives while a frame is still going out is dropped and counted in
// drop_count.  A free-running divider makes a word slot every WORD_DIV clocks
// (40 clocks at 400 MHz gives the 10 MHz rate of the paper).  The frame is
// FRAME_WORDS = 9 words of 16 bits: a header marked by tx_k with code 0xBC and
// the telescope number, seconds (2 words), ticks (2 words), hit count, sx2,
// sr, and the XOR of the eight words before it.  tx_valid marks each word for
// one clock.  A frame takes 9 word slots, 0.9 us at 10 MHz.  The paper gives
// the content and the 10 MHz rate; the word format, check word and one-event
// buffer are this design's choices.
module l2_framer
  import topo_pkg::*;
#(
  parameter int unsigned WORD_DIV = 40
) (
  input  logic              clk,
  input  logic              rst_n,
  input  l2_event_t         ev,
  input  logic              ev_valid,
  output logic              busy,
  output logic [WORD_W-1:0] tx_data,
  output logic              tx_k,
  output logic              tx_valid,
  output logic [15:0]       drop_count
);
  localparam int unsigned DW = (WORD_DIV > 1) ? $clog2(WORD_DIV) : 1;

  l2_event_t         ev_q;
  logic [DW-1:0]     div;
  logic              slot;
  logic [3:0]        wcnt;
  logic [WORD_W-1:0] chk;
  logic [WORD_W-1:0] word;

  assign slot = (div == '0);
  assign word = (wcnt == 4'(FRAME_WORDS - 1)) ? chk : frame_word(ev_q, int'(wcnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_q       <= '0;
      div        <= '0;
      wcnt       <= '0;
      chk        <= '0;
      busy       <= 1'b0;
      tx_data    <= '0;
      tx_k       <= 1'b0;
      tx_valid   <= 1'b0;
      drop_count <= '0;
    end else begin
      div      <= (div == DW'(WORD_DIV - 1)) ? '0 : div + 1'b1;
      tx_valid <= 1'b0;
      if (ev_valid) begin
        if (!busy) begin
          ev_q <= ev;
          wcnt <= '0;
          chk  <= '0;
          busy <= 1'b1;
        end else begin
          drop_count <= drop_count + 1'b1;
        end
      end
      if (busy && slot) begin
        tx_data  <= word;
        tx_k     <= (wcnt == '0);
        tx_valid <= 1'b1;
        chk      <= chk ^ word;
        wcnt     <= wcnt + 1'b1;
        if (wcnt == 4'(FRAME_WORDS - 1)) busy <= 1'b0;
      end
    end
  end

  // words leave only in word slots, at most one per WORD_DIV clocks
  a_rate: assert property (@(posedge clk) disable iff (!rst_n)
                           tx_valid |=> !tx_valid);
endmodule
