// l3_deframer: rebuilds camera events from one telescope's link words on L3.
//
// It waits for a header word (rx_k high, code 0xBC in the upper byte), then
// collects the next FRAME_WORDS-1 words, XORing all of them.  When the last
// (check) word makes the XOR zero, the event is put on ev with a one-clock
// ev_valid pulse on the clock after that word.  A failed check, or a header
// arriving inside a frame, counts in err_count; such a header starts a new
// frame.  The word format is the one l2_framer sends; it is this design's
// choice, the paper only says the parameters and time stamp go to L3 over a
// fibre link.
module l3_deframer
  import topo_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [WORD_W-1:0] rx_data,
  input  logic              rx_k,
  input  logic              rx_valid,
  output l2_event_t         ev,
  output logic              ev_valid,
  output logic [15:0]       err_count
);
  logic              active;
  logic [3:0]        wcnt;
  logic [WORD_W-1:0] chk;
  logic [WORD_W-1:0] w [FRAME_WORDS-1];
  logic              is_hdr;

  assign is_hdr = rx_valid && rx_k && (rx_data[15:8] == SOF_CODE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      wcnt      <= '0;
      chk       <= '0;
      ev        <= '0;
      ev_valid  <= 1'b0;
      err_count <= '0;
      for (int i = 0; i < FRAME_WORDS - 1; i++) w[i] <= '0;
    end else begin
      ev_valid <= 1'b0;
      if (is_hdr) begin
        if (active) err_count <= err_count + 1'b1;
        active <= 1'b1;
        w[0]   <= rx_data;
        chk    <= rx_data;
        wcnt   <= 4'd1;
      end else if (rx_valid && active) begin
        if (wcnt == 4'(FRAME_WORDS - 1)) begin
          active <= 1'b0;
          if ((chk ^ rx_data) == '0) begin
            ev.tel_id   <= w[0][TID_W-1:0];
            ev.ts.sec   <= {w[1], w[2]};
            ev.ts.sub   <= {w[3][12:0], w[4]};
            ev.npix     <= w[5][NPIX_W-1:0];
            ev.sx2      <= w[6];
            ev.sr       <= w[7];
            ev_valid    <= 1'b1;
          end else begin
            err_count <= err_count + 1'b1;
          end
        end else begin
          w[wcnt[2:0]] <= rx_data;
          chk     <= chk ^ rx_data;
          wcnt    <= wcnt + 1'b1;
        end
      end
    end
  end
endmodule
