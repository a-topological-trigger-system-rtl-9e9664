// gps_timestamp: GPS-disciplined time-stamp counter of one telescope.
//
// The counter holds a GPS second and a count of clock ticks (2.5 ns at
// 400 MHz) inside that second.  The receiver's pulse-per-second is
// synchronised with two flip-flops; its rising edge loads pps_sec as the new
// second and clears the tick count, so the stamp is aligned to GPS once per
// second.  Between pulses the counter runs freely and rolls into the next
// second after TICKS_PER_SEC ticks, so a missing pulse costs no time.  latch
// copies the running value to stamp on the next clock (stamp is valid one
// clock after latch).  The paper only states that a GPS time stamp is sent
// with the image parameters; the tick unit, the roll-over rule and the PPS
// handling are this design's choices.
module gps_timestamp
  import topo_pkg::*;
#(
  parameter int unsigned TICKS_PER_SEC = 400_000_000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pps,
  input  logic [SEC_W-1:0] pps_sec,
  input  logic             latch,
  output timestamp_t       now,
  output timestamp_t       stamp
);
  logic pps_s1, pps_s2, pps_s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pps_s1 <= 1'b0;
      pps_s2 <= 1'b0;
      pps_s3 <= 1'b0;
      now    <= '0;
      stamp  <= '0;
    end else begin
      pps_s1 <= pps;
      pps_s2 <= pps_s1;
      pps_s3 <= pps_s2;
      if (pps_s2 && !pps_s3) begin
        now.sec <= pps_sec;
        now.sub <= '0;
      end else if (now.sub == SUB_W'(TICKS_PER_SEC - 1)) begin
        now.sec <= now.sec + 1'b1;
        now.sub <= '0;
      end else begin
        now.sub <= now.sub + 1'b1;
      end
      if (latch) stamp <= now;
    end
  end
endmodule
