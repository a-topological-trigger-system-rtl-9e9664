// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// A start pulse loads dividend and divisor; WN clocks later done pulses for
// one cycle with quotient = dividend / divisor (truncated).  busy is high in
// between and start is ignored then.  A zero divisor gives an all-ones
// quotient.  Used by the L3 parallax unit; a design choice, the paper does not
// say how the arithmetic is built.
module seq_divider #(
  parameter int unsigned WN = 64,
  parameter int unsigned WD = 40
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [WN-1:0] dividend,
  input  logic [WD-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [WN-1:0] quotient
);
  localparam int unsigned CW = $clog2(WN + 1);

  logic [WD-1:0] rem;
  logic [WN-1:0] quo;
  logic [WD-1:0] dvs;
  logic [CW-1:0] cnt;
  logic [WD:0]   rem_sh;

  assign rem_sh = {rem, quo[WN-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem      <= '0;
      quo      <= '0;
      dvs      <= '0;
      cnt      <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      quotient <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          rem  <= '0;
          quo  <= dividend;
          dvs  <= divisor;
          cnt  <= CW'(WN);
          busy <= 1'b1;
        end
      end else begin
        if (rem_sh >= {1'b0, dvs}) begin
          rem <= WD'(rem_sh - {1'b0, dvs});
          quo <= {quo[WN-2:0], 1'b1};
        end else begin
          rem <= rem_sh[WD-1:0];
          quo <= {quo[WN-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          quotient <= (rem_sh >= {1'b0, dvs}) ? {quo[WN-2:0], 1'b1} : {quo[WN-2:0], 1'b0};
        end
      end
    end
  end

  // done is a single pulse at the end of a division, never while busy
  a_done_idle: assert property (@(posedge clk) disable iff (!rst_n) done |-> !busy);
endmodule
