// hit_stretcher: samples the discriminated pixel signals at the trigger clock
// and stretches each new hit into a coincidence gate.
//
// Each channel passes through two synchronising flip-flops (the signals
// arrive asynchronously from the discriminators, after the FPGA input
// delays).  A rising edge of the synchronised signal loads a down-counter with
// win_cycles; the gate hit[ch] is high while the counter is non-zero, i.e. for
// win_cycles clocks.  Two hits therefore overlap when their sampled edges are
// less than win_cycles clocks apart: at 400 MHz, win_cycles = 2 gives the 5 ns
// window of the paper and each step is 2.5 ns.  Latency from input edge to
// gate is three clocks.  The edge-triggered counter is this design's choice.
module hit_stretcher #(
  parameter int unsigned NCH   = 547,
  parameter int unsigned WIN_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NCH-1:0]   disc,
  input  logic [WIN_W-1:0] win_cycles,
  output logic [NCH-1:0]   hit
);
  logic [NCH-1:0]   s1, s2, s3;
  logic [WIN_W-1:0] cnt [NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
      s3 <= '0;
    end else begin
      s1 <= disc;
      s2 <= s1;
      s3 <= s2;
    end
  end

  for (genvar ch = 0; ch < NCH; ch++) begin : g_ch
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                cnt[ch] <= '0;
      else if (s2[ch] && !s3[ch]) cnt[ch] <= win_cycles;
      else if (cnt[ch] != '0)     cnt[ch] <= cnt[ch] - 1'b1;
    end
    assign hit[ch] = (cnt[ch] != '0);
  end
endmodule
