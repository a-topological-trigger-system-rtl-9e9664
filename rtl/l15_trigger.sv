// l15_trigger: the camera-level (L1.5) trigger of one telescope.
//
// The discriminated pixel signals reach this block after the FPGA's
// programmable input delays (64 taps of 78.125 ps, up to 5 ns).  The tap
// setting of every pixel is held here in a register file written through a
// simple port (tap_we/tap_addr/tap_wdata) and driven out on tap_value to the
// delay elements, which are outside the logic.  The signals are sampled at the
// 400 MHz clock and stretched to a coincidence gate of win_cycles clocks
// (hit_stretcher); a trigger fires when three mutually adjacent pixels are
// gated together (nn_coincidence).  trig is a one-clock pulse on the first
// clock of a coincidence; it rises on the fifth clock edge after the
// discriminator edges that complete the triple (two synchroniser stages, the
// gate counter, the coincidence register and this pulse register), with the
// gate map of that clock on hit_map; trig_count counts pulses (the rate
// scaler).  The paper gives the 400 MHz sampling, the delay range and step,
// the nearest-neighbour triple and a programmable window; the register port,
// reset values and the single-pulse output are this design's choices.  The
// paper spreads L1.5 over three cards per camera; here it is one block.
module l15_trigger
  import topo_pkg::*;
#(
  parameter int RADIUS = 13,
  parameter int unsigned WIN_W = 4,
  localparam int NPIX  = hex_npix(RADIUS),
  localparam int AW    = $clog2(NPIX)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NPIX-1:0]  disc,
  input  logic [WIN_W-1:0] win_cycles,
  input  logic             tap_we,
  input  logic [AW-1:0]    tap_addr,
  input  logic [TAP_W-1:0] tap_wdata,
  output logic [TAP_W-1:0] tap_value [NPIX],
  output logic             trig,
  output logic [NPIX-1:0]  hit_map,
  output logic [31:0]      trig_count
);
  logic [NPIX-1:0] hit;
  logic            coinc, coinc_d;
  logic [NPIX-1:0] map_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPIX; i++) tap_value[i] <= '0;
    end else if (tap_we && tap_addr < AW'(NPIX)) begin
      tap_value[tap_addr] <= tap_wdata;
    end
  end

  hit_stretcher #(.NCH(NPIX), .WIN_W(WIN_W)) u_stretch (
    .clk, .rst_n, .disc, .win_cycles, .hit
  );

  nn_coincidence #(.RADIUS(RADIUS)) u_nn (
    .clk, .rst_n, .hit, .trig(coinc), .hit_map(map_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coinc_d    <= 1'b0;
      trig       <= 1'b0;
      hit_map    <= '0;
      trig_count <= '0;
    end else begin
      coinc_d <= coinc;
      trig    <= coinc & ~coinc_d;
      if (coinc & ~coinc_d) begin
        hit_map    <= map_q;
        trig_count <= trig_count + 1'b1;
      end
    end
  end
endmodule
