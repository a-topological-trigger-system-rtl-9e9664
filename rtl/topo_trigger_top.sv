// topo_trigger_top: topological trigger for an array of NTEL imaging
// atmospheric-Cherenkov telescopes.
//
// Per telescope t (one generate branch each):
//   l15_trigger    samples the delayed discriminator outputs disc[t] at the
//                  400 MHz clock and fires on three neighbouring pixels;
//   gps_timestamp  stamps the trigger with GPS second and 2.5 ns tick;
//   image_moments  forms the first moments of the hit map (L2);
//   l2_framer      sends hit count, moments and stamp as a 9-word frame on
//                  link_tx_* at one word per WORD_DIV clocks (10 MHz).
// A camera trigger that arrives while that telescope's L2 is still busy with
// the previous one is lost and counted in l2_dead_count[t] (dead time).
// The optical links are outside the logic: link_tx_* leave the top and the
// L3 side takes its words from link_rx_*.  On L3 one l3_deframer per link
// rebuilds the events, ts_coincidence looks for at least MIN_TEL stamps
// within WINDOW_TICKS, and parallax_unit computes the parallaxwidth of the
// coincidence and compares it with its look-up table.  arr_done pulses when a
// coincidence has been judged, with arr_accept the array trigger decision and
// arr_ts the coincidence stamp.  A coincidence found while parallax_unit is
// still busy is lost and counted in n_l3_drop.  The programmable delay taps of
// the FPGA inputs are driven on tap_value; telescope ground positions
// (tel_x/tel_y) and the look-up table are configuration inputs.  One clock
// drives everything here; the 10 MHz link rate is a clock enable.  The
// three-level structure, the rates and the parallaxwidth cut follow the
// paper; the partitioning into these blocks and every interface between them
// are this design's choices.
module topo_trigger_top
  import topo_pkg::*;
#(
  parameter int          NTEL           = 4,
  parameter int          RADIUS         = 13,
  parameter int unsigned WIN_W          = 4,
  parameter int unsigned TICKS_PER_SEC  = 400_000_000,
  parameter int unsigned WORD_DIV       = 40,
  parameter int unsigned WINDOW_TICKS   = 40,
  parameter int unsigned MIN_TEL        = 3,
  parameter int unsigned COLLECT_CYCLES = 1000,
  parameter int unsigned NPIX_MIN       = 5,
  parameter int unsigned SIN2_Q8        = 64,
  parameter int          POS_W          = 16,
  localparam int         NPIX           = hex_npix(RADIUS),
  localparam int         AW             = $clog2(NPIX),
  localparam int         LW             = $clog2(NTEL + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // camera inputs and L1.5 configuration
  input  logic [NPIX-1:0]         disc           [NTEL],
  input  logic [WIN_W-1:0]        win_cycles,
  input  logic [NTEL-1:0]         tap_we,
  input  logic [AW-1:0]           tap_addr,
  input  logic [TAP_W-1:0]        tap_wdata,
  output logic [TAP_W-1:0]        tap_value      [NTEL][NPIX],
  // GPS
  input  logic                    pps,
  input  logic [SEC_W-1:0]        pps_sec,
  // L2 -> L3 links
  output logic [WORD_W-1:0]       link_tx_data   [NTEL],
  output logic [NTEL-1:0]         link_tx_k,
  output logic [NTEL-1:0]         link_tx_valid,
  input  logic [WORD_W-1:0]       link_rx_data   [NTEL],
  input  logic [NTEL-1:0]         link_rx_k,
  input  logic [NTEL-1:0]         link_rx_valid,
  // L3 configuration
  input  logic signed [POS_W-1:0] tel_x          [NTEL],
  input  logic signed [POS_W-1:0] tel_y          [NTEL],
  input  logic                    lut_we,
  input  logic [LW-1:0]           lut_addr,
  input  logic [31:0]             lut_wdata,
  // results and counters
  output logic [NTEL-1:0]         cam_trig,
  output logic [31:0]             cam_trig_count [NTEL],
  output logic [15:0]             l2_dead_count  [NTEL],
  output logic [15:0]             link_err_count [NTEL],
  output logic                    arr_done,
  output logic                    arr_accept,
  output timestamp_t              arr_ts,
  output logic [31:0]             arr_width_sq,
  output logic [LW-1:0]           arr_n_tel,
  output logic [7:0]              arr_n_cross,
  output logic [31:0]             n_coinc,
  output logic [31:0]             n_lowmult,
  output logic [31:0]             n_angle_cut,
  output logic [31:0]             n_l3_drop
);
  l2_event_t       rx_ev [NTEL];
  logic [NTEL-1:0] rx_ev_valid;

  for (genvar t = 0; t < NTEL; t++) begin : g_tel
    logic [NPIX-1:0]         hit_map;
    logic                    m_busy, m_done, f_busy, l2_busy, take;
    logic [NPIX_W-1:0]       npix;
    logic signed [MOM_W-1:0] sx2, sr;
    timestamp_t              ts_now, ts_stamp;
    l2_event_t               ev;
    logic [15:0]             f_drop;

    l15_trigger #(.RADIUS(RADIUS), .WIN_W(WIN_W)) u_l15 (
      .clk, .rst_n, .disc(disc[t]), .win_cycles,
      .tap_we(tap_we[t]), .tap_addr, .tap_wdata, .tap_value(tap_value[t]),
      .trig(cam_trig[t]), .hit_map, .trig_count(cam_trig_count[t])
    );

    assign l2_busy = m_busy | f_busy;
    assign take    = cam_trig[t] & ~l2_busy;

    gps_timestamp #(.TICKS_PER_SEC(TICKS_PER_SEC)) u_ts (
      .clk, .rst_n, .pps, .pps_sec, .latch(take), .now(ts_now), .stamp(ts_stamp)
    );

    image_moments #(.RADIUS(RADIUS)) u_mom (
      .clk, .rst_n, .start(take), .hit_map, .busy(m_busy), .done(m_done),
      .npix, .sx2, .sr
    );

    always_comb begin
      ev.tel_id = TID_W'(t);
      ev.ts     = ts_stamp;
      ev.npix   = npix;
      ev.sx2    = sx2;
      ev.sr     = sr;
    end

    l2_framer #(.WORD_DIV(WORD_DIV)) u_tx (
      .clk, .rst_n, .ev, .ev_valid(m_done), .busy(f_busy),
      .tx_data(link_tx_data[t]), .tx_k(link_tx_k[t]), .tx_valid(link_tx_valid[t]),
      .drop_count(f_drop)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                     l2_dead_count[t] <= '0;
      else if (cam_trig[t] && l2_busy) l2_dead_count[t] <= l2_dead_count[t] + 1'b1;
    end

    l3_deframer u_rx (
      .clk, .rst_n, .rx_data(link_rx_data[t]), .rx_k(link_rx_k[t]),
      .rx_valid(link_rx_valid[t]), .ev(rx_ev[t]), .ev_valid(rx_ev_valid[t]),
      .err_count(link_err_count[t])
    );
  end

  logic            c_valid, p_busy, p_start;
  logic [NTEL-1:0] c_mask;
  timestamp_t      c_ts;
  l2_event_t       c_ev [NTEL];

  ts_coincidence #(
    .NTEL(NTEL), .WINDOW_TICKS(WINDOW_TICKS), .MIN_TEL(MIN_TEL),
    .COLLECT_CYCLES(COLLECT_CYCLES), .TICKS_PER_SEC(TICKS_PER_SEC)
  ) u_coinc (
    .clk, .rst_n, .ev(rx_ev), .ev_valid(rx_ev_valid),
    .arr_valid(c_valid), .arr_mask(c_mask), .arr_ts(c_ts), .arr_ev(c_ev),
    .n_coinc, .n_lowmult
  );

  assign p_start = c_valid & ~p_busy;

  parallax_unit #(
    .NTEL(NTEL), .POS_W(POS_W), .NPIX_MIN(NPIX_MIN), .SIN2_Q8(SIN2_Q8)
  ) u_par (
    .clk, .rst_n, .start(p_start), .mask(c_mask), .ev(c_ev), .tel_x, .tel_y,
    .lut_we, .lut_addr, .lut_wdata, .busy(p_busy), .done(arr_done),
    .accept(arr_accept), .width_sq(arr_width_sq), .n_tel(arr_n_tel),
    .n_cross(arr_n_cross), .n_angle_cut
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arr_ts    <= '0;
      n_l3_drop <= '0;
    end else begin
      if (p_start)              arr_ts    <= c_ts;
      if (c_valid && p_busy)    n_l3_drop <= n_l3_drop + 1'b1;
    end
  end
endmodule
