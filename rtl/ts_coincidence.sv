// ts_coincidence: L3 search for camera events with coincident time stamps.
//
// Events arrive from NTEL deframers.  The first event after an idle period
// opens a collection period of COLLECT_CYCLES clocks, long enough for the
// frames of all telescopes that saw the same shower to arrive; its time
// stamp is the reference.  Every telescope's first event in the period is
// kept (later ones in the same period are ignored).  When the period ends,
// the telescopes whose stamps lie within WINDOW_TICKS ticks of the reference
// form the coincidence mask; if at least MIN_TEL are set, arr_valid pulses
// for one clock with the mask, the reference stamp and the kept events
// (arr_ev), and n_coinc counts it, otherwise n_lowmult counts it.  Stamps in
// neighbouring seconds are compared across the second boundary using
// TICKS_PER_SEC.  The paper asks for a search for coincident time stamps and
// uses at least three telescopes; the window, the collection scheme and the
// first-event reference are this design's choices.
module ts_coincidence
  import topo_pkg::*;
#(
  parameter int          NTEL           = 4,
  parameter int unsigned WINDOW_TICKS   = 40,
  parameter int unsigned MIN_TEL        = 3,
  parameter int unsigned COLLECT_CYCLES = 1000,
  parameter int unsigned TICKS_PER_SEC  = 400_000_000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  l2_event_t        ev       [NTEL],
  input  logic [NTEL-1:0]  ev_valid,
  output logic             arr_valid,
  output logic [NTEL-1:0]  arr_mask,
  output timestamp_t       arr_ts,
  output l2_event_t        arr_ev   [NTEL],
  output logic [31:0]      n_coinc,
  output logic [31:0]      n_lowmult
);
  localparam int unsigned CW = $clog2(COLLECT_CYCLES + 1);

  l2_event_t       slot  [NTEL];
  logic [NTEL-1:0] slot_v;
  timestamp_t      ref_ts;
  logic            collecting;
  logic [CW-1:0]   timer;
  logic [NTEL-1:0] in_win;
  int unsigned     n_in;
  timestamp_t      first_ts;

  // |a - b| in ticks, saturated; stamps more than one second apart never match.
  function automatic logic [31:0] ts_absdiff(timestamp_t a, timestamp_t b);
    logic [SEC_W-1:0] ds;
    logic [31:0]      d;
    ds = a.sec - b.sec;
    if (ds == '0)
      d = (a.sub >= b.sub) ? 32'(a.sub - b.sub) : 32'(b.sub - a.sub);
    else if (ds == SEC_W'(1))
      d = 32'(TICKS_PER_SEC) - 32'(b.sub) + 32'(a.sub);
    else if (ds == '1)
      d = 32'(TICKS_PER_SEC) - 32'(a.sub) + 32'(b.sub);
    else
      d = '1;
    return d;
  endfunction

  always_comb begin
    n_in = 0;
    for (int i = 0; i < NTEL; i++) begin
      in_win[i] = slot_v[i] && (ts_absdiff(slot[i].ts, ref_ts) <= WINDOW_TICKS);
      if (in_win[i]) n_in++;
    end
    first_ts = '0;
    for (int i = NTEL - 1; i >= 0; i--)
      if (ev_valid[i]) first_ts = ev[i].ts;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_v     <= '0;
      ref_ts     <= '0;
      collecting <= 1'b0;
      timer      <= '0;
      arr_valid  <= 1'b0;
      arr_mask   <= '0;
      arr_ts     <= '0;
      n_coinc    <= '0;
      n_lowmult  <= '0;
      for (int i = 0; i < NTEL; i++) begin
        slot[i]   <= '0;
        arr_ev[i] <= '0;
      end
    end else begin
      arr_valid <= 1'b0;
      if (!collecting) begin
        if (ev_valid != '0) begin
          collecting <= 1'b1;
          timer      <= CW'(COLLECT_CYCLES);
          ref_ts     <= first_ts;
          slot_v     <= ev_valid;
          for (int i = 0; i < NTEL; i++)
            if (ev_valid[i]) slot[i] <= ev[i];
        end
      end else begin
        for (int i = 0; i < NTEL; i++)
          if (ev_valid[i] && !slot_v[i]) begin
            slot[i]   <= ev[i];
            slot_v[i] <= 1'b1;
          end
        timer <= timer - 1'b1;
        if (timer == CW'(1)) begin
          collecting <= 1'b0;
          slot_v     <= '0;
          if (n_in >= MIN_TEL) begin
            arr_valid <= 1'b1;
            arr_mask  <= in_win;
            arr_ts    <= ref_ts;
            for (int i = 0; i < NTEL; i++) arr_ev[i] <= slot[i];
            n_coinc   <= n_coinc + 1'b1;
          end else begin
            n_lowmult <= n_lowmult + 1'b1;
          end
        end
      end
    end
  end

  // an array event always carries at least MIN_TEL telescopes
  a_mult: assert property (@(posedge clk) disable iff (!rst_n)
                           arr_valid |-> $countones(arr_mask) >= MIN_TEL);
endmodule
