// tb_nsb_accidentals: single-camera night-sky-background workload for the
// L1.5 trigger at its default size (547 pixels, 400 MHz).
//
// Every pixel receives independent random hits with probability P per clock
// (night-sky photons above threshold).  The camera is run for NCLK clocks
// with a 5 ns gate (2 clocks) and again with a 7.5 ns gate (3 clocks), and the
// accidental trigger counts are compared.  Three gates of W clocks overlap
// when the three sampled edges lie within W-1 clocks of each other; per
// triangle and per clock of the earliest edge there are W^3 - (W-1)^3 such
// edge patterns, so the expected accidental count is
//   N_tri (W^3 - (W-1)^3) P^3 NCLK,
// with N_tri found by the testbench's own enumeration.  Both measured counts
// must lie within 0.6-1.5 of this estimate, and the longer gate must give
// about 19/7 = 2.7 times more accidentals (accepted 2.0-3.6): the effect
// behind the lower accidental rate reported for the shorter window of the
// prototype.  trig_count must equal the pulses seen.
module tb_nsb_accidentals;
  import tb_geom::*;

  localparam int RAD  = 13;
  localparam int NPIX = 547;
  localparam int NCLK = 80000;
  localparam int PPM  = 6000;     // hit probability per pixel and clock, 1e-6 units

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic [NPIX-1:0] disc;
  logic [3:0]      win_cycles;
  logic            tap_we;
  logic [9:0]      tap_addr;
  logic [5:0]      tap_wdata;
  logic [5:0]      tap_value [NPIX];
  logic            trig;
  logic [NPIX-1:0] hit_map;
  logic [31:0]     trig_count;

  int checks = 0, failures = 0, pulses = 0;

  l15_trigger dut (.*);

  always #1 clk = ~clk;
  always @(posedge clk) if (rst_n && trig) pulses++;

  initial begin
    repeat (3 * NCLK) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(int w, output int n);
    int p0;
    win_cycles = 4'(w);
    repeat (10) @(negedge clk);
    p0 = pulses;
    for (int c = 0; c < NCLK; c++) begin
      @(negedge clk);
      for (int i = 0; i < NPIX; i++) disc[i] = ($urandom_range(0, 999999) < PPM);
    end
    disc = '0;
    repeat (10) @(negedge clk);
    n = pulses - p0;
  endtask

  initial begin
    int n2, n3, ntri, q, r;
    real p, est2, est3, ratio;
    disc = '0; win_cycles = 4'd2; tap_we = 0; tap_addr = '0; tap_wdata = '0;
    // triangles of the camera, by enumeration
    ntri = 0;
    for (int i = 0; i < NPIX; i++) begin
      tb_qr(RAD, i, q, r);
      if (tb_idx(RAD, q + 1, r) >= 0 && tb_idx(RAD, q, r + 1) >= 0) ntri++;
      if (tb_idx(RAD, q + 1, r) >= 0 && tb_idx(RAD, q, r + 1) >= 0 && tb_idx(RAD, q + 1, r + 1) >= 0) ntri++;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2, n2);
    run(3, n3);
    p = real'(PPM) * 1e-6;
    est2 = ntri * (8.0 - 1.0) * p * p * p * NCLK;
    est3 = ntri * (27.0 - 8.0) * p * p * p * NCLK;
    ratio = real'(n3) / (n2 > 0 ? real'(n2) : 1.0);
    $display("triangles=%0d  accidentals: 5 ns gate %0d, 7.5 ns gate %0d (ratio %0.2f); estimates %0.0f and %0.0f",
             ntri, n2, n3, ratio, est2, est3);
    $display("accidental rate at 5 ns: %0.1f kHz per camera", real'(n2) / (NCLK * 2.5e-9) / 1e3);
    check(n2 > 20, "accidentals occur with a 5 ns gate");
    check(ratio > 2.0 && ratio < 3.6, "longer gate gives about 19/7 more accidentals");
    check(real'(n2) > 0.6 * est2 && real'(n2) < 1.5 * est2, "5 ns count near the estimate");
    check(real'(n3) > 0.6 * est3 && real'(n3) < 1.5 * est3, "7.5 ns count near the estimate");
    check(trig_count == 32'(pulses), "rate scaler matches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
