// tb_l15_trigger: self-checking test of the L1.5 camera trigger at its
// default camera size (547 pixels).
//
// Checks: delay-tap register writes and read-back on tap_value; a triangle of
// three simultaneous neighbours fires exactly one trig pulse, five clocks
// after the inputs change, with the three pixels on hit_map; three pixels in
// a row do not fire; a late third pixel fires only while it is inside the
// programmed window (2 and 4 clocks); random sparse patterns fire exactly
// when the testbench's own adjacency search finds a mutually adjacent
// triple; trig_count equals the number of pulses seen.
module tb_l15_trigger;
  import tb_geom::*;

  localparam int RAD  = 13;
  localparam int NPIX = 547;
  localparam int AW   = 10;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic [NPIX-1:0] disc;
  logic [3:0]      win_cycles;
  logic            tap_we;
  logic [AW-1:0]   tap_addr;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Drive a set of pixels high (with per-pixel start offsets in clocks) for
  // 3 clocks, then observe 16 clocks; return number of trig pulses, the
  // clock of the first pulse and the hit map at that pulse.
  task automatic shot(int idx[], int off[], output int np, output int first,
                      output logic [NPIX-1:0] map);
    int maxoff;
    np = 0; first = -1; map = '0;
    maxoff = 0;
    foreach (off[i]) if (off[i] > maxoff) maxoff = off[i];
    // outputs are sampled on falling edges, half a clock after they change
    for (int c = 0; c < maxoff + 3 + 16; c++) begin
      @(negedge clk);
      if (c > 0 && trig) begin
        if (first < 0) begin first = c - 1; map = hit_map; end
        np++;
      end
      foreach (idx[i]) disc[idx[i]] = (c >= off[i] && c < off[i] + 3);
    end
    disc = '0;
    repeat (10) @(posedge clk);
  endtask

  function automatic int ix(int q, int r);
    return tb_idx(RAD, q, r);
  endfunction

  initial begin
    int np, first, q, r, n;
    int idx[], off[];
    logic [NPIX-1:0] map;
    bit expect_t;
    int qq[], rr[];
    disc = '0; win_cycles = 4'd2; tap_we = 0; tap_addr = '0; tap_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(tb_npix(RAD) == NPIX, "pixel count");

    // delay taps
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      tap_we = 1; tap_addr = AW'(i * 27); tap_wdata = 6'(i * 3 + 1);
    end
    @(negedge clk); tap_we = 0;
    @(negedge clk);
    for (int i = 0; i < 20; i++)
      check(tap_value[i * 27] == 6'(i * 3 + 1), $sformatf("tap %0d", i * 27));
    check(tap_value[1] == 6'd0, "untouched tap stays 0");

    // a triangle fires once, on the fifth clock edge after the inputs rise
    idx = '{ix(0, 0), ix(1, 0), ix(0, 1)}; off = '{0, 0, 0};
    shot(idx, off, np, first, map);
    check(np == 1, $sformatf("triangle: %0d pulses", np));
    check(first == 4, $sformatf("triangle latency: pulse after clock %0d", first));
    check(map[idx[0]] && map[idx[1]] && map[idx[2]], "triangle pixels on hit map");
    // down triangle at the camera edge
    idx = '{ix(12, 0), ix(11, 1), ix(12, 1)}; off = '{0, 0, 0};
    check(idx[0] >= 0 && idx[1] >= 0 && idx[2] >= 0, "edge pixels exist");
    shot(idx, off, np, first, map);
    check(np == 1, "edge down-triangle fires");
    // three in a row do not fire
    idx = '{ix(-3, 2), ix(-2, 2), ix(-1, 2)}; off = '{0, 0, 0};
    shot(idx, off, np, first, map);
    check(np == 0, "row of three does not fire");
    // two neighbours only
    idx = '{ix(5, -5), ix(6, -5)}; off = '{0, 0};
    shot(idx, off, np, first, map);
    check(np == 0, "pair does not fire");

    // window: third pixel late by d clocks
    for (int w = 2; w <= 4; w += 2) begin
      win_cycles = 4'(w);
      for (int d = 0; d <= w + 1; d++) begin
        idx = '{ix(2, 3), ix(3, 3), ix(2, 4)}; off = '{0, 0, d};
        shot(idx, off, np, first, map);
        check(np == (d < w ? 1 : 0), $sformatf("window %0d delay %0d: %0d pulses", w, d, np));
      end
    end
    win_cycles = 4'd2;

    // random sparse patterns
    for (int t = 0; t < 150; t++) begin
      n = 3 + $urandom_range(0, 4);
      idx = new[n]; off = new[n]; qq = new[n]; rr = new[n];
      q = int'($urandom_range(0, 10)) - 5; r = int'($urandom_range(0, 10)) - 5;
      for (int i = 0; i < n; i++) begin
        do begin
          qq[i] = q + $urandom_range(0, 4) - 2;
          rr[i] = r + $urandom_range(0, 4) - 2;
          idx[i] = ix(qq[i], rr[i]);
          for (int j = 0; j < i; j++) if (idx[j] == idx[i]) idx[i] = -1;
        end while (idx[i] < 0);
        off[i] = 0;
      end
      expect_t = 0;
      for (int a = 0; a < n; a++)
        for (int b = a + 1; b < n; b++)
          for (int c = b + 1; c < n; c++)
            if (tb_adjacent(qq[a], rr[a], qq[b], rr[b]) && tb_adjacent(qq[a], rr[a], qq[c], rr[c]) &&
                tb_adjacent(qq[b], rr[b], qq[c], rr[c])) expect_t = 1;
      shot(idx, off, np, first, map);
      check(np == (expect_t ? 1 : 0), $sformatf("random pattern %0d: %0d pulses, expected %0d", t, np, expect_t));
    end

    check(trig_count == 32'(pulses), $sformatf("trig_count %0d vs %0d", trig_count, pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
