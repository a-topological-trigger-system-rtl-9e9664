// tb_topo_trigger_top: end-to-end test of the whole array trigger at its
// default size (4 telescopes, 547-pixel cameras, 400 MHz clock, 10 MHz
// links, 1000-clock collection period).
//
// The testbench loops the link outputs back to the link inputs (optionally
// corrupting one word) and places the telescopes on a 40 m square.  For each
// simulated shower it draws, in every participating camera, a short
// elongated image whose axis points along the line from that telescope to a
// common core (gamma-like) or along a random direction (hadron-like), and
// fires all its pixels in the same clock.  It computes the expected first
// moments from the pixels it lit and the expected parallaxwidth and
// decision with its reference model, and compares them with the array
// trigger's result, stamp and latency.  Mechanisms made to happen and
// counted: camera triggers, triggers lost to L2 dead time, accepted
// coincidences, low-multiplicity rejections, angle-cut pairs, look-up-table
// accepts and rejects, and link frame errors.  A coincidence can never
// arrive while the parallax unit is busy at these sizes (the unit needs
// under 900 clocks, the collection period is 1000), so n_l3_drop must stay 0.
module tb_topo_trigger_top;
  import topo_pkg::*;
  import tb_geom::*;

  localparam int NT = 4, RAD = 13, NPIX = 547;

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic [NPIX-1:0]    disc [NT];
  logic [3:0]         win_cycles;
  logic [NT-1:0]      tap_we;
  logic [9:0]         tap_addr;
  logic [5:0]         tap_wdata;
  logic [5:0]         tap_value [NT][NPIX];
  logic               pps;
  logic [31:0]        pps_sec;
  logic [15:0]        link_tx_data [NT];
  logic [NT-1:0]      link_tx_k, link_tx_valid;
  logic [15:0]        link_rx_data [NT];
  logic [NT-1:0]      link_rx_k, link_rx_valid;
  logic signed [15:0] tel_x [NT], tel_y [NT];
  logic               lut_we;
  logic [2:0]         lut_addr;
  logic [31:0]        lut_wdata;
  logic [NT-1:0]      cam_trig;
  logic [31:0]        cam_trig_count [NT];
  logic [15:0]        l2_dead_count [NT];
  logic [15:0]        link_err_count [NT];
  logic               arr_done, arr_accept;
  timestamp_t         arr_ts;
  logic [31:0]        arr_width_sq;
  logic [2:0]         arr_n_tel;
  logic [7:0]         arr_n_cross;
  logic [31:0]        n_coinc, n_lowmult, n_angle_cut, n_l3_drop;

  topo_trigger_top dut (.*);

  int checks = 0, failures = 0;
  int pq [NPIX], pr [NPIX];
  int corrupt_tel = -1;     // telescope whose next frame gets one bad word
  int words_seen [NT];
  int ndone = 0, cyc = 0, done_cyc = 0;
  int m_camtrig = 0, m_dead = 0, m_coinc = 0, m_lowmult = 0, m_anglecut = 0,
      m_accept = 0, m_reject = 0, m_linkerr = 0;
  int lutv [NT+1] = '{0, 0, 0, 10000, 10000};

  always #1 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && arr_done) begin ndone++; done_cyc = cyc; end
  end

  // link loop-back with optional corruption of word 6 of one frame
  always_comb
    for (int i = 0; i < NT; i++) begin
      link_rx_data[i]  = link_tx_data[i] ^ ((corrupt_tel == i && words_seen[i] == 6) ? 16'h0100 : 16'h0);
      link_rx_k[i]     = link_tx_k[i];
      link_rx_valid[i] = link_tx_valid[i];
    end
  always @(posedge clk)
    for (int i = 0; i < NT; i++)
      if (rst_n && link_tx_valid[i]) begin
        if (link_tx_k[i]) words_seen[i] = 1;
        else words_seen[i]++;
        if (corrupt_tel == i && words_seen[i] == 9) corrupt_tel = -1;
      end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // pixels within 1.1 spacings of the segment centre +- 2.5 u, centre 5 u
  function automatic logic [NPIX-1:0] image(real ux, real uy);
    logic [NPIX-1:0] m;
    real px, py, t, dx, dy;
    m = '0;
    for (int i = 0; i < NPIX; i++) begin
      px = pq[i] + 0.5 * pr[i];
      py = 0.8660254 * pr[i];
      t = px * ux + py * uy - 5.0;
      if (t > 2.5) t = 2.5;
      if (t < -2.5) t = -2.5;
      dx = px - (5.0 + t) * ux;
      dy = py - (5.0 + t) * uy;
      m[i] = (dx*dx + dy*dy) < 1.21;
    end
    return m;
  endfunction

  // One shower.  kind: 0 gamma, 1 hadron.  fire: telescopes that see it.
  task automatic shower(string tag, int kind, logic [NT-1:0] fire, real cx, real cy,
                        int bad_tel, bit dead_shot);
    logic [NPIX-1:0] m [NT];
    int sx2[], sr[], npx[], txa[], tya[], k, ncut, n0, nl0, nc0, t0, tw;
    bit use_t[];
    logic [NT-1:0] arrive;
    real vx, vy, l;
    longint w;
    sx2 = new[NT]; sr = new[NT]; npx = new[NT]; use_t = new[NT]; txa = new[NT]; tya = new[NT];
    arrive = fire;
    if (bad_tel >= 0) arrive[bad_tel] = 1'b0;
    for (int i = 0; i < NT; i++) begin
      if (kind == 0) begin vx = cx - tel_x[i]; vy = cy - tel_y[i]; end
      else begin vx = real'($urandom_range(0, 2000)) - 1000.0; vy = real'($urandom_range(0, 2000)) - 1000.0; end
      l = $sqrt(vx*vx + vy*vy) + 1e-9;
      m[i] = image(vx / l, vy / l);
      sx2[i] = 0; sr[i] = 0; npx[i] = 0;
      for (int p = 0; p < NPIX; p++) if (m[i][p]) begin npx[i]++; sx2[i] += 2*pq[p] + pr[p]; sr[i] += pr[p]; end
      use_t[i] = arrive[i] && npx[i] > 5;
      txa[i] = tel_x[i]; tya[i] = tel_y[i];
    end
    w = ref_parallax(NT, use_t, sx2, sr, txa, tya, 64, k, ncut);
    n0 = ndone; nl0 = int'(n_lowmult); nc0 = int'(n_coinc);
    corrupt_tel = bad_tel;
    @(negedge clk);
    for (int i = 0; i < NT; i++) if (fire[i]) disc[i] = m[i];
    repeat (3) @(negedge clk);
    for (int i = 0; i < NT; i++) disc[i] = '0;
    t0 = cyc;
    if (dead_shot) begin
      repeat (100) @(negedge clk);
      disc[0] = m[0];
      repeat (3) @(negedge clk);
      disc[0] = '0;
    end
    tw = 0;
    while (ndone == n0 && tw < 5000) begin @(negedge clk); tw++; end
    repeat (20) @(negedge clk);
    if ($countones(arrive) >= 3) begin
      check(ndone == n0 + 1, $sformatf("%s: %0d decisions", tag, ndone - n0));
      check(int'(n_coinc) == nc0 + 1, $sformatf("%s: coincidence counted", tag));
      check(int'(arr_n_cross) == k, $sformatf("%s: crossings %0d exp %0d", tag, arr_n_cross, k));
      check(longint'(arr_width_sq) == w, $sformatf("%s: width_sq %0d exp %0d", tag, arr_width_sq, w));
      check(arr_accept == (k > 0 && w < lutv[arr_n_tel]), $sformatf("%s: accept", tag));
      check(arr_ts.sec == 32'd1234, $sformatf("%s: stamp second %0d", tag, arr_ts.sec));
      // camera trigger to decision: L1.5 + L2 scan + frame + collection + L3, inside ~10 us
      check(done_cyc - t0 < 4000, $sformatf("%s: latency %0d clocks", tag, done_cyc - t0));
      m_coinc++;
      m_anglecut += ncut;
      if (arr_accept) m_accept++; else m_reject++;
      $display("%s: n_tel=%0d crossings=%0d width=%0.1f m accept=%0d latency=%0d clocks",
               tag, arr_n_tel, arr_n_cross, $sqrt(real'(arr_width_sq)) / 10.0, arr_accept, done_cyc - t0);
    end else begin
      check(ndone == n0, $sformatf("%s: no decision expected", tag));
      check(int'(n_lowmult) == nl0 + 1, $sformatf("%s: low multiplicity counted", tag));
      m_lowmult++;
    end
  endtask

  initial begin
    int seen_trig;
    for (int i = 0; i < NPIX; i++) tb_qr(RAD, i, pq[i], pr[i]);
    for (int i = 0; i < NT; i++) begin disc[i] = '0; words_seen[i] = 0; end
    win_cycles = 4'd2; tap_we = '0; tap_addr = '0; tap_wdata = '0;
    pps = 0; pps_sec = 32'd1234; lut_we = 0; lut_addr = '0; lut_wdata = '0;
    tel_x = '{0, 400, 0, 400};
    tel_y = '{0, 0, 400, 400};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); pps = 1;
    repeat (5) @(negedge clk); pps = 0;
    for (int a = 0; a <= NT; a++) begin
      @(negedge clk); lut_we = 1; lut_addr = 3'(a); lut_wdata = 32'(lutv[a]);
    end
    @(negedge clk); lut_we = 0;
    // a delay tap of each camera
    @(negedge clk); tap_we = '1; tap_addr = 10'd300; tap_wdata = 6'd33;
    @(negedge clk); tap_we = '0;
    @(negedge clk);
    for (int i = 0; i < NT; i++) check(tap_value[i][300] == 6'd33 && tap_value[i][299] == 6'd0, "delay tap register");

    shower("gamma 1", 0, 4'b1111, 250.0, 130.0, -1, 0);
    shower("gamma 2", 0, 4'b1111, -300.0, 700.0, -1, 1);
    shower("gamma 3 (3 tel)", 0, 4'b0111, 600.0, -200.0, -1, 0);
    shower("gamma 4 (core on telescope line)", 0, 4'b1111, 900.0, 0.0, -1, 0);
    shower("hadron 1", 1, 4'b1111, 0.0, 0.0, -1, 0);
    shower("hadron 2", 1, 4'b1111, 0.0, 0.0, -1, 0);
    shower("hadron 3", 1, 4'b1110, 0.0, 0.0, -1, 0);
    shower("two telescopes", 0, 4'b1001, 200.0, 200.0, -1, 0);
    shower("gamma 5 (link error on 3)", 0, 4'b1111, 150.0, 350.0, 3, 0);
    shower("gamma 6 (link error, 2 left)", 0, 4'b0111, 150.0, 350.0, 1, 0);

    seen_trig = 0;
    for (int i = 0; i < NT; i++) seen_trig += int'(cam_trig_count[i]);
    m_camtrig = seen_trig;
    m_dead = int'(l2_dead_count[0]);
    m_linkerr = int'(link_err_count[3]) + int'(link_err_count[1]);
    check(m_dead == 1, $sformatf("dead-time losses %0d", m_dead));
    check(m_linkerr == 2, $sformatf("link errors %0d", m_linkerr));
    check(int'(n_angle_cut) == m_anglecut, $sformatf("angle cuts %0d exp %0d", n_angle_cut, m_anglecut));
    check(n_l3_drop == 0, "no L3 drop possible at default sizes");
    $display("mechanisms: camera_triggers=%0d dead_time=%0d coincidences=%0d low_multiplicity=%0d angle_cut=%0d lut_accept=%0d lut_reject=%0d link_errors=%0d",
             m_camtrig, m_dead, m_coinc, m_lowmult, m_anglecut, m_accept, m_reject, m_linkerr);
    check(m_camtrig > 0, "camera trigger happened");
    check(m_dead > 0, "dead time happened");
    check(m_coinc > 0, "coincidence happened");
    check(m_lowmult > 0, "low multiplicity happened");
    check(m_anglecut > 0, "angle cut happened");
    check(m_accept > 0, "look-up-table accept happened");
    check(m_reject > 0, "look-up-table reject happened");
    check(m_linkerr > 0, "link error happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
