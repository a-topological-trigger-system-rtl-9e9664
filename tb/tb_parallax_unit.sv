// tb_parallax_unit: self-checking test of the L3 parallaxwidth unit (4
// telescopes on a 40 m square, positions in decimetres).
//
// Gamma-like events have every image axis pointing at a common core, so all
// crossings coincide and the width must be near zero; hadron-like events
// have random axes.  For every event width_sq, the number of crossings and
// of angle-cut pairs are compared with the testbench's 64-bit reference
// model, accept with the look-up-table entry for the number of telescopes
// taking part, and the time from start to done must stay inside the paper's
// ~10 us (4000 clocks at 400 MHz).  Telescopes outside the mask or with too
// few pixels must be ignored, and two telescopes looking along the same line
// must be removed by the 30 degree cut.
module tb_parallax_unit;
  import topo_pkg::*;
  import tb_geom::*;

  localparam int NT = 4;

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic               start;
  logic [NT-1:0]      mask;
  l2_event_t          ev [NT];
  logic signed [15:0] tel_x [NT], tel_y [NT];
  logic               lut_we;
  logic [2:0]         lut_addr;
  logic [31:0]        lut_wdata;
  logic               busy, done, accept;
  logic [31:0]        width_sq;
  logic [2:0]         n_tel;
  logic [7:0]         n_cross;
  logic [31:0]        n_angle_cut;

  int checks = 0, failures = 0;
  int lutv [NT+1] = '{0, 0, 0, 2500, 3600};

  parallax_unit dut (.*);

  always #1 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_acc = 0, n_rej = 0, cut_total = 0;

  task automatic run(string tag, int sx2[], int sr[], int npx[], logic [NT-1:0] m, bit gamma);
    bit use_t[];
    int txa[], tya[], k, ncut, cyc, nu;
    longint w;
    use_t = new[NT]; txa = new[NT]; tya = new[NT];
    nu = 0;
    for (int i = 0; i < NT; i++) begin
      use_t[i] = m[i] && npx[i] > 5 && (sx2[i] != 0 || sr[i] != 0);
      if (use_t[i]) nu++;
      txa[i] = tel_x[i]; tya[i] = tel_y[i];
    end
    w = ref_parallax(NT, use_t, sx2, sr, txa, tya, 64, k, ncut);
    cut_total += ncut;
    @(negedge clk);
    for (int i = 0; i < NT; i++) begin
      ev[i].npix = 10'(npx[i]); ev[i].sx2 = 16'(sx2[i]); ev[i].sr = 16'(sr[i]);
    end
    mask = m; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc <= 4000, $sformatf("%s: %0d clocks", tag, cyc));
    check(int'(n_cross) == k, $sformatf("%s: crossings %0d exp %0d", tag, n_cross, k));
    check(int'(n_tel) == nu, $sformatf("%s: telescopes %0d exp %0d", tag, n_tel, nu));
    check(longint'(width_sq) == w, $sformatf("%s: width_sq %0d exp %0d", tag, width_sq, w));
    check(accept == (k > 0 && w < lutv[nu]), $sformatf("%s: accept %0d", tag, accept));
    check(n_angle_cut == 32'(cut_total), $sformatf("%s: angle cuts %0d exp %0d", tag, n_angle_cut, cut_total));
    if (gamma && k > 0) check(width_sq < 400, $sformatf("%s: gamma-like width_sq %0d too large", tag, width_sq));
    if (accept) n_acc++; else n_rej++;
  endtask

  initial begin
    int sx2[], sr[], npx[];
    real cx, cy, vx, vy, s;
    sx2 = new[NT]; sr = new[NT]; npx = new[NT];
    start = 0; mask = '0; lut_we = 0; lut_addr = '0; lut_wdata = '0;
    for (int i = 0; i < NT; i++) ev[i] = '0;
    tel_x = '{0, 400, 0, 400};
    tel_y = '{0, 0, 400, 400};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a <= NT; a++) begin
      @(negedge clk); lut_we = 1; lut_addr = 3'(a); lut_wdata = 32'(lutv[a]);
    end
    @(negedge clk); lut_we = 0;

    // gamma-like: all axes through a common core
    for (int t = 0; t < 40; t++) begin
      cx = real'($urandom_range(0, 1600)) - 600.0;
      cy = real'($urandom_range(0, 1600)) - 600.0;
      for (int i = 0; i < NT; i++) begin
        vx = cx - tel_x[i]; vy = cy - tel_y[i];
        s = 3000.0 / ($sqrt(vx*vx + vy*vy) + 1.0);
        if ($urandom_range(0, 1)) s = -s;  // centroid on either side of the centre
        sx2[i] = int'(s * vx);
        sr[i]  = int'(s * vy / 1.7320508);
        npx[i] = $urandom_range(6, 60);
      end
      run($sformatf("gamma %0d", t), sx2, sr, npx, 4'b1111, 1);
    end
    // hadron-like: random axes, random masks and pixel counts
    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < NT; i++) begin
        sx2[i] = int'($urandom_range(0, 6000)) - 3000;
        sr[i]  = int'($urandom_range(0, 3400)) - 1700;
        npx[i] = $urandom_range(3, 40);
      end
      run($sformatf("random %0d", t), sx2, sr, npx, 4'($urandom_range(1, 15)), 0);
    end
    // two telescopes on the line through the core: parallel axes are cut
    sx2 = '{2000, 2000, 0, 0}; sr = '{0, 0, 0, 0}; npx = '{20, 20, 20, 20};
    run("parallel", sx2, sr, npx, 4'b0011, 0);
    check(n_cross == 0 && !accept, "parallel axes give no crossing");
    check(n_acc > 10 && n_rej > 10, $sformatf("accepts %0d rejects %0d", n_acc, n_rej));
    check(cut_total > 0, "angle cut exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
