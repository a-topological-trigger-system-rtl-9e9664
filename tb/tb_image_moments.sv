// tb_image_moments: self-checking test of the L2 first-moment unit at the
// default camera size.  Random hit maps (empty, sparse, dense, full) are
// scanned; npix, sx2 and sr are compared with sums the testbench forms from
// its own pixel enumeration, and done must come NPIX + 1 clocks after start.
module tb_image_moments;
  import tb_geom::*;

  localparam int RAD  = 13;
  localparam int NPIX = 547;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              start;
  logic [NPIX-1:0]   hit_map;
  logic              busy, done;
  logic [9:0]        npix;
  logic signed [15:0] sx2, sr;

  int checks = 0, failures = 0;
  int pq[NPIX], pr[NPIX];

  image_moments dut (.*);

  always #1 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int en, ex, er, cyc, dens;
    start = 0; hit_map = '0;
    for (int i = 0; i < NPIX; i++) tb_qr(RAD, i, pq[i], pr[i]);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      dens = (t == 0) ? 0 : (t == 1) ? 100 : $urandom_range(1, 60);
      for (int i = 0; i < NPIX; i++) hit_map[i] = ($urandom_range(0, 99) < dens);
      en = 0; ex = 0; er = 0;
      for (int i = 0; i < NPIX; i++) if (hit_map[i]) begin en++; ex += 2*pq[i] + pr[i]; er += pr[i]; end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; hit_map = '0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(npix == 10'(en), $sformatf("npix %0d exp %0d", npix, en));
      check(sx2 == 16'(ex), $sformatf("sx2 %0d exp %0d", sx2, ex));
      check(sr == 16'(er), $sformatf("sr %0d exp %0d", sr, er));
      check(cyc == NPIX + 1, $sformatf("latency %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
