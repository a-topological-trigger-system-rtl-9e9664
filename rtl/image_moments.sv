// image_moments: L2 first-moment parameterisation of a camera image.
//
// start (while not busy) captures the hit map of a camera trigger.  The block
// then visits one pixel per clock in index order, keeping the axial
// coordinates (q, r) of the current pixel in two counters that step along a
// row and jump to the next row at its end, and for every hit pixel adds 1 to
// the count, (2q + r) to sx2 and r to sr.  After the last pixel the results
// appear on npix/sx2/sr with a one-clock done pulse: NPIX + 1 clocks after
// start (548 clocks, 1.37 us at 400 MHz for the default camera).  The centroid
// is (sx2, sqrt(3) sr) / (2 npix) in pixel spacings; the division is left to
// L3, where only the direction of the centroid is needed.  The paper asks for
// a first-moment parameterisation; the serial scan and the sum format are
// this design's choices.
module image_moments
  import topo_pkg::*;
#(
  parameter int RADIUS = 13,
  localparam int NPIX  = hex_npix(RADIUS),
  localparam int AW    = $clog2(NPIX)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [NPIX-1:0]         hit_map,
  output logic                    busy,
  output logic                    done,
  output logic [NPIX_W-1:0]       npix,
  output logic signed [MOM_W-1:0] sx2,
  output logic signed [MOM_W-1:0] sr
);
  logic [NPIX-1:0]         map_q;
  logic [AW-1:0]           idx;
  logic signed [7:0]       q, r;
  logic [NPIX_W-1:0]       acc_n;
  logic signed [MOM_W-1:0] acc_x, acc_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      map_q <= '0;
      idx   <= '0;
      q     <= '0;
      r     <= '0;
      acc_n <= '0;
      acc_x <= '0;
      acc_r <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      npix  <= '0;
      sx2   <= '0;
      sr    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          map_q <= hit_map;
          idx   <= '0;
          r     <= 8'(-RADIUS);
          q     <= 8'(hex_qmin(RADIUS, -RADIUS));
          acc_n <= '0;
          acc_x <= '0;
          acc_r <= '0;
          busy  <= 1'b1;
        end
      end else begin
        if (map_q[idx]) begin
          acc_n <= acc_n + 1'b1;
          acc_x <= acc_x + MOM_W'(2*q + r);
          acc_r <= acc_r + MOM_W'(r);
        end
        if (int'(q) == hex_qmax(RADIUS, int'(r))) begin
          r <= r + 1'b1;
          q <= 8'(hex_qmin(RADIUS, int'(r) + 1));
        end else begin
          q <= q + 1'b1;
        end
        idx <= idx + 1'b1;
        if (idx == AW'(NPIX - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          npix <= map_q[idx] ? acc_n + 1'b1 : acc_n;
          sx2  <= map_q[idx] ? acc_x + MOM_W'(2*q + r) : acc_x;
          sr   <= map_q[idx] ? acc_r + MOM_W'(r) : acc_r;
        end
      end
    end
  end
endmodule
