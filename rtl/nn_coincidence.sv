// nn_coincidence: three-nearest-neighbour pattern trigger on a hexagonal
// camera.
//
// On a hexagonal grid three pixels are mutual nearest neighbours exactly when
// they form one of the small triangles of the grid: in axial coordinates the
// "up" triangle {(q,r), (q+1,r), (q,r+1)} and the "down" triangle
// {(q+1,r), (q,r+1), (q+1,r+1)}.  The module ANDs the three coincidence gates
// of every triangle that lies wholly inside the camera and ORs the results;
// the neighbour indices come from topo_pkg::hex_index at elaboration.  trig
// and a copy of the gate map are registered: one clock of latency, a new
// decision every clock.  The paper asks for a coincidence of three nearest
// neighbours; the grid shape and size are this design's choice.
module nn_coincidence
  import topo_pkg::*;
#(
  parameter int RADIUS = 13,
  localparam int NPIX  = hex_npix(RADIUS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NPIX-1:0] hit,
  output logic            trig,
  output logic [NPIX-1:0] hit_map
);
  localparam int ND = 2*RADIUS + 1;

  logic [ND-1:0][ND-1:0][1:0] tri_on;

  for (genvar rr = 0; rr < ND; rr++) begin : g_row
    for (genvar qq = 0; qq < ND; qq++) begin : g_col
      localparam int R0 = rr - RADIUS;
      localparam int Q0 = qq - RADIUS;
      localparam int IA = hex_index(RADIUS, Q0,     R0);
      localparam int IB = hex_index(RADIUS, Q0 + 1, R0);
      localparam int IC = hex_index(RADIUS, Q0,     R0 + 1);
      localparam int ID = hex_index(RADIUS, Q0 + 1, R0 + 1);
      if (IA >= 0 && IB >= 0 && IC >= 0) begin : g_up
        assign tri_on[rr][qq][0] = hit[IA] & hit[IB] & hit[IC];
      end else begin : g_no_up
        assign tri_on[rr][qq][0] = 1'b0;
      end
      if (IB >= 0 && IC >= 0 && ID >= 0) begin : g_dn
        assign tri_on[rr][qq][1] = hit[IB] & hit[IC] & hit[ID];
      end else begin : g_no_dn
        assign tri_on[rr][qq][1] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig    <= 1'b0;
      hit_map <= '0;
    end else begin
      trig    <= |tri_on;
      hit_map <= hit;
    end
  end
endmodule
