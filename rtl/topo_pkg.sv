// topo_pkg: types, field widths and camera-geometry functions shared by the
// topological trigger.
//
// The camera is modelled as a hexagonal grid of pixels with RADIUS rings
// around the centre pixel (3R^2+3R+1 pixels).  A pixel is addressed by axial
// hexagonal coordinates (q, r); its index counts pixels row by row, r from -R
// to +R, q rising inside a row.  hex_index() turns (q, r) into that index
// (-1 outside the camera), so every neighbour relation used by the trigger is
// computed from this formula instead of being stored as a table.  Cartesian
// pixel positions are (2q + r, sqrt(3) r) in half-pixel-spacing units.
//
// Time stamps count 2.5 ns ticks of the 400 MHz sampling clock inside a GPS
// second.  The camera geometry, all field widths and the frame layout are
// this design's own choices; the paper gives the 400 MHz rate, the GPS time
// stamp and the first-moment image parameters only.
package topo_pkg;

  localparam int unsigned TAP_W  = 6;    // 64 delay taps of 78 ps = 5 ns
  localparam int unsigned SEC_W  = 32;   // GPS seconds
  localparam int unsigned SUB_W  = 29;   // 2.5 ns ticks inside a second (< 2^29)
  localparam int unsigned NPIX_W = 10;   // hit-pixel count
  localparam int unsigned MOM_W  = 16;   // signed first-moment sums
  localparam int unsigned TID_W  = 4;    // telescope number in a frame
  localparam int unsigned WORD_W = 16;   // link word

  localparam int unsigned FRAME_WORDS = 9;
  localparam logic [7:0]  SOF_CODE    = 8'hBC;

  typedef struct packed {
    logic [SEC_W-1:0] sec;
    logic [SUB_W-1:0] sub;
  } timestamp_t;

  // One camera trigger as sent from L2 to L3.
  typedef struct packed {
    logic [TID_W-1:0]        tel_id;
    timestamp_t              ts;
    logic [NPIX_W-1:0]       npix;  // number of hit pixels
    logic signed [MOM_W-1:0] sx2;   // sum over hit pixels of (2q + r)
    logic signed [MOM_W-1:0] sr;    // sum over hit pixels of r
  } l2_event_t;

  function automatic int hex_npix(int rad);
    return 3*rad*rad + 3*rad + 1;
  endfunction

  function automatic int hex_qmin(int rad, int r);
    return (-rad > -rad - r) ? -rad : -rad - r;
  endfunction

  function automatic int hex_qmax(int rad, int r);
    return (rad < rad - r) ? rad : rad - r;
  endfunction

  // Index of the first pixel of row r.
  function automatic int hex_row_start(int rad, int r);
    int s;
    s = 0;
    for (int k = -rad; k < r; k++) s += hex_qmax(rad, k) - hex_qmin(rad, k) + 1;
    return s;
  endfunction

  // Index of pixel (q, r), or -1 when it lies outside the camera.
  function automatic int hex_index(int rad, int q, int r);
    if (r < -rad || r > rad) return -1;
    if (q < hex_qmin(rad, r) || q > hex_qmax(rad, r)) return -1;
    return hex_row_start(rad, r) + q - hex_qmin(rad, r);
  endfunction

  // Frame word k (0..FRAME_WORDS-2) of an event; the last word is the XOR
  // of all earlier ones.
  function automatic logic [WORD_W-1:0] frame_word(l2_event_t ev, int k);
    logic [WORD_W-1:0] w;
    case (k)
      0: w = {SOF_CODE, 4'h0, ev.tel_id};
      1: w = ev.ts.sec[31:16];
      2: w = ev.ts.sec[15:0];
      3: w = {3'b000, ev.ts.sub[28:16]};
      4: w = ev.ts.sub[15:0];
      5: w = {6'b000000, ev.npix};
      6: w = ev.sx2;
      7: w = ev.sr;
      default: w = '0;
    endcase
    return w;
  endfunction

endpackage
