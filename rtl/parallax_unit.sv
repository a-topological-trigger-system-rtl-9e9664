// parallax_unit: L3 stereo reconstruction and parallaxwidth cut.
//
// For each telescope of a coincidence the image axis is the line from the
// camera centre through the image centroid.  Projected onto the ground from
// the telescope's position (telescopes pointing at zenith, camera axes
// parallel to the ground axes), it is the line T_i + s d_i, where d_i is the
// centroid direction (sx2, sqrt(3) sr); the factor sqrt(3) is 887/512.  Only
// telescopes in mask with more than NPIX_MIN hit pixels take part.  The unit
// visits every pair i < j in turn; a pair whose axes cross at less than the
// minimum angle (sin^2 below SIN2_Q8/256, 30 degrees by default) is skipped
// and counted in n_angle_cut, otherwise the crossing point
//   r = T_i + d_i * cross(T_j - T_i, d_j) / cross(d_i, d_j)
// is computed with a serial divider (one division for x, one for y, each
// truncated toward zero).  From the k crossing points the unit forms
//   width_sq = (k * sum|r|^2 - |sum r|^2) / k^2,
// the square of the paper's parallaxwidth, in the units of tel_x/tel_y
// squared (decimetres^2 by default).  The event is accepted when k > 0 and
// width_sq is below the look-up-table entry for the number of telescopes that
// took part (lut_we/lut_addr/lut_wdata write it; entries reset to 0, which
// rejects).  start is taken when idle; done pulses with accept, width_sq,
// n_tel and n_cross valid.  A pair costs about 132 clocks and the final
// division 66: six pairs take about 0.9 k clocks (2.3 us at 400 MHz), inside
// the paper's ~10 us budget.  The formula, the 30 degree and more-than-5-pixel
// cuts and the look-up-table comparison follow the paper; the fixed-point
// formats, the LUT indexing and the serial schedule are this design's choices.
module parallax_unit
  import topo_pkg::*;
#(
  parameter int          NTEL     = 4,
  parameter int          POS_W    = 16,
  parameter int unsigned NPIX_MIN = 5,
  parameter int unsigned SIN2_Q8  = 64,
  localparam int         LW       = $clog2(NTEL + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [NTEL-1:0]         mask,
  input  l2_event_t               ev     [NTEL],
  input  logic signed [POS_W-1:0] tel_x  [NTEL],
  input  logic signed [POS_W-1:0] tel_y  [NTEL],
  input  logic                    lut_we,
  input  logic [LW-1:0]           lut_addr,
  input  logic [31:0]             lut_wdata,
  output logic                    busy,
  output logic                    done,
  output logic                    accept,
  output logic [31:0]             width_sq,
  output logic [LW-1:0]           n_tel,
  output logic [7:0]              n_cross,
  output logic [31:0]             n_angle_cut
);
  localparam int DW = MOM_W + 2;      // direction components
  localparam int XW = POS_W + 8;      // crossing-point coordinates
  localparam int PW = $clog2(NTEL) + 1;

  typedef enum logic [2:0] {S_IDLE, S_PAIR, S_DIVX, S_DIVY, S_FINAL, S_DIVW} state_t;
  state_t state;

  logic [31:0]             lut [NTEL+1];
  logic signed [DW-1:0]    dx [NTEL], dy [NTEL];
  logic signed [POS_W-1:0] tx [NTEL], ty [NTEL];
  logic [NTEL-1:0]         use_t;
  logic [PW-1:0]           pi, pj;

  // pair arithmetic
  logic signed [2*DW:0]       den;
  logic signed [POS_W:0]      dtx, dty;
  logic signed [POS_W+DW+1:0] cr;
  logic signed [63:0]         numx, numy;
  logic [2*DW+1:0]            d2i, d2j;
  logic [127:0]               lhs, rhs;
  logic                       angle_ok;

  // accumulation
  logic [7:0]              k;
  logic signed [XW-1:0]    cx, cy;
  logic signed [POS_W-1:0] bx, by;
  logic signed [XW+7:0]    s1x, s1y;
  logic [63:0]             s2;
  logic [63:0]             numy_mag;
  logic                    sgn_x, sgn_y;
  logic [LW-1:0]           n_use;

  // divider
  logic        div_start, div_busy, div_done;
  logic [63:0] div_a, div_q;
  logic [39:0] div_b;

  seq_divider #(.WN(64), .WD(40)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(div_b),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );

  function automatic logic [63:0] mag64(logic signed [63:0] v);
    return v[63] ? 64'(-v) : 64'(v);
  endfunction

  always_comb begin
    cy   = XW'(by) + (sgn_y ? -XW'(div_q) : XW'(div_q));
    den  = (2*DW+1)'(64'(dx[pi]) * 64'(dy[pj]) - 64'(dy[pi]) * 64'(dx[pj]));
    dtx  = (POS_W+1)'(tx[pj]) - (POS_W+1)'(tx[pi]);
    dty  = (POS_W+1)'(ty[pj]) - (POS_W+1)'(ty[pi]);
    cr   = (POS_W+DW+2)'(64'(dtx) * 64'(dy[pj]) - 64'(dty) * 64'(dx[pj]));
    numx = 64'(dx[pi]) * 64'(cr);
    numy = 64'(dy[pi]) * 64'(cr);
    d2i  = (2*DW+2)'(64'(dx[pi]) * 64'(dx[pi]) + 64'(dy[pi]) * 64'(dy[pi]));
    d2j  = (2*DW+2)'(64'(dx[pj]) * 64'(dx[pj]) + 64'(dy[pj]) * 64'(dy[pj]));
    lhs  = 128'(256) * 128'(128'(den) * 128'(den));
    rhs  = 128'(SIN2_Q8) * 128'(d2i) * 128'(d2j);
    angle_ok = (den != '0) && (lhs >= rhs);
    n_use = '0;
    for (int i = 0; i < NTEL; i++) n_use += LW'(use_t[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= NTEL; i++) lut[i] <= '0;
    end else if (lut_we && lut_addr <= LW'(NTEL)) begin
      lut[lut_addr] <= lut_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      use_t       <= '0;
      pi          <= '0;
      pj          <= '0;
      k           <= '0;
      cx          <= '0;
      bx          <= '0;
      by          <= '0;
      s1x         <= '0;
      s1y         <= '0;
      s2          <= '0;
      numy_mag    <= '0;
      sgn_x       <= 1'b0;
      sgn_y       <= 1'b0;
      div_start   <= 1'b0;
      div_a       <= '0;
      div_b       <= '0;
      busy        <= 1'b0;
      done        <= 1'b0;
      accept      <= 1'b0;
      width_sq    <= '0;
      n_tel       <= '0;
      n_cross     <= '0;
      n_angle_cut <= '0;
      for (int i = 0; i < NTEL; i++) begin
        dx[i] <= '0;
        dy[i] <= '0;
        tx[i] <= '0;
        ty[i] <= '0;
      end
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < NTEL; i++) begin
            dx[i]    <= DW'(ev[i].sx2);
            dy[i]    <= DW'((32'(ev[i].sr) * 887) >>> 9);
            tx[i]    <= tel_x[i];
            ty[i]    <= tel_y[i];
            use_t[i] <= mask[i] && (ev[i].npix > NPIX_W'(NPIX_MIN)) &&
                        (ev[i].sx2 != '0 || ev[i].sr != '0);
          end
          pi    <= '0;
          pj    <= PW'(1);
          k     <= '0;
          s1x   <= '0;
          s1y   <= '0;
          s2    <= '0;
          busy  <= 1'b1;
          state <= S_PAIR;
        end
        S_PAIR: begin
          if (int'(pi) >= NTEL - 1) begin
            state <= S_FINAL;
          end else begin
            if (int'(pj) == NTEL - 1) begin
              pi <= pi + 1'b1;
              pj <= pi + PW'(2);
            end else begin
              pj <= pj + 1'b1;
            end
            if (use_t[pi] && use_t[pj]) begin
              if (angle_ok) begin
                div_a     <= mag64(numx);
                div_b     <= 40'(mag64(64'(den)));
                div_start <= 1'b1;
                sgn_x     <= numx[63] ^ den[2*DW];
                sgn_y     <= numy[63] ^ den[2*DW];
                numy_mag  <= mag64(numy);
                bx        <= tx[pi];
                by        <= ty[pi];
                state     <= S_DIVX;
              end else begin
                n_angle_cut <= n_angle_cut + 1'b1;
              end
            end
          end
        end
        S_DIVX: if (div_done) begin
          // pi/pj have already advanced; the pair's base point is in bx/by
          cx        <= XW'(bx) + (sgn_x ? -XW'(div_q) : XW'(div_q));
          div_a     <= numy_mag;
          div_start <= 1'b1;
          state     <= S_DIVY;
        end
        S_DIVY: if (div_done) begin
          k     <= k + 1'b1;
          s1x   <= s1x + (XW+8)'(cx);
          s1y   <= s1y + (XW+8)'(cy);
          s2    <= s2 + 64'(64'(cx) * 64'(cx)) + 64'(64'(cy) * 64'(cy));
          state <= S_PAIR;
        end
        S_FINAL: begin
          n_tel   <= n_use;
          n_cross <= k;
          if (k == '0) begin
            accept   <= 1'b0;
            width_sq <= '0;
            done     <= 1'b1;
            busy     <= 1'b0;
            state    <= S_IDLE;
          end else begin
            div_a     <= 64'(k) * s2 - 64'(64'(s1x) * 64'(s1x)) - 64'(64'(s1y) * 64'(s1y));
            div_b     <= 40'(k) * 40'(k);
            div_start <= 1'b1;
            state     <= S_DIVW;
          end
        end
        S_DIVW: if (div_done) begin
          width_sq <= (div_q[63:32] != '0) ? '1 : div_q[31:0];
          accept   <= (div_q[63:32] == '0) && (div_q[31:0] < lut[n_use]);
          done     <= 1'b1;
          busy     <= 1'b0;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a result is produced only for a started event, and start is taken only when idle
  a_done: assert property (@(posedge clk) disable iff (!rst_n) done |-> !busy && state == S_IDLE);
endmodule
