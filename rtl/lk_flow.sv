// lk_flow: Lucas-Kanade optical flow between two grey frames.
//
// Two frame banks of H x W 8-bit pixels are written 8 pixels per 64-bit
// beat (bank, beat address). On 'start' the unit computes, for every pixel
// p of frame pair (prev = bank !cur_bank, cur = bank cur_bank), the flow
// (vx, vy) that solves the least-squares system of the paper's eq. 9-10:
//   Ix = (P[y][x+1] - P[y][x-1]) >>> 1,  Iy = (P[y+1][x] - P[y-1][x]) >>> 1,
//   It = C[y][x] - P[y][x]   (coordinates clamped to the frame),
//   a = sum Ix^2, b = sum IxIy, c = sum Iy^2, e = sum IxIt, f = sum IyIt
//   over the WIN x WIN window W centred on p (clamped), then
//   det = a*c - b^2, vx = (b*f - c*e)/det, vy = (b*e - a*f)/det.
// The flow is scaled by 2^FRAC, rounded toward zero, offset by 128 and
// saturated to 0..255, giving two unsigned 8-bit flow channels (dx, dy) per
// pair, the 2L-channel input of the temporal stream. Where det < DET_MIN the
// system is ill-conditioned and the flow is set to 0 (code 128).
//
// Timing: per pixel WIN*WIN cycles of window accumulation, one cycle to form
// det and the numerators, 48 cycles in two parallel sequential dividers, one
// cycle to output; flow_valid pulses once per pixel in raster order
// (flow_pix = y*W + x), 'done' pulses after the last pixel. The equations are
// the paper's; the derivative stencils, window size, scaling, the
// ill-conditioned fallback and the sequential schedule are this design's.
module lk_flow #(
  parameter int unsigned H       = qhar_pkg::IMG_H,
  parameter int unsigned W       = qhar_pkg::IMG_W,
  parameter int unsigned WIN     = qhar_pkg::LK_WIN,
  parameter int unsigned FRAC    = 4,
  parameter int unsigned DET_MIN = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // frame write port
  input  logic                       frm_we,
  input  logic                       frm_bank,
  input  logic [$clog2(H*W/8)-1:0]   frm_addr,
  input  logic [63:0]                frm_data,
  // control
  input  logic                       start,
  input  logic                       cur_bank,
  output logic                       busy,
  output logic                       done,
  // flow output
  output logic                       flow_valid,
  output logic [$clog2(H*W)-1:0]     flow_pix,
  output logic [7:0]                 flow_dx,
  output logic [7:0]                 flow_dy,
  output logic                       flow_singular
);
  localparam int unsigned NPIX = H*W;
  localparam int unsigned PW   = $clog2(NPIX);
  localparam int signed   R    = WIN / 2;
  localparam int unsigned NDIV = 48;
  localparam int unsigned DDIV = 40;

  typedef enum logic [2:0] {IDLE, ACCUM, SOLVE, DIVIDE, EMIT} state_e;
  state_e state;

  logic [7:0] bank0 [NPIX];
  logic [7:0] bank1 [NPIX];

  always_ff @(posedge clk)
    if (frm_we)
      for (int unsigned i = 0; i < 8; i++)
        if (frm_bank) bank1[{frm_addr, 3'(i)}] <= frm_data[i*8 +: 8];
        else          bank0[{frm_addr, 3'(i)}] <= frm_data[i*8 +: 8];

  function automatic logic [7:0] rd(input logic b, input int signed yy, input int signed xx);
    int signed cy, cx;
    cy = (yy < 0) ? 0 : (yy > int'(H) - 1) ? int'(H) - 1 : yy;
    cx = (xx < 0) ? 0 : (xx > int'(W) - 1) ? int'(W) - 1 : xx;
    return b ? bank1[cy*int'(W) + cx] : bank0[cy*int'(W) + cx];
  endfunction

  logic [PW-1:0]        pix;
  logic [$clog2(WIN*WIN+1)-1:0] widx;
  logic                 pb, cb;           // prev / cur bank
  logic signed [31:0]   sa, sb, sc, se, sf;
  logic signed [9:0]    ix, iy, it;
  int signed            py, px, qy, qx;

  // Derivatives at the current window position q.
  always_comb begin
    py = int'(pix) / int'(W);
    px = int'(pix) % int'(W);
    qy = py + int'(widx) / int'(WIN) - R;
    qx = px + int'(widx) % int'(WIN) - R;
    qy = (qy < 0) ? 0 : (qy > int'(H) - 1) ? int'(H) - 1 : qy;
    qx = (qx < 0) ? 0 : (qx > int'(W) - 1) ? int'(W) - 1 : qx;
    ix = ($signed({2'b0, rd(pb, qy, qx + 1)}) - $signed({2'b0, rd(pb, qy, qx - 1)})) >>> 1;
    iy = ($signed({2'b0, rd(pb, qy + 1, qx)}) - $signed({2'b0, rd(pb, qy - 1, qx)})) >>> 1;
    it =  $signed({2'b0, rd(cb, qy, qx)})     - $signed({2'b0, rd(pb, qy, qx)});
  end

  // 2x2 solve.
  logic signed [63:0] det, nx, ny;
  logic               sgn_x, sgn_y, sing;
  logic [NDIV-1:0]    qx_mag, qy_mag;
  logic               dvx_done, dvy_done, div_start;
  logic [NDIV-1:0]    numx_abs, numy_abs;
  logic [DDIV-1:0]    det_d;

  always_comb begin
    det = 64'(sa) * 64'(sc) - 64'(sb) * 64'(sb);
    nx  = 64'(sb) * 64'(sf) - 64'(sc) * 64'(se);
    ny  = 64'(sb) * 64'(se) - 64'(sa) * 64'(sf);
  end

  seq_divider #(.N(NDIV), .D(DDIV)) u_divx (
    .clk, .rst_n, .start(div_start), .dividend(numx_abs), .divisor(det_d),
    .quotient(qx_mag), .done(dvx_done));
  seq_divider #(.N(NDIV), .D(DDIV)) u_divy (
    .clk, .rst_n, .start(div_start), .dividend(numy_abs), .divisor(det_d),
    .quotient(qy_mag), .done(dvy_done));

  function automatic logic [7:0] code(input logic neg, input logic [NDIV-1:0] mag);
    if (neg) return (mag > 128) ? 8'd0   : 8'(128 - int'(mag));
    else     return (mag > 127) ? 8'd255 : 8'(128 + int'(mag));
  endfunction

  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE; pix <= '0; widx <= '0; pb <= 1'b0; cb <= 1'b1;
      sa <= '0; sb <= '0; sc <= '0; se <= '0; sf <= '0;
      done <= 1'b0; flow_valid <= 1'b0; flow_pix <= '0; flow_dx <= 8'd128; flow_dy <= 8'd128;
      flow_singular <= 1'b0; div_start <= 1'b0; sgn_x <= 1'b0; sgn_y <= 1'b0; sing <= 1'b0;
      numx_abs <= '0; numy_abs <= '0; det_d <= '0;
    end else begin
      done       <= 1'b0;
      flow_valid <= 1'b0;
      div_start  <= 1'b0;
      case (state)
        IDLE: if (start) begin
          pb <= !cur_bank; cb <= cur_bank; pix <= '0; widx <= '0;
          sa <= '0; sb <= '0; sc <= '0; se <= '0; sf <= '0;
          state <= ACCUM;
        end
        ACCUM: begin
          sa <= sa + 32'(ix * ix);
          sb <= sb + 32'(ix * iy);
          sc <= sc + 32'(iy * iy);
          se <= se + 32'(ix * it);
          sf <= sf + 32'(iy * it);
          if (widx == ($clog2(WIN*WIN+1))'(WIN*WIN-1)) state <= SOLVE;
          else widx <= widx + 1'b1;
        end
        SOLVE: begin
          sing      <= (det < 64'(DET_MIN));
          sgn_x     <= nx[63];
          sgn_y     <= ny[63];
          numx_abs  <= NDIV'((nx[63] ? -nx : nx) <<< FRAC);
          numy_abs  <= NDIV'((ny[63] ? -ny : ny) <<< FRAC);
          det_d     <= (det < 64'sd1) ? DDIV'(1) : DDIV'(det);
          div_start <= 1'b1;
          state     <= DIVIDE;
        end
        DIVIDE: if (dvx_done) begin
          flow_valid    <= 1'b1;
          flow_pix      <= pix;
          flow_singular <= sing;
          flow_dx       <= sing ? 8'd128 : code(sgn_x, qx_mag);
          flow_dy       <= sing ? 8'd128 : code(sgn_y, qy_mag);
          state         <= EMIT;
        end
        EMIT: begin
          sa <= '0; sb <= '0; sc <= '0; se <= '0; sf <= '0;
          widx <= '0;
          if (pix == PW'(NPIX-1)) begin
            done  <= 1'b1;
            state <= IDLE;
          end else begin
            pix   <= pix + 1'b1;
            state <= ACCUM;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // Both dividers start together and take the same time.
  a_div_sync: assert property (@(posedge clk) disable iff (!rst_n) dvx_done == dvy_done);
endmodule
