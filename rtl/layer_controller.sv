// layer_controller: tiled loop nest and address generator for one layer.
//
// Given a layer descriptor (qhar_pkg::layer_t) and a 'start' pulse, it walks
// the layer's loops and issues one read per cycle to the IFM buffer, the
// weight buffer and the BN buffer, with no stalls:
//   conv: for each output pixel (oy, ox), output tile ot (PE channels),
//         kernel tap (ky, kx), input tile ct (SIMD channels):
//         IFM[(iy*w + ix)*CT + ct], iy = oy+ky-pad, ix = ox+kx-pad,
//         pad = k/2 ("same" zero padding, taps outside the map read as zero),
//         W[wbase + ((ot*k + ky)*k + kx)*CT + ct], BN[bnbase + ot];
//   pool: for each output pixel and channel tile, the k x k window
//         IFM[((stride*oy+dy)*w + stride*ox+dx)*CT + ct].
// This is the loop tiling of the paper: row, column and channel loops cut into
// tiles, each tap of a tile a single "one-pixel" vector of channels.
// One cycle after each read (the buffers' latency) the side-band for that
// data comes out: d_valid, d_first/d_last (bounds of one sum or window),
// d_zero (padding tap) and d_mask (lanes whose channel index < in_ch; other
// lanes must be treated as zero). Results (res_valid, from the PE array or
// the pool unit) come back in loop order, so the OFM write address is a
// counter: wr_en/wr_addr follow res_valid in the same cycle. 'done' pulses
// when the last result has been written.
// Cycles per conv layer: h*w*OT*k*k*CT issue cycles plus the pipeline depth.
module layer_controller
  import qhar_pkg::*;
#(
  parameter int unsigned LANES = qhar_pkg::SIMD,
  parameter int unsigned PE_N  = qhar_pkg::PE,
  parameter int unsigned FDEP  = qhar_pkg::FMAP_DEPTH,
  parameter int unsigned WDEP  = qhar_pkg::WEIGHT_DEPTH,
  parameter int unsigned BDEP  = qhar_pkg::BN_DEPTH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  layer_t                  desc,
  output logic                    busy,
  output logic                    done,
  // read side
  output logic                    rd_en,
  output logic [$clog2(FDEP)-1:0] f_raddr,
  output logic [$clog2(WDEP)-1:0] w_raddr,
  output logic [$clog2(BDEP)-1:0] bn_raddr,
  // side-band aligned with read data
  output logic                    d_valid,
  output logic                    d_first,
  output logic                    d_last,
  output logic                    d_zero,
  output logic [LANES-1:0]        d_mask,
  output logic                    d_pool,
  // write side
  input  logic                    res_valid,
  output logic                    wr_en,
  output logic [$clog2(FDEP)-1:0] wr_addr
);
  layer_t          L;
  logic            issuing;
  logic [7:0]      oy, ox, ky, kx, ot, ct;
  logic [7:0]      oh, ow, ct_n, ot_n, pad;
  logic [31:0]     results_left;
  logic [$clog2(FDEP)-1:0] wcnt;

  // Derived loop bounds of the latched descriptor.
  always_comb begin
    ct_n = 8'((int'(L.in_ch) + LANES - 1) / LANES);
    ot_n = (L.kind == L_CONV) ? 8'((int'(L.out_ch) + PE_N - 1) / PE_N) : 8'd1;
    pad  = (L.kind == L_CONV) ? 8'(L.k / 2) : 8'd0;
    oh   = (L.kind == L_CONV) ? L.h : 8'(L.h / L.stride);
    ow   = (L.kind == L_CONV) ? L.w : 8'(L.w / L.stride);
  end

  // Address of the current loop point.
  int signed iy, ix;
  logic      inb;
  always_comb begin
    if (L.kind == L_CONV) begin
      iy = int'(oy) + int'(ky) - int'(pad);
      ix = int'(ox) + int'(kx) - int'(pad);
    end else begin
      iy = int'(oy) * int'(L.stride) + int'(ky);
      ix = int'(ox) * int'(L.stride) + int'(kx);
    end
    inb      = (iy >= 0) && (iy < int'(L.h)) && (ix >= 0) && (ix < int'(L.w));
    f_raddr  = inb ? ($clog2(FDEP))'((iy*int'(L.w) + ix)*int'(ct_n) + int'(ct)) : '0;
    w_raddr  = ($clog2(WDEP))'(int'(L.wbase) +
               ((int'(ot)*int'(L.k) + int'(ky))*int'(L.k) + int'(kx))*int'(ct_n) + int'(ct));
    bn_raddr = ($clog2(BDEP))'(int'(L.bnbase) + int'(ot));
    rd_en    = issuing;
  end

  logic last_ct, last_kx, last_ky, last_ot, last_ox, last_oy;
  // Loop order: conv  oy > ox > ot > ky > kx > ct
  //             pool  oy > ox > ct > ky > kx      (ot fixed at 0)
  always_comb begin
    last_kx = (kx == 8'(L.k) - 8'd1);
    last_ky = (ky == 8'(L.k) - 8'd1);
    last_ct = (ct == ct_n - 1);
    last_ot = (ot == ot_n - 1);
    last_ox = (ox == ow - 1);
    last_oy = (oy == oh - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      L <= '0; issuing <= 1'b0; busy <= 1'b0; done <= 1'b0;
      oy <= '0; ox <= '0; ky <= '0; kx <= '0; ot <= '0; ct <= '0;
      d_valid <= 1'b0; d_first <= 1'b0; d_last <= 1'b0; d_zero <= 1'b0; d_mask <= '0;
      d_pool <= 1'b0; results_left <= '0; wcnt <= '0;
    end else begin
      done <= 1'b0;
      // side-band, one cycle behind the read
      d_valid <= issuing;
      d_pool  <= (L.kind == L_POOL);
      d_zero  <= !inb;
      if (L.kind == L_CONV) begin
        d_first <= (ky == 0) && (kx == 0) && (ct == 0);
        d_last  <= last_ky && last_kx && last_ct;
      end else begin
        d_first <= (ky == 0) && (kx == 0);
        d_last  <= last_ky && last_kx;
      end
      for (int unsigned l = 0; l < LANES; l++)
        d_mask[l] <= (int'(ct) * LANES + l) < int'(L.in_ch);

      if (start && !busy) begin
        L <= desc; issuing <= 1'b1; busy <= 1'b1;
        oy <= '0; ox <= '0; ky <= '0; kx <= '0; ot <= '0; ct <= '0;
        wcnt <= '0;
        if (desc.kind == L_CONV)
          results_left <= 32'(int'(desc.h) * int'(desc.w) *
                              ((int'(desc.out_ch) + PE_N - 1) / PE_N));
        else
          results_left <= 32'((int'(desc.h) / int'(desc.stride)) * (int'(desc.w) / int'(desc.stride)) *
                              ((int'(desc.in_ch) + LANES - 1) / LANES));
      end else if (issuing) begin
        // advance the loop nest
        if (L.kind == L_CONV) begin
          if (!last_ct) ct <= ct + 1'b1;
          else begin
            ct <= '0;
            if (!last_kx) kx <= kx + 1'b1;
            else begin
              kx <= '0;
              if (!last_ky) ky <= ky + 1'b1;
              else begin
                ky <= '0;
                if (!last_ot) ot <= ot + 1'b1;
                else begin
                  ot <= '0;
                  if (!last_ox) ox <= ox + 1'b1;
                  else begin
                    ox <= '0;
                    if (!last_oy) oy <= oy + 1'b1;
                    else issuing <= 1'b0;
                  end
                end
              end
            end
          end
        end else begin
          if (!last_kx) kx <= kx + 1'b1;
          else begin
            kx <= '0;
            if (!last_ky) ky <= ky + 1'b1;
            else begin
              ky <= '0;
              if (!last_ct) ct <= ct + 1'b1;
              else begin
                ct <= '0;
                if (!last_ox) ox <= ox + 1'b1;
                else begin
                  ox <= '0;
                  if (!last_oy) oy <= oy + 1'b1;
                  else issuing <= 1'b0;
                end
              end
            end
          end
        end
      end

      if (busy && res_valid) begin
        wcnt <= wcnt + 1'b1;
        results_left <= results_left - 1;
        if (results_left == 32'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign wr_en   = busy && res_valid;
  assign wr_addr = wcnt;

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
