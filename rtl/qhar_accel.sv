// qhar_accel: programmable-logic accelerator for two-stream action
// recognition (quantised SimpleNet), top level.
//
// The processor side (not part of this RTL) keeps the fully connected,
// fusion and softmax layers and drives this block with commands and a 64-bit
// DMA stream. Inside, the stream is up-sized to SIMD-channel words and routed
// to the on-chip weight BRAM, the folded batch-norm store, the feature buffer
// A (RGB frames) or the Lucas-Kanade optical-flow unit (grey frames, which
// it turns into the 2L flow channels of the temporal stream, written straight
// into buffer A). A RUN command then executes the five fused Conv+BN+ReLU
// layers and two max pools of one stream on the PE x SIMD array and the pool
// unit, ping-ponging between feature buffers A and B under the layer
// controller's loop nest. READ_OFM down-sizes the final feature map
// (8 x 8 x 64 at the default 32 x 32 input) back onto the DMA stream.
//
// Interface: cmd/cmd_valid/cmd_ready (qhar_pkg::cmd_t), busy, done pulse,
// run_cycles; s_axis_* in and m_axis_* out (AXI-Stream, 64 bits, tlast).
// Timing: one PE x SIMD multiply-accumulate word per clock during a
// convolution, four words per pooled word, about 60 cycles per pixel in the
// flow unit. The split of the network between processor and logic, the
// two streams, fused layers, max pooling, optical flow, PE/SIMD compute,
// on-chip weights and the up/down-sizing DMA path follow the paper; the
// command set, sizes, buffer schedule and memory layouts are this design's.
module qhar_accel
  import qhar_pkg::*;
#(
  parameter int unsigned LANES = qhar_pkg::SIMD,
  parameter int unsigned PE_N  = qhar_pkg::PE
) (
  input  logic        clk,
  input  logic        rst_n,
  // processor commands / status
  input  cmd_t        cmd,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  output logic        busy,
  output logic        done,
  output logic [31:0] run_cycles,
  // DMA stream in
  input  logic [63:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  // DMA stream out
  output logic [63:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready
);
  localparam int unsigned FDEP = FMAP_DEPTH;
  localparam int unsigned WDEP = WEIGHT_DEPTH;
  localparam int unsigned BDEP = BN_DEPTH;
  localparam int unsigned NPIX = IMG_H * IMG_W;
  localparam int unsigned FA = $clog2(FDEP);
  localparam int unsigned T_CT = cdiv(2*FLOW_L, LANES);   // temporal conv1 tiles

  // ---------------- stream in: routing and up-sizing ----------------
  logic               route_up, raw_ready, up_s_ready;
  logic [LANES*8-1:0] up_data;
  logic               up_valid, up_last, up_ready;

  assign s_axis_tready = route_up ? up_s_ready : raw_ready;

  axis_upsizer #(.IN_W(64), .OUT_W(LANES*8)) u_up (
    .clk, .rst_n,
    .s_data(s_axis_tdata), .s_valid(s_axis_tvalid && route_up), .s_last(s_axis_tlast),
    .s_ready(up_s_ready),
    .m_data(up_data), .m_valid(up_valid), .m_last(up_last), .m_ready(up_ready));

  // ---------------- controller ----------------
  logic                    w_we, bn_we, fa_we, frm_we, frm_bank, lk_start, lk_cur_bank, lk_phase;
  logic [$clog2(WDEP)-1:0] w_waddr;
  logic [$clog2(PE_N)-1:0] w_wrow, bn_wlane;
  logic [LANES*8-1:0]      w_wdata, fa_wdata;
  logic [$clog2(BDEP)-1:0] bn_waddr;
  bn_rec_t                 bn_wdata;
  logic [FA-1:0]           fa_waddr;
  logic [$clog2(NPIX/8)-1:0] frm_addr;
  logic [63:0]             frm_data;
  logic [7:0]              flow_pair;
  logic                    lk_done, lc_start, lc_done, layer_phase, src_is_b;
  layer_t                  lc_desc;
  logic                    read_phase, rb_en;
  logic [FA-1:0]           rb_addr;
  logic [LANES*8-1:0]      o_data;
  logic                    o_valid, o_last, o_ready;
  logic [LANES*8-1:0]      a_rdata, b_rdata;

  qhar_ctrl #(.LANES(LANES), .PE_N(PE_N), .FDEP(FDEP), .WDEP(WDEP), .BDEP(BDEP), .NPIX(NPIX)) u_ctrl (
    .clk, .rst_n, .cmd, .cmd_valid, .cmd_ready, .busy, .done, .run_cycles,
    .route_up, .raw_data(s_axis_tdata), .raw_valid(s_axis_tvalid && !route_up), .raw_ready,
    .up_data, .up_valid, .up_ready,
    .w_we, .w_waddr, .w_wrow, .w_wdata, .bn_we, .bn_waddr, .bn_wlane, .bn_wdata,
    .fa_we, .fa_waddr, .fa_wdata,
    .frm_we, .frm_bank, .frm_addr, .frm_data, .lk_start, .lk_cur_bank, .flow_pair, .lk_phase,
    .lk_done,
    .lc_start, .lc_desc, .layer_phase, .src_is_b, .lc_done,
    .read_phase, .rb_en, .rb_addr, .rb_data(b_rdata),
    .o_data, .o_valid, .o_last, .o_ready);

  // ---------------- optical flow ----------------
  logic                    flow_valid, flow_singular, lk_busy;
  logic [$clog2(NPIX)-1:0] flow_pix;
  logic [7:0]              flow_dx, flow_dy;

  lk_flow #(.H(IMG_H), .W(IMG_W), .WIN(LK_WIN)) u_lk (
    .clk, .rst_n, .frm_we, .frm_bank, .frm_addr, .frm_data,
    .start(lk_start), .cur_bank(lk_cur_bank), .busy(lk_busy), .done(lk_done),
    .flow_valid, .flow_pix, .flow_dx, .flow_dy, .flow_singular);

  // Flow of pair k goes to channels 2k (dx) and 2k+1 (dy) of the temporal IFM.
  logic [FA-1:0]      lk_waddr;
  logic [LANES-1:0]   lk_wbe;
  logic [LANES*8-1:0] lk_wdata;
  always_comb begin
    int unsigned c0;
    c0       = 2 * int'(flow_pair);
    lk_waddr = FA'(int'(flow_pix) * T_CT + c0 / LANES);
    lk_wbe   = '0;
    lk_wbe[c0 % LANES]       = 1'b1;
    lk_wbe[(c0 + 1) % LANES] = 1'b1;
    lk_wdata = '0;
    lk_wdata[(c0 % LANES)*8 +: 8]       = flow_dx;
    lk_wdata[((c0 + 1) % LANES)*8 +: 8] = flow_dy;
  end

  // ---------------- layer engine ----------------
  logic                    rd_en, d_valid, d_first, d_last, d_zero, d_pool;
  logic [FA-1:0]           f_raddr, wr_addr;
  logic [$clog2(WDEP)-1:0] w_raddr;
  logic [$clog2(BDEP)-1:0] bn_raddr;
  logic [LANES-1:0]        d_mask;
  logic                    res_valid, wr_en;
  logic [LANES*8-1:0]      res_word, src_word, act;
  logic [PE_N*LANES*8-1:0] w_rdata;
  bn_rec_t                 bn_rdata [PE_N];
  logic [PE_N*8-1:0]       conv_word;
  logic                    conv_valid;
  logic [LANES*8-1:0]      pool_word;
  logic                    pool_valid;
  logic                    lc_busy;

  layer_controller #(.LANES(LANES), .PE_N(PE_N), .FDEP(FDEP), .WDEP(WDEP), .BDEP(BDEP)) u_lc (
    .clk, .rst_n, .start(lc_start), .desc(lc_desc), .busy(lc_busy), .done(lc_done),
    .rd_en, .f_raddr, .w_raddr, .bn_raddr,
    .d_valid, .d_first, .d_last, .d_zero, .d_mask, .d_pool,
    .res_valid, .wr_en, .wr_addr);

  weight_buffer #(.PE_N(PE_N), .ROW_W(LANES*8), .DEPTH(WDEP)) u_wbuf (
    .clk, .we(w_we), .waddr(w_waddr), .wrow(w_wrow), .wdata(w_wdata),
    .re(rd_en), .raddr(w_raddr), .rdata(w_rdata));

  bn_param_buffer #(.PE_N(PE_N), .DEPTH(BDEP)) u_bnbuf (
    .clk, .we(bn_we), .waddr(bn_waddr), .wlane(bn_wlane), .wdata(bn_wdata),
    .re(rd_en), .raddr(bn_raddr), .rdata(bn_rdata));

  // IFM word: padding taps and channels beyond in_ch read as zero.
  assign src_word = src_is_b ? b_rdata : a_rdata;
  always_comb
    for (int unsigned l = 0; l < LANES; l++)
      act[l*8 +: 8] = (d_mask[l] && !d_zero) ? src_word[l*8 +: 8] : 8'd0;

  pe_array #(.PE_N(PE_N), .LANES(LANES)) u_pe (
    .clk, .rst_n, .in_valid(d_valid && !d_pool), .in_first(d_first), .in_last(d_last),
    .act, .wgt(w_rdata), .bn(bn_rdata), .out_word(conv_word), .out_valid(conv_valid));

  maxpool_unit #(.LANES(LANES)) u_pool (
    .clk, .rst_n, .in_valid(d_valid && d_pool), .in_first(d_first), .in_last(d_last),
    .in_word(src_word), .out_word(pool_word), .out_valid(pool_valid));

  assign res_valid = conv_valid || pool_valid;
  assign res_word  = pool_valid ? pool_word : conv_word;

  // ---------------- feature buffers A and B (ping-pong) ----------------
  logic               a_we, b_we, a_re, b_re;
  logic [LANES-1:0]   a_wbe;
  logic [FA-1:0]      a_waddr, a_raddr, b_raddr;
  logic [LANES*8-1:0] a_wdata;

  always_comb begin
    if (layer_phase) begin
      a_we = wr_en && src_is_b;  a_wbe = '1;  a_waddr = wr_addr;  a_wdata = res_word;
    end else if (lk_phase) begin
      a_we = flow_valid;         a_wbe = lk_wbe; a_waddr = lk_waddr; a_wdata = lk_wdata;
    end else begin
      a_we = fa_we;              a_wbe = '1;  a_waddr = fa_waddr; a_wdata = fa_wdata;
    end
    b_we    = layer_phase && wr_en && !src_is_b;
    a_re    = rd_en && !src_is_b;
    a_raddr = f_raddr;
    b_re    = read_phase ? rb_en : (rd_en && src_is_b);
    b_raddr = read_phase ? rb_addr : f_raddr;
  end

  fmap_buffer #(.LANES(LANES), .DEPTH(FDEP)) u_fa (
    .clk, .we(a_we), .wbe(a_wbe), .waddr(a_waddr), .wdata(a_wdata),
    .re(a_re), .raddr(a_raddr), .rdata(a_rdata));

  fmap_buffer #(.LANES(LANES), .DEPTH(FDEP)) u_fb (
    .clk, .we(b_we), .wbe('1), .waddr(wr_addr), .wdata(res_word),
    .re(b_re), .raddr(b_raddr), .rdata(b_rdata));

  // ---------------- stream out: down-sizing ----------------
  axis_downsizer #(.IN_W(LANES*8), .OUT_W(64)) u_down (
    .clk, .rst_n, .s_data(o_data), .s_valid(o_valid), .s_last(o_last), .s_ready(o_ready),
    .m_data(m_axis_tdata), .m_valid(m_axis_tvalid), .m_last(m_axis_tlast), .m_ready(m_axis_tready));

  // A conv result word (PE_N output channels) is stored as one fmap word.
  if (PE_N != LANES) begin : g_bad_cfg
    $error("qhar_accel: PE_N must equal LANES");
  end
endmodule
