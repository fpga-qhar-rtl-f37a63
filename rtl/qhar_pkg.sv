// qhar_pkg: types and constants shared by the two-stream action-recognition
// accelerator.
//
// The network is the five-layer homogeneous SimpleNet of the paper: each of
// the two streams (spatial, one RGB frame; temporal, 2L = 20 optical-flow
// channels) runs Conv1..Conv3 (3x3), a max pool, Conv4 (1x1), a max pool and
// Conv5 (1x1), every convolution fused with batch-norm and ReLU. The channel
// counts, kernels and strides in LAYERS come from the paper's network figure.
// The frame size, the pooling window (2x2, stride 2), the "same" zero padding,
// the PE/SIMD widths and all memory layouts are this design's own choices.
//
// Data layout. A feature map of C channels is stored pixel-major, one word of
// SIMD 8-bit channels per address: addr = (row*W + col)*CT + ct with
// CT = ceil(C/SIMD). Weights of one layer are stored at
// wbase + (ot*K*K + ky*K + kx)*CT + ct, one word holding PE rows of SIMD bytes
// (row p = output channel ot*PE+p). BN parameters are stored at bnbase + ot,
// one word holding PE channel records.
package qhar_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned DATA_W  = 8;    // activations and weights (8-bit QAT)
  localparam int unsigned SIMD    = 16;   // input channels per cycle
  localparam int unsigned PE      = 16;   // output channels per cycle
  localparam int unsigned ACC_W   = 32;   // accumulator width
  localparam int unsigned AXIS_W  = 64;   // DMA stream width
  localparam int unsigned IMG_H   = 32;   // frame height fed to the CNN
  localparam int unsigned IMG_W   = 32;   // frame width
  localparam int unsigned MAX_CH  = 64;   // widest feature map in the network
  localparam int unsigned FLOW_L  = 10;   // optical-flow pairs: 2L = 20 channels
  localparam int unsigned LK_WIN  = 3;    // Lucas-Kanade window n x n
  localparam int unsigned NUM_LAYERS = 7; // per stream: 5 conv + 2 pool

  localparam int unsigned WORD_W  = SIMD*DATA_W;        // one fmap word
  localparam int unsigned WROW_W  = SIMD*DATA_W;        // one PE's weight row
  localparam int unsigned WWORD_W = PE*WROW_W;          // one weight word

  // ---------------- BN record ----------------
  // Folded batch-norm and requantisation for one output channel:
  // y = clamp_u8( ReLU( ((acc + bias) * mult) >>> shift ) )
  // wzp is the weight zero point: 8-bit unsigned weights w stand for (w - wzp).
  typedef struct packed {
    logic signed [31:0] bias;
    logic signed [15:0] mult;
    logic        [7:0]  shift;
    logic        [7:0]  wzp;
  } bn_rec_t;
  localparam int unsigned BN_REC_W = $bits(bn_rec_t);   // 64, one DMA beat
  localparam int unsigned BN_WORD_W = PE*BN_REC_W;

  // ---------------- layer descriptors ----------------
  typedef enum logic [0:0] {L_CONV = 1'b0, L_POOL = 1'b1} layer_kind_e;
  typedef enum logic [0:0] {S_SPATIAL = 1'b0, S_TEMPORAL = 1'b1} stream_e;

  typedef struct packed {
    layer_kind_e kind;
    logic [7:0]  in_ch;
    logic [7:0]  out_ch;
    logic [3:0]  k;       // kernel (conv) or window (pool)
    logic [3:0]  stride;
    logic [7:0]  h;       // input height
    logic [7:0]  w;       // input width
    logic [15:0] wbase;   // first weight word
    logic [15:0] bnbase;  // first BN word
  } layer_t;

  function automatic int unsigned cdiv(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Conv shapes of one stream (paper's network figure): in, out, k, stride.
  function automatic int unsigned conv_in(stream_e s, int unsigned i);
    case (i)
      0: return (s == S_SPATIAL) ? 3 : 2*FLOW_L;
      1: return 32;
      default: return 64;
    endcase
  endfunction
  function automatic int unsigned conv_out(int unsigned i);
    return (i == 0) ? 32 : 64;
  endfunction
  function automatic int unsigned conv_k(int unsigned i);
    return (i < 3) ? 3 : 1;
  endfunction

  // Weight words taken by conv i of a stream.
  function automatic int unsigned conv_wwords(stream_e s, int unsigned i);
    return cdiv(conv_out(i), PE) * conv_k(i) * conv_k(i) * cdiv(conv_in(s, i), SIMD);
  endfunction
  function automatic int unsigned stream_wwords(stream_e s);
    int unsigned n = 0;
    for (int unsigned i = 0; i < 5; i++) n += conv_wwords(s, i);
    return n;
  endfunction
  function automatic int unsigned stream_bnwords();
    int unsigned n = 0;
    for (int unsigned i = 0; i < 5; i++) n += cdiv(conv_out(i), PE);
    return n;
  endfunction

  localparam int unsigned WEIGHT_DEPTH = stream_wwords(S_SPATIAL) + stream_wwords(S_TEMPORAL);
  localparam int unsigned BN_DEPTH     = 2*stream_bnwords();
  localparam int unsigned FMAP_DEPTH   = IMG_H*IMG_W*cdiv(MAX_CH, SIMD);

  // Layer j (0..6) of stream s, in execution order:
  // conv1, conv2, conv3, pool, conv4, pool, conv5.
  function automatic layer_t layer_desc(stream_e s, int unsigned j);
    layer_t d;
    int unsigned ci, wb, bb, hh;
    wb = (s == S_SPATIAL) ? 0 : stream_wwords(S_SPATIAL);
    bb = (s == S_SPATIAL) ? 0 : stream_bnwords();
    hh = IMG_H;
    ci = 0;
    d = '0;
    for (int unsigned t = 0; t <= j; t++) begin
      if (t == 3 || t == 5) begin
        d.kind = L_POOL; d.in_ch = 8'(64); d.out_ch = 8'(64); d.k = 4'd2; d.stride = 4'd2;
        d.h = 8'(hh); d.w = 8'(hh * IMG_W / IMG_H); d.wbase = '0; d.bnbase = '0;
        hh = hh / 2;
      end else begin
        d.kind = L_CONV; d.in_ch = 8'(conv_in(s, ci)); d.out_ch = 8'(conv_out(ci));
        d.k = 4'(conv_k(ci)); d.stride = 4'd1;
        d.h = 8'(hh); d.w = 8'(hh * IMG_W / IMG_H);
        d.wbase = 16'(wb); d.bnbase = 16'(bb);
        wb += conv_wwords(s, ci); bb += cdiv(conv_out(ci), PE);
        ci++;
      end
    end
    return d;
  endfunction

  // ---------------- commands from the processor ----------------
  typedef enum logic [2:0] {
    OP_LOAD_WEIGHTS = 3'd0,  // arg = number of weight rows (SIMD bytes each)
    OP_LOAD_BN      = 3'd1,  // arg = number of BN records (one 64-bit beat each)
    OP_LOAD_RGB     = 3'd2,  // IMG_H*IMG_W pixels, one SIMD word (2 beats) each
    OP_LOAD_FRAME   = 3'd3,  // one grey frame, 8 pixels per beat; arg = frame index
    OP_RUN          = 3'd4,  // arg[0] = stream: run all layers of that stream
    OP_READ_OFM     = 3'd5   // stream the final OFM out
  } op_e;

  typedef struct packed {
    op_e         op;
    logic [15:0] arg;
  } cmd_t;

endpackage
