// qhar_ctrl: command scheduler of the accelerator.
//
// The processor drives one command at a time (cmd_valid/cmd_ready, see
// qhar_pkg::op_e) and the data of a command on the DMA stream. The
// controller routes the stream to its destination and sequences the layers:
//   LOAD_WEIGHTS  arg rows of SIMD weights, each one up-sized word, written
//                 to weight row (n mod PE) of word (n div PE).
//   LOAD_BN       arg BN records, one raw 64-bit beat each, to lane
//                 (n mod PE) of BN word (n div PE).
//   LOAD_RGB      IMG_H*IMG_W up-sized words, one pixel each (channels in
//                 lanes 0..2), into feature buffer A.
//   LOAD_FRAME    one grey frame, 8 pixels per raw beat, into Lucas-Kanade
//                 bank arg[0]; for arg > 0 the flow of pair (arg-1, arg) is
//                 then computed and written into buffer A as channels
//                 2(arg-1) and 2(arg-1)+1 (the top does the lane placement).
//   RUN           the 7 layers of stream arg[0] (spatial 0, temporal 1),
//                 ping-ponging A->B->A...; the result ends in buffer B.
//   READ_OFM      the final feature map of the last run, read from B and sent
//                 to the down-sizer, tlast on the final word.
// 'done' pulses when a command ends; run_cycles holds the length of the last
// RUN in clock cycles, for the processor to read (throughput monitoring).
// Routing between up-sized and raw beats is the paper's "routing"; the
// command set and the buffer schedule are this design's choices.
module qhar_ctrl
  import qhar_pkg::*;
#(
  parameter int unsigned LANES = qhar_pkg::SIMD,
  parameter int unsigned PE_N  = qhar_pkg::PE,
  parameter int unsigned FDEP  = qhar_pkg::FMAP_DEPTH,
  parameter int unsigned WDEP  = qhar_pkg::WEIGHT_DEPTH,
  parameter int unsigned BDEP  = qhar_pkg::BN_DEPTH,
  parameter int unsigned NPIX  = qhar_pkg::IMG_H * qhar_pkg::IMG_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // commands
  input  cmd_t                     cmd,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  output logic                     busy,
  output logic                     done,
  output logic [31:0]              run_cycles,
  // stream routing
  output logic                     route_up,
  input  logic [63:0]              raw_data,
  input  logic                     raw_valid,
  output logic                     raw_ready,
  input  logic [LANES*8-1:0]       up_data,
  input  logic                     up_valid,
  output logic                     up_ready,
  // weight / BN loading
  output logic                     w_we,
  output logic [$clog2(WDEP)-1:0]  w_waddr,
  output logic [$clog2(PE_N)-1:0]  w_wrow,
  output logic [LANES*8-1:0]       w_wdata,
  output logic                     bn_we,
  output logic [$clog2(BDEP)-1:0]  bn_waddr,
  output logic [$clog2(PE_N)-1:0]  bn_wlane,
  output bn_rec_t                  bn_wdata,
  // feature buffer A load
  output logic                     fa_we,
  output logic [$clog2(FDEP)-1:0]  fa_waddr,
  output logic [LANES*8-1:0]       fa_wdata,
  // Lucas-Kanade unit
  output logic                     frm_we,
  output logic                     frm_bank,
  output logic [$clog2(NPIX/8)-1:0] frm_addr,
  output logic [63:0]              frm_data,
  output logic                     lk_start,
  output logic                     lk_cur_bank,
  output logic [7:0]               flow_pair,
  output logic                     lk_phase,
  input  logic                     lk_done,
  // layer engine
  output logic                     lc_start,
  output layer_t                   lc_desc,
  output logic                     layer_phase,
  output logic                     src_is_b,
  input  logic                     lc_done,
  // readout from buffer B
  output logic                     read_phase,
  output logic                     rb_en,
  output logic [$clog2(FDEP)-1:0]  rb_addr,
  input  logic [LANES*8-1:0]       rb_data,
  output logic [LANES*8-1:0]       o_data,
  output logic                     o_valid,
  output logic                     o_last,
  input  logic                     o_ready
);
  typedef enum logic [3:0] {
    C_IDLE, C_LOAD_W, C_LOAD_BN, C_LOAD_RGB, C_LOAD_FRM, C_LK_WAIT,
    C_LAYER_GO, C_LAYER_WAIT, C_RD_ISSUE, C_RD_HOLD, C_FINISH
  } cstate_e;
  cstate_e state;

  // Layer table of both streams, fixed at elaboration.
  layer_t lt [2][NUM_LAYERS];
  for (genvar s = 0; s < 2; s++) begin : g_s
    for (genvar j = 0; j < NUM_LAYERS; j++) begin : g_j
      assign lt[s][j] = layer_desc(stream_e'(s), j);
    end
  end

  localparam int unsigned RGB_CT = cdiv(conv_in(S_SPATIAL, 0), LANES);
  localparam int unsigned FINAL_WORDS = (IMG_H/4) * (IMG_W/4) * cdiv(conv_out(4), LANES);

  cmd_t        cur;
  logic [15:0] cnt;
  logic [2:0]  layer;
  logic        strm;

  assign cmd_ready   = (state == C_IDLE);
  assign busy        = (state != C_IDLE);
  assign route_up    = (state == C_LOAD_W) || (state == C_LOAD_RGB);
  assign up_ready    = route_up;
  assign raw_ready   = (state == C_LOAD_BN) || (state == C_LOAD_FRM);
  assign lk_phase    = (state == C_LK_WAIT);
  assign layer_phase = (state == C_LAYER_GO) || (state == C_LAYER_WAIT);
  assign read_phase  = (state == C_RD_ISSUE) || (state == C_RD_HOLD);
  assign src_is_b    = layer[0];
  assign lc_desc     = lt[strm][layer];

  // loaders: direct from the routed stream
  always_comb begin
    w_we     = (state == C_LOAD_W) && up_valid;
    w_waddr  = ($clog2(WDEP))'(cnt / 16'(PE_N));
    w_wrow   = ($clog2(PE_N))'(cnt % 16'(PE_N));
    w_wdata  = up_data;
    bn_we    = (state == C_LOAD_BN) && raw_valid;
    bn_waddr = ($clog2(BDEP))'(cnt / 16'(PE_N));
    bn_wlane = ($clog2(PE_N))'(cnt % 16'(PE_N));
    bn_wdata = bn_rec_t'(raw_data);
    fa_we    = (state == C_LOAD_RGB) && up_valid;
    fa_waddr = ($clog2(FDEP))'(32'(cnt) * RGB_CT);
    fa_wdata = up_data;
    frm_we   = (state == C_LOAD_FRM) && raw_valid;
    frm_bank = cur.arg[0];
    frm_addr = ($clog2(NPIX/8))'(cnt);
    frm_data = raw_data;
    rb_en    = (state == C_RD_ISSUE);
    rb_addr  = ($clog2(FDEP))'(cnt);
    o_data   = rb_data;
    o_valid  = (state == C_RD_HOLD);
    o_last   = (state == C_RD_HOLD) && (cnt == 16'(FINAL_WORDS - 1));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= C_IDLE; cur <= '0; cnt <= '0; layer <= '0; strm <= 1'b0;
      done <= 1'b0; lk_start <= 1'b0; lk_cur_bank <= 1'b0; flow_pair <= '0;
      lc_start <= 1'b0; run_cycles <= '0;
    end else begin
      done     <= 1'b0;
      lk_start <= 1'b0;
      lc_start <= 1'b0;
      case (state)
        C_IDLE: if (cmd_valid) begin
          cur <= cmd;
          cnt <= '0;
          case (cmd.op)
            OP_LOAD_WEIGHTS: state <= (cmd.arg == 0) ? C_FINISH : C_LOAD_W;
            OP_LOAD_BN:      state <= (cmd.arg == 0) ? C_FINISH : C_LOAD_BN;
            OP_LOAD_RGB:     state <= C_LOAD_RGB;
            OP_LOAD_FRAME:   state <= C_LOAD_FRM;
            OP_RUN: begin
              strm <= cmd.arg[0]; layer <= '0; run_cycles <= '0;
              state <= C_LAYER_GO;
            end
            OP_READ_OFM:     state <= C_RD_ISSUE;
            default:         state <= C_FINISH;
          endcase
        end
        C_LOAD_W: if (up_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == cur.arg - 1'b1) state <= C_FINISH;
        end
        C_LOAD_BN: if (raw_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == cur.arg - 1'b1) state <= C_FINISH;
        end
        C_LOAD_RGB: if (up_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(NPIX - 1)) state <= C_FINISH;
        end
        C_LOAD_FRM: if (raw_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(NPIX/8 - 1)) begin
            if (cur.arg == 0) state <= C_FINISH;
            else begin
              lk_start    <= 1'b1;
              lk_cur_bank <= cur.arg[0];
              flow_pair   <= 8'(cur.arg - 1'b1);
              state       <= C_LK_WAIT;
            end
          end
        end
        C_LK_WAIT: if (lk_done) state <= C_FINISH;
        C_LAYER_GO: begin
          run_cycles <= run_cycles + 1;
          lc_start   <= 1'b1;
          state      <= C_LAYER_WAIT;
        end
        C_LAYER_WAIT: begin
          run_cycles <= run_cycles + 1;
          if (lc_done) begin
            if (layer == 3'(NUM_LAYERS - 1)) state <= C_FINISH;
            else begin
              layer <= layer + 1'b1;
              state <= C_LAYER_GO;
            end
          end
        end
        C_RD_ISSUE: state <= C_RD_HOLD;
        C_RD_HOLD: if (o_ready) begin
          cnt <= cnt + 1'b1;
          state <= (cnt == 16'(FINAL_WORDS - 1)) ? C_FINISH : C_RD_ISSUE;
        end
        C_FINISH: begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    o_valid && !o_ready |=> o_valid && $stable(o_data));
endmodule
