// bn_param_buffer: on-chip store of folded batch-norm parameters.
//
// Batch-norm (scale gamma/sigma, shift beta - mu*gamma/sigma) is folded with
// the quantisation scale into one record per output channel (qhar_pkg::
// bn_rec_t: bias, multiplier, shift, weight zero point). A word holds the
// records of the PE output channels computed together; the loader writes one
// record (one lane) per DMA beat. One-cycle read latency. The paper fuses
// BN into the convolution; the record format is this design's choice.
module bn_param_buffer
  import qhar_pkg::*;
#(
  parameter int unsigned PE_N  = qhar_pkg::PE,
  parameter int unsigned DEPTH = qhar_pkg::BN_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [$clog2(PE_N)-1:0]  wlane,
  input  bn_rec_t                  wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output bn_rec_t                  rdata [PE_N]
);
  for (genvar p = 0; p < PE_N; p++) begin : g_lane
    bn_rec_t lane_mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wlane == p[$clog2(PE_N)-1:0]) lane_mem[waddr] <= wdata;
      if (re) rdata[p] <= lane_mem[raddr];
    end
  end
endmodule
