// fmap_buffer: one on-chip feature-map buffer (BRAM).
//
// Holds one feature map as DEPTH words of SIMD 8-bit channels (see qhar_pkg
// for the layout). One write port with a byte (channel-lane) enable, so that
// the optical-flow unit can fill single channels, and one read port with a
// one-cycle registered read, as a block RAM has. The accelerator uses two of
// these as a ping-pong pair: a layer reads its IFM from one and writes its
// OFM to the other. On-chip buffers for IFM/OFM are named by the paper; the
// size, lane enables and read latency are this design's choices.
module fmap_buffer #(
  parameter int unsigned LANES = qhar_pkg::SIMD,
  parameter int unsigned DEPTH = qhar_pkg::FMAP_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [LANES-1:0]         wbe,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [LANES*8-1:0]       wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [LANES*8-1:0]       rdata
);
  logic [LANES*8-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      for (int unsigned l = 0; l < LANES; l++)
        if (wbe[l]) mem[waddr][l*8 +: 8] <= wdata[l*8 +: 8];
    if (re) rdata <= mem[raddr];
  end
endmodule
