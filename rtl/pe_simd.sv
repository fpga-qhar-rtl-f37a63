// pe_simd: one processing element of the convolution engine.
//
// Each cycle it multiplies SIMD unsigned 8-bit activations (one pixel, SIMD
// input channels) by SIMD unsigned 8-bit weights taken relative to the
// weight zero point (w - wzp, a 9-bit signed value), sums the products in an
// adder tree and adds the sum into a signed accumulator. 'first' starts a new
// sum, 'last' ends it: one cycle after a valid 'last' the finished sum is on
// acc with acc_valid high for one cycle. This is the inner part of the
// paper's eq. 1 (sum over channels and kernel taps, the tile over channels
// done in parallel lanes); the zero-point form of the unsigned weights and
// the one-cycle timing are this design's choices.
module pe_simd #(
  parameter int unsigned LANES = qhar_pkg::SIMD,
  parameter int unsigned ACCW  = qhar_pkg::ACC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic [LANES*8-1:0]     act,
  input  logic [LANES*8-1:0]     wgt,
  input  logic [7:0]             wzp,
  output logic signed [ACCW-1:0] acc,
  output logic                   acc_valid
);
  logic signed [ACCW-1:0] dot;
  logic signed [9:0]      wq;     // w - wzp, -255..255
  logic signed [18:0]     prod;   // act * (w - wzp)

  always_comb begin
    dot  = '0;
    wq   = '0;
    prod = '0;
    for (int unsigned l = 0; l < LANES; l++) begin
      wq   = $signed({2'b0, wgt[l*8 +: 8]}) - $signed({2'b0, wzp});
      prod = $signed({1'b0, act[l*8 +: 8]}) * wq;
      dot += ACCW'(prod);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else begin
      acc_valid <= in_valid && in_last;
      if (in_valid) acc <= (in_first ? '0 : acc) + dot;
    end
  end
endmodule
