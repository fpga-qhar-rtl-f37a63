// bn_relu_quant: fused batch-norm, ReLU and 8-bit requantisation.
//
// Takes a finished convolution sum and the output channel's folded record
// (qhar_pkg::bn_rec_t) and computes, one cycle later,
//   t = (acc + bias) * mult                      (48-bit signed)
//   x = (t + 2^(shift-1)) >>> shift              (round half up; shift 0: x = t)
//   y = ReLU(x), saturated to 0..255             (paper eq. 4)
// so that batch-norm (paper eq. 2) and the activation scale of the 8-bit
// network reduce to one multiply and one shift. The paper also gives a leaky
// form (eq. 3, 0.1x for x < 0); the activations here are unsigned 8-bit, so
// the plain ReLU of eq. 4 is used. The rounding and saturation are this
// design's choices.
module bn_relu_quant
  import qhar_pkg::*;
#(
  parameter int unsigned ACCW = qhar_pkg::ACC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [ACCW-1:0] acc,
  input  bn_rec_t                rec,
  output logic [7:0]             y,
  output logic                   y_valid
);
  logic signed [47:0] t, r, x;
  logic [5:0] sh;

  always_comb begin
    sh = (rec.shift > 8'd46) ? 6'd46 : rec.shift[5:0];
    t  = 48'(48'($signed(acc)) + 48'($signed(rec.bias))) * 48'($signed(rec.mult));
    r  = (sh == 6'd0) ? 48'sd0 : (48'sd1 <<< (sh - 6'd1));
    x  = (t + r) >>> sh;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= in_valid;
      if (in_valid) y <= (x < 0) ? 8'd0 : (x > 48'sd255) ? 8'd255 : x[7:0];
    end
  end
endmodule
