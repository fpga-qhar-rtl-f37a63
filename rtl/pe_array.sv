// pe_array: the PE x SIMD compute unit with fused BN/ReLU outputs.
//
// PE_N processing elements (pe_simd) share the same SIMD-channel activation
// word and each take their own row of the weight word, so one cycle performs
// PE_N*SIMD multiply-accumulates: SIMD input channels of one kernel tap for
// PE_N output channels. When a sum ends ('last'), each element's accumulator
// goes through its own bn_relu_quant with the BN record that came with the
// last input, and the PE_N bytes leave together as one output word (output
// channels ot*PE_N .. ot*PE_N+PE_N-1 of one pixel). Latency from the last
// input to out_valid is two cycles; a new sum may start the cycle after a
// 'last'. The PE/SIMD organisation is the paper's; the sizes are assumed.
module pe_array
  import qhar_pkg::*;
#(
  parameter int unsigned PE_N  = qhar_pkg::PE,
  parameter int unsigned LANES = qhar_pkg::SIMD
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [LANES*8-1:0]      act,
  input  logic [PE_N*LANES*8-1:0] wgt,
  input  bn_rec_t                 bn [PE_N],
  output logic [PE_N*8-1:0]       out_word,
  output logic                    out_valid
);
  bn_rec_t bn_q [PE_N];
  logic [PE_N-1:0] yv;

  for (genvar p = 0; p < PE_N; p++) begin : g_pe
    logic signed [ACC_W-1:0] acc;
    logic acc_valid;

    pe_simd #(.LANES(LANES), .ACCW(ACC_W)) u_pe (
      .clk, .rst_n, .in_valid, .in_first, .in_last, .act,
      .wgt(wgt[p*LANES*8 +: LANES*8]), .wzp(bn[p].wzp),
      .acc, .acc_valid);

    always_ff @(posedge clk)
      if (in_valid && in_last) bn_q[p] <= bn[p];

    bn_relu_quant #(.ACCW(ACC_W)) u_bn (
      .clk, .rst_n, .in_valid(acc_valid), .acc, .rec(bn_q[p]),
      .y(out_word[p*8 +: 8]), .y_valid(yv[p]));
  end

  assign out_valid = yv[0];
endmodule
