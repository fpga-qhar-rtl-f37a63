// maxpool_unit: lane-wise max pooling over a window of feature-map words.
//
// The words of one pooling window (same channel tile, the window's pixels)
// arrive one per cycle, 'first' on the first and 'last' on the final one.
// Each of the LANES 8-bit channels keeps a running maximum (paper eq. 5);
// one cycle after 'last' the window's maxima are on out_word with out_valid
// high for one cycle. A new window may start the cycle after 'last'. The
// window size is set by the address sequence that feeds this unit (2x2 in
// this design, an assumed size).
module maxpool_unit #(
  parameter int unsigned LANES = qhar_pkg::SIMD
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_first,
  input  logic               in_last,
  input  logic [LANES*8-1:0] in_word,
  output logic [LANES*8-1:0] out_word,
  output logic               out_valid
);
  logic [LANES*8-1:0] run, nxt;

  always_comb
    for (int unsigned l = 0; l < LANES; l++)
      nxt[l*8 +: 8] = (in_first || in_word[l*8 +: 8] > run[l*8 +: 8])
                      ? in_word[l*8 +: 8] : run[l*8 +: 8];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= '0; out_word <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        run <= nxt;
        if (in_last) out_word <= nxt;
      end
    end
  end
endmodule
