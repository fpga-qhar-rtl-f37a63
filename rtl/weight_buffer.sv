// weight_buffer: on-chip weight BRAM, partitioned by PE.
//
// Each word holds the weights used in one cycle by the whole PE array: PE
// rows of SIMD 8-bit weights, row p feeding processing element p. The memory
// is split into PE banks so that all rows are read in parallel, while the
// loader writes one row (one bank) at a time as rows arrive from the DMA.
// Read latency is one cycle. The paper stores all weights on-chip in BRAM,
// partitioned for parallel PE access; the bank shape is this design's choice.
// The default depth holds the weights of both streams at once.
module weight_buffer #(
  parameter int unsigned PE_N  = qhar_pkg::PE,
  parameter int unsigned ROW_W = qhar_pkg::WROW_W,
  parameter int unsigned DEPTH = qhar_pkg::WEIGHT_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [$clog2(PE_N)-1:0]  wrow,
  input  logic [ROW_W-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [PE_N*ROW_W-1:0]    rdata
);
  for (genvar p = 0; p < PE_N; p++) begin : g_bank
    logic [ROW_W-1:0] bank [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wrow == p[$clog2(PE_N)-1:0]) bank[waddr] <= wdata;
      if (re) rdata[p*ROW_W +: ROW_W] <= bank[raddr];
    end
  end
endmodule
