// axis_upsizer: packs narrow AXI-Stream beats into one wide word.
//
// The DMA delivers IN_W-bit beats; the accelerator's buffers take OUT_W-bit
// words (OUT_W a multiple of IN_W). RATIO = OUT_W/IN_W beats are collected,
// the first beat in the least significant slice, and the word is offered on
// the output with a valid/ready handshake. A beat with tlast closes the word
// early (remaining slices are zero) and marks the word as last. While a full
// word waits for the consumer the input is stalled (s_ready low).
// Timing: one beat accepted per cycle; a word is valid the cycle after its
// last beat and leaves in the cycle m_ready is seen high, when a new beat may
// also be taken. Reset is synchronous, active low. The paper names "up-sizing" among the DMA operations; the
// ordering, early close on tlast and handshake are this design's choices.
module axis_upsizer #(
  parameter int unsigned IN_W  = 64,
  parameter int unsigned OUT_W = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IN_W-1:0]  s_data,
  input  logic             s_valid,
  input  logic             s_last,
  output logic             s_ready,
  output logic [OUT_W-1:0] m_data,
  output logic             m_valid,
  output logic             m_last,
  input  logic             m_ready
);
  localparam int unsigned RATIO = OUT_W / IN_W;
  localparam int unsigned CW = (RATIO > 1) ? $clog2(RATIO) : 1;

  logic [CW-1:0] cnt;
  logic          full;

  assign s_ready = !full || m_ready;
  assign m_valid = full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt    <= '0;
      full   <= 1'b0;
      m_data <= '0;
      m_last <= 1'b0;
    end else begin
      if (full && m_ready) full <= 1'b0;
      if (s_valid && s_ready) begin
        if (cnt == '0) m_data <= {{(OUT_W-IN_W){1'b0}}, s_data};
        else           m_data[cnt*IN_W +: IN_W] <= s_data;
        if (s_last || cnt == CW'(RATIO-1)) begin
          cnt    <= '0;
          full   <= 1'b1;
          m_last <= s_last;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // A word that is offered stays offered, unchanged, until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
