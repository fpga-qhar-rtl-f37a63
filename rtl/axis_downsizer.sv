// axis_downsizer: splits one wide word into narrow AXI-Stream beats.
//
// An IN_W-bit word taken on the input is sent as RATIO = IN_W/OUT_W beats of
// OUT_W bits, least significant slice first. If the word was marked last, the
// final beat carries tlast. The next word is accepted in the same cycle the
// final beat of the current one is taken, so a continuous stream sends one
// beat per cycle. A low m_ready (back-pressure from the DMA) holds the
// current beat. Reset is synchronous, active low. The paper names "downsizing" among the DMA operations; the
// slice order and handshake are this design's choices.
module axis_downsizer #(
  parameter int unsigned IN_W  = 128,
  parameter int unsigned OUT_W = 64
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
  localparam int unsigned RATIO = IN_W / OUT_W;
  localparam int unsigned CW = (RATIO > 1) ? $clog2(RATIO) : 1;

  logic [IN_W-1:0] word;
  logic            word_last;
  logic [CW-1:0]   cnt;
  logic            busy;
  logic            final_beat;

  assign final_beat = (cnt == CW'(RATIO-1));
  assign m_valid    = busy;
  assign m_data     = word[cnt*OUT_W +: OUT_W];
  assign m_last     = busy && final_beat && word_last;
  assign s_ready    = !busy || (m_ready && final_beat);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      word <= '0; word_last <= 1'b0; cnt <= '0; busy <= 1'b0;
    end else begin
      if (busy && m_ready) begin
        if (final_beat) begin
          busy <= 1'b0;
          cnt  <= '0;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
      if (s_valid && s_ready) begin
        word      <= s_data;
        word_last <= s_last;
        busy      <= 1'b1;
        cnt       <= '0;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
