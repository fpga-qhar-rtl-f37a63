// tb_axis_upsizer: packs random 64-bit beats into 128-bit words under random
// valid gaps and consumer back-pressure, and compares each word (slice order,
// early close on tlast, last flag) with the beats that were sent.
module tb_axis_upsizer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [63:0] s_data; logic s_valid, s_last, s_ready;
  logic [127:0] m_data; logic m_valid, m_last, m_ready;
  axis_upsizer #(.IN_W(64), .OUT_W(128)) dut (.*);

  // expected words
  logic [127:0] exp_q[$]; logic exp_last_q[$];
  int stalls = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // consumer
  initial begin
    m_ready = 0;
    forever begin
      // decide ready for the coming edge, then see whether a word moves on it
      @(negedge clk);
      if (m_valid && !m_ready) stalls++;
      m_ready = ($urandom % 3) != 0;
      if (m_valid && m_ready) begin
        logic [127:0] e; logic el;
        e = exp_q.pop_front(); el = exp_last_q.pop_front();
        checks++;
        if (m_data !== e || m_last !== el) begin
          failures++; $display("word mismatch %h exp %h last %b/%b", m_data, e, m_last, el);
        end
      end
    end
  end

  initial begin
    s_valid = 0; s_last = 0; s_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int w = 0; w < 300; w++) begin
      logic [127:0] word; bit short;
      short = ($urandom % 8) == 0;
      word = '0;
      for (int b = 0; b < (short ? 1 : 2); b++) begin
        logic [63:0] d;
        d = {$urandom, $urandom};
        word[b*64 +: 64] = d;
        while (($urandom % 4) == 0) @(posedge clk);
        @(negedge clk);
        s_data = d; s_valid = 1; s_last = short || (b == 1 && ($urandom % 5 == 0));
        if (b == 1 || short) begin exp_q.push_back(word); exp_last_q.push_back(s_last); end
        if (s_last) b = 2;
        #1;
        while (!s_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 s_valid = 0; s_last = 0;
      end
    end
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d words never came out", exp_q.size()); end
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
