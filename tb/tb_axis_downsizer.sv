// tb_axis_downsizer: sends random 128-bit words (some marked last) and checks
// the 64-bit beats that come out (low half first, tlast only on the final
// beat of a last word) under random back-pressure; also checks that a
// continuous stream with ready held high runs at one beat per cycle.
module tb_axis_downsizer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [127:0] s_data; logic s_valid, s_last, s_ready;
  logic [63:0] m_data; logic m_valid, m_last, m_ready;
  axis_downsizer #(.IN_W(128), .OUT_W(64)) dut (.*);

  logic [63:0] exp_q[$]; logic exp_l[$];
  bit random_ready = 1;
  int beats = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    m_ready = 0;
    forever begin
      @(negedge clk);
      m_ready = random_ready ? (($urandom % 3) != 0) : 1'b1;
      if (m_valid && m_ready) begin
        logic [63:0] e; logic el;
        e = exp_q.pop_front(); el = exp_l.pop_front(); beats++;
        checks++;
        if (m_data !== e || m_last !== el) begin
          failures++; $display("beat mismatch %h exp %h last %b/%b", m_data, e, m_last, el);
        end
      end
    end
  end

  task automatic send(input bit gaps);
    logic [127:0] w; logic l;
    w = {$urandom, $urandom, $urandom, $urandom}; l = ($urandom % 4) == 0;
    exp_q.push_back(w[63:0]); exp_l.push_back(1'b0);
    exp_q.push_back(w[127:64]); exp_l.push_back(l);
    if (gaps) while (($urandom % 4) == 0) @(posedge clk);
    @(negedge clk);
    s_data = w; s_valid = 1; s_last = l;
    #1;
    while (!s_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 s_valid = 0;
  endtask

  initial begin
    int t0, b0;
    s_valid = 0; s_last = 0; s_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) send(1);
    while (exp_q.size() != 0) @(posedge clk);
    // throughput: 64 words with ready high take 128 cycles
    random_ready = 0;
    @(posedge clk); @(posedge clk);
    b0 = beats; t0 = $time / 10;
    for (int i = 0; i < 64; i++) send(0);
    while (exp_q.size() != 0) @(posedge clk);
    checks++;
    if (($time / 10) - t0 > 128 + 4) begin
      failures++; $display("throughput: %0d cycles for 128 beats", ($time/10) - t0);
    end
    checks++;
    if (beats - b0 != 128) begin failures++; $display("beat count %0d", beats - b0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
