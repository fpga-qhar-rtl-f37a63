// tb_maxpool_unit: random windows of 1..9 words, back to back, with the
// lane-wise maximum checked one cycle after each 'last'.
module tb_maxpool_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int L = 16;

  logic in_valid, in_first, in_last; logic [L*8-1:0] in_word, out_word; logic out_valid;
  maxpool_unit #(.LANES(L)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_word = '0;
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int w = 0; w < 1000; w++) begin
      int n; logic [L*8-1:0] m;
      n = (w < 500) ? 4 : 1 + $urandom % 9;
      m = '0;
      for (int i = 0; i < n; i++) begin
        logic [L*8-1:0] d;
        d = {$urandom, $urandom, $urandom, $urandom};
        for (int l = 0; l < L; l++) if (i == 0 || d[l*8 +: 8] > m[l*8 +: 8]) m[l*8 +: 8] = d[l*8 +: 8];
        in_valid <= 1; in_first <= (i == 0); in_last <= (i == n-1); in_word <= d;
        @(posedge clk);
      end
      #1;
      checks++;
      if (!out_valid || out_word !== m) begin failures++; $display("window %0d: %h exp %h", w, out_word, m); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
