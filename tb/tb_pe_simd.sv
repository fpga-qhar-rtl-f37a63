// tb_pe_simd: feeds random sums of random length (random activations,
// weights and zero points) and compares each finished accumulator with a
// reference sum of act*(w - zp), including the one-cycle result latency.
module tb_pe_simd;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int L = 16;

  logic in_valid, in_first, in_last; logic [L*8-1:0] act, wgt; logic [7:0] wzp;
  logic signed [31:0] acc; logic acc_valid;
  pe_simd #(.LANES(L), .ACCW(32)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; act = '0; wgt = '0; wzp = '0;
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int s = 0; s < 400; s++) begin
      int n; longint exp_sum;
      n = 1 + $urandom % 20; exp_sum = 0;
      wzp <= 8'($urandom);
      @(posedge clk);
      for (int i = 0; i < n; i++) begin
        logic [L*8-1:0] a, w;
        a = {$urandom, $urandom, $urandom, $urandom};
        w = {$urandom, $urandom, $urandom, $urandom};
        for (int l = 0; l < L; l++)
          exp_sum += longint'(a[l*8 +: 8]) * (longint'(w[l*8 +: 8]) - longint'(wzp));
        in_valid <= 1; in_first <= (i == 0); in_last <= (i == n-1); act <= a; wgt <= w;
        @(posedge clk);
        // a bubble inside a sum must not disturb it
        if (i != n-1 && $urandom % 4 == 0) begin in_valid <= 0; @(posedge clk); end
      end
      in_valid <= 0; in_last <= 0;
      #1;
      checks++;
      if (!acc_valid || acc !== 32'(exp_sum)) begin
        failures++; $display("sum %0d: acc %0d valid %b exp %0d", s, acc, acc_valid, exp_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
