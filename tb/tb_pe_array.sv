// tb_pe_array: random convolution sums through a 4-PE x 8-lane array with
// random BN records; every output byte is compared with a reference
// dot-product + fused BN/ReLU computed in the testbench. Checks the two-cycle
// latency from 'last' to out_valid.
module tb_pe_array;
  import qhar_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int P = 4, L = 8;

  logic in_valid, in_first, in_last; logic [L*8-1:0] act; logic [P*L*8-1:0] wgt;
  bn_rec_t bn [P]; logic [P*8-1:0] out_word; logic out_valid;
  pe_array #(.PE_N(P), .LANES(L)) dut (.*);

  function automatic int bnref(longint a, bn_rec_t r);
    longint t, q;
    t = (a + longint'(r.bias)) * longint'(r.mult);
    q = (r.shift == 0) ? t : ((t + (longint'(1) << (r.shift - 1))) >>> r.shift);
    return (q < 0) ? 0 : (q > 255) ? 255 : int'(q);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nz = 0, nmid = 0;
    in_valid = 0; in_first = 0; in_last = 0; act = '0; wgt = '0;
    for (int p = 0; p < P; p++) bn[p] = '0;
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int s = 0; s < 300; s++) begin
      int n; longint sum [P]; bn_rec_t r [P];
      n = 1 + $urandom % 12;
      for (int p = 0; p < P; p++) begin
        sum[p] = 0;
        r[p].bias = 32'($signed($urandom) >>> 16); r[p].mult = 16'($urandom % 4096);
        r[p].shift = 8'(14 + $urandom % 6); r[p].wzp = 8'(100 + $urandom % 56);
      end
      for (int i = 0; i < n; i++) begin
        logic [L*8-1:0] a; logic [P*L*8-1:0] w;
        for (int l = 0; l < L; l++) a[l*8 +: 8] = 8'($urandom);
        for (int k = 0; k < P*L; k++) w[k*8 +: 8] = 8'($urandom);
        for (int p = 0; p < P; p++)
          for (int l = 0; l < L; l++)
            sum[p] += longint'(a[l*8 +: 8]) * (longint'(w[(p*L+l)*8 +: 8]) - longint'(r[p].wzp));
        in_valid <= 1; in_first <= (i == 0); in_last <= (i == n-1); act <= a; wgt <= w;
        for (int p = 0; p < P; p++) bn[p] <= r[p];
        @(posedge clk);
      end
      in_valid <= 0; in_last <= 0;
      // BN inputs change after the last word: the array must have kept its copy
      for (int p = 0; p < P; p++) bn[p] <= '0;
      #1;
      checks++;
      if (out_valid) begin failures++; $display("output one cycle early"); end
      @(posedge clk); #1;
      for (int p = 0; p < P; p++) begin
        int e; e = bnref(sum[p], r[p]);
        if (e == 0) nz++; else if (e < 255) nmid++;
        checks++;
        if (!out_valid || int'(out_word[p*8 +: 8]) != e) begin
          failures++; $display("sum %0d pe %0d: %0d exp %0d (acc %0d)", s, p, out_word[p*8 +: 8], e, sum[p]);
        end
      end
    end
    checks++;
    if (nz == 0 || nmid == 0) begin failures++; $display("ReLU cases not both hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
