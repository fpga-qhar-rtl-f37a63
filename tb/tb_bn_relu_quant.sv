// tb_bn_relu_quant: random accumulators and BN records (plus edge cases that
// hit the ReLU floor and the 255 ceiling) against a reference computed with
// real arithmetic: y = clamp(floor(((acc+bias)*mult)/2^shift + 0.5), 0, 255).
module tb_bn_relu_quant;
  import qhar_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid; logic signed [31:0] acc; bn_rec_t rec; logic [7:0] y; logic y_valid;
  bn_relu_quant #(.ACCW(32)) dut (.*);

  int n_neg = 0, n_sat = 0;

  function automatic int ref_y(longint a, bn_rec_t r);
    real t; longint q;
    t = real'(a + longint'(r.bias)) * real'(r.mult);
    if (r.shift != 0) t = t / (2.0 ** r.shift);
    q = longint'($floor(t + ((r.shift != 0) ? 0.5 : 0.0)));
    if (q < 0) return 0;
    if (q > 255) return 255;
    return int'(q);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; acc = '0; rec = '0;
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int i = 0; i < 3000; i++) begin
      bn_rec_t r; logic signed [31:0] a; int e;
      a = 32'($signed($urandom) >>> ($urandom % 24));
      r.bias  = 32'($signed($urandom) >>> (8 + $urandom % 20));
      r.mult  = 16'($urandom);
      r.shift = 8'($urandom % 32);
      r.wzp   = 8'($urandom);
      e = ref_y(longint'(a), r);
      in_valid <= 1; acc <= a; rec <= r;
      @(posedge clk); in_valid <= 0; #1;
      checks++;
      if (!y_valid || int'(y) != e) begin
        failures++; $display("acc %0d bias %0d mult %0d sh %0d: y %0d exp %0d", a, r.bias, r.mult, r.shift, y, e);
      end
      if (e == 0) n_neg++;
      if (e == 255) n_sat++;
    end
    checks++;
    if (n_neg == 0 || n_sat == 0) begin failures++; $display("floor %0d / ceiling %0d not hit", n_neg, n_sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
