// tb_bn_param_buffer: writes BN records lane by lane and checks that a read
// returns all PE lanes of a word with the right fields.
module tb_bn_param_buffer;
  import qhar_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int P = 4, D = 16;

  logic we, re; logic [3:0] waddr, raddr; logic [1:0] wlane;
  bn_rec_t wdata; bn_rec_t rdata [P];
  bn_param_buffer #(.PE_N(P), .DEPTH(D)) dut (.*);

  bn_rec_t ref_m [D][P];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wlane = '0; wdata = '0;
    for (int n = 0; n < D*P; n++) begin
      ref_m[n/P][n%P] = bn_rec_t'({$urandom, $urandom});
      we <= 1; waddr <= 4'(n/P); wlane <= 2'(n%P); wdata <= ref_m[n/P][n%P];
      @(posedge clk);
    end
    we <= 0;
    for (int i = 0; i < 300; i++) begin
      logic [3:0] r; r = 4'($urandom);
      re <= 1; raddr <= r;
      @(posedge clk); re <= 0; #1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (rdata[p] !== ref_m[r][p]) begin failures++; $display("bn %0d/%0d mismatch", r, p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
