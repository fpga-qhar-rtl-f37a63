// tb_fmap_buffer: writes random words with random lane enables into a small
// buffer and checks every read against a reference copy, including the
// one-cycle read latency and that the output holds while read is idle.
module tb_fmap_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int L = 16, D = 64;

  logic we, re; logic [L-1:0] wbe; logic [5:0] waddr, raddr;
  logic [L*8-1:0] wdata, rdata;
  fmap_buffer #(.LANES(L), .DEPTH(D)) dut (.*);

  logic [L*8-1:0] ref_m [D];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re = 0; wbe = '0; waddr = '0; raddr = '0; wdata = '0;
    // fill
    for (int a = 0; a < D; a++) begin
      ref_m[a] = {$urandom, $urandom, $urandom, $urandom};
      we <= 1; wbe <= '1; waddr <= 6'(a); wdata <= ref_m[a];
      @(posedge clk);
    end
    we <= 0;
    for (int i = 0; i < 2000; i++) begin
      logic [5:0] a, r; logic [L-1:0] be; logic [L*8-1:0] d;
      a = 6'($urandom); r = 6'($urandom); be = L'($urandom); d = {$urandom, $urandom, $urandom, $urandom};
      we <= 1; wbe <= be; waddr <= a; wdata <= d; re <= 1; raddr <= r;
      @(posedge clk);
      // read returns the value before this cycle's write
      #1;
      checks++;
      if (rdata !== ref_m[r]) begin failures++; $display("read %0d: %h exp %h", r, rdata, ref_m[r]); end
      for (int l = 0; l < L; l++) if (be[l]) ref_m[a][l*8 +: 8] = d[l*8 +: 8];
      // hold check
      we <= 0; re <= 0;
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_m[r] && !(a == r)) begin failures++; $display("output did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
