// tb_weight_buffer: loads weight rows one bank at a time, as the loader does,
// and checks that one read returns every PE row of a word in parallel.
module tb_weight_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int P = 4, RW = 32, D = 32;

  logic we, re; logic [4:0] waddr, raddr; logic [1:0] wrow;
  logic [RW-1:0] wdata; logic [P*RW-1:0] rdata;
  weight_buffer #(.PE_N(P), .ROW_W(RW), .DEPTH(D)) dut (.*);

  logic [RW-1:0] ref_m [D][P];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wrow = '0; wdata = '0;
    for (int n = 0; n < D*P; n++) begin
      ref_m[n/P][n%P] = $urandom;
      we <= 1; waddr <= 5'(n/P); wrow <= 2'(n%P); wdata <= ref_m[n/P][n%P];
      @(posedge clk);
    end
    we <= 0;
    for (int i = 0; i < 500; i++) begin
      logic [4:0] r; r = 5'($urandom);
      // overwrite one random row meanwhile
      if (i % 3 == 0) begin
        logic [4:0] a; logic [1:0] p; logic [RW-1:0] d;
        a = 5'($urandom); p = 2'($urandom); d = $urandom;
        we <= 1; waddr <= a; wrow <= p; wdata <= d;
        @(posedge clk); we <= 0; ref_m[a][p] = d;
      end
      re <= 1; raddr <= r;
      @(posedge clk); re <= 0; #1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (rdata[p*RW +: RW] !== ref_m[r][p]) begin
          failures++; $display("word %0d row %0d: %h exp %h", r, p, rdata[p*RW +: RW], ref_m[r][p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
