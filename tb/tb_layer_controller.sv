// tb_layer_controller: runs a 3x3 conv, a 1x1 conv and a 2x2 pool descriptor
// on small maps and compares every issued read (IFM, weight and BN
// addresses, padding flag, first/last, channel mask) with a reference loop
// nest written here, echoes results back with the PE array's latency, and
// checks the write addresses, the result count and the cycle count
// (one issue per cycle, no stalls).
module tb_layer_controller;
  import qhar_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int L = 16, P = 16, FD = 1024, WD = 512, BD = 32;

  logic start, busy, done, rd_en, d_valid, d_first, d_last, d_zero, d_pool, res_valid, wr_en;
  layer_t desc;
  logic [9:0] f_raddr, wr_addr; logic [8:0] w_raddr; logic [4:0] bn_raddr; logic [L-1:0] d_mask;
  layer_controller #(.LANES(L), .PE_N(P), .FDEP(FD), .WDEP(WD), .BDEP(BD)) dut (.*);

  typedef struct { int f; int w; int b; bit zero; bit first; bit last; logic [L-1:0] mask; } rd_t;
  rd_t exp_q[$];
  int n_pad = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // results come back 2 cycles after d_last (conv) / 1 cycle (pool)
  logic [2:0] pipe;
  always_ff @(posedge clk) begin
    if (!rst_n) pipe <= '0;
    else pipe <= {pipe[1:0], d_valid && d_last};
  end
  assign res_valid = d_pool ? pipe[0] : pipe[1];

  task automatic build(layer_t d);
    int ct_n, ot_n, pad;
    ct_n = (int'(d.in_ch) + L - 1) / L;
    if (d.kind == L_CONV) begin
      ot_n = (int'(d.out_ch) + P - 1) / P; pad = int'(d.k) / 2;
      for (int oy = 0; oy < d.h; oy++) for (int ox = 0; ox < d.w; ox++)
        for (int ot = 0; ot < ot_n; ot++) for (int ky = 0; ky < d.k; ky++)
          for (int kx = 0; kx < d.k; kx++) for (int ct = 0; ct < ct_n; ct++) begin
            rd_t r; int iy, ix;
            iy = oy + ky - pad; ix = ox + kx - pad;
            r.zero = !(iy >= 0 && iy < d.h && ix >= 0 && ix < d.w);
            r.f = (iy * d.w + ix) * ct_n + ct;
            r.w = d.wbase + ((ot * d.k + ky) * d.k + kx) * ct_n + ct;
            r.b = d.bnbase + ot;
            r.first = (ky == 0 && kx == 0 && ct == 0);
            r.last = (ky == d.k-1 && kx == d.k-1 && ct == ct_n-1);
            for (int l = 0; l < L; l++) r.mask[l] = (ct*L + l) < d.in_ch;
            exp_q.push_back(r);
          end
    end else begin
      for (int oy = 0; oy < d.h/d.stride; oy++) for (int ox = 0; ox < d.w/d.stride; ox++)
        for (int ct = 0; ct < ct_n; ct++) for (int ky = 0; ky < d.k; ky++)
          for (int kx = 0; kx < d.k; kx++) begin
            rd_t r;
            r.zero = 0;
            r.f = ((oy*d.stride + ky) * d.w + ox*d.stride + kx) * ct_n + ct;
            r.w = 0; r.b = 0;
            r.first = (ky == 0 && kx == 0); r.last = (ky == d.k-1 && kx == d.k-1);
            for (int l = 0; l < L; l++) r.mask[l] = (ct*L + l) < d.in_ch;
            exp_q.push_back(r);
          end
    end
  endtask

  task automatic run(layer_t d, int n_res);
    int issues, cyc, wcount; rd_t cur; bit have;
    build(d);
    issues = exp_q.size(); cyc = 0; wcount = 0; have = 0;
    @(negedge clk); desc = d; start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 20000) begin
      // side-band of the previous cycle's read
      if (have) begin
        checks++;
        if (!d_valid || d_zero !== cur.zero || d_first !== cur.first || d_last !== cur.last ||
            (d.kind == L_CONV && d_mask !== cur.mask)) begin
          failures++; $display("sideband: v%b z%b/%b f%b/%b l%b/%b m%h/%h", d_valid, d_zero, cur.zero,
                               d_first, cur.first, d_last, cur.last, d_mask, cur.mask);
        end
        if (cur.zero) n_pad++;
        have = 0;
      end
      if (rd_en) begin
        cur = exp_q.pop_front(); have = 1;
        checks++;
        if ((!cur.zero && int'(f_raddr) != cur.f) ||
            (d.kind == L_CONV && (int'(w_raddr) != cur.w || int'(bn_raddr) != cur.b))) begin
          failures++; $display("read: f %0d/%0d w %0d/%0d b %0d/%0d", f_raddr, cur.f, w_raddr, cur.w, bn_raddr, cur.b);
        end
      end
      if (wr_en) begin
        checks++;
        if (int'(wr_addr) != wcount) begin failures++; $display("wr_addr %0d exp %0d", wr_addr, wcount); end
        wcount++;
      end
      @(negedge clk); cyc++;
    end
    if (wr_en) wcount++;
    checks++;
    if (wcount != n_res || exp_q.size() != 0) begin
      failures++; $display("results %0d exp %0d, reads left %0d", wcount, n_res, exp_q.size());
    end
    checks++;
    if (cyc > issues + 4) begin failures++; $display("layer took %0d cycles for %0d reads", cyc, issues); end
    $display("layer: %0d reads in %0d cycles", issues, cyc);
  endtask

  initial begin
    layer_t d;
    start = 0; desc = '0;
    repeat (2) @(posedge clk); rst_n <= 1;
    d = '0; d.kind = L_CONV; d.in_ch = 20; d.out_ch = 32; d.k = 3; d.stride = 1; d.h = 5; d.w = 4;
    d.wbase = 7; d.bnbase = 3;
    run(d, 5*4*2);
    d = '0; d.kind = L_CONV; d.in_ch = 64; d.out_ch = 64; d.k = 1; d.stride = 1; d.h = 4; d.w = 4;
    d.wbase = 100; d.bnbase = 9;
    run(d, 4*4*4);
    d = '0; d.kind = L_POOL; d.in_ch = 64; d.out_ch = 64; d.k = 2; d.stride = 2; d.h = 4; d.w = 6;
    run(d, 2*3*4);
    checks++;
    if (n_pad == 0) begin failures++; $display("no padding taps seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
