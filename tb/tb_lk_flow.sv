// tb_lk_flow: loads pairs of 8x8 grey frames (random, shifted copies and a
// flat frame that makes the system singular) and compares every pixel's
// flow code with a reference Lucas-Kanade solve written here from the
// equations (least squares over a 3x3 window, 4 fractional bits, offset 128,
// rounding toward zero, det < 1 gives 128). Also checks the per-pair cycle
// budget (WIN*WIN + 52 cycles per pixel at most).
module tb_lk_flow;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int H = 8, W = 8, WIN = 3, FRAC = 4;

  logic frm_we, frm_bank; logic [2:0] frm_addr; logic [63:0] frm_data;
  logic start, cur_bank, busy, done, flow_valid, flow_singular;
  logic [5:0] flow_pix; logic [7:0] flow_dx, flow_dy;
  lk_flow #(.H(H), .W(W), .WIN(WIN), .FRAC(FRAC), .DET_MIN(1)) dut (.*);

  byte unsigned f [2][H*W];
  int n_sing = 0, n_move = 0;

  function automatic int px(int b, int y, int x);
    if (y < 0) y = 0; if (y > H-1) y = H-1;
    if (x < 0) x = 0; if (x > W-1) x = W-1;
    return int'(f[b][y*W + x]);
  endfunction

  function automatic int code(longint num, longint det);
    longint v;
    v = (num * (1 << FRAC)) / det;
    if (v < -128) return 0;
    if (v > 127) return 255;
    return int'(128 + v);
  endfunction

  task automatic ref_flow(int pb, int cb, int p, output int dx, output int dy, output bit sing);
    longint a, b, c, e, g, det;
    a = 0; b = 0; c = 0; e = 0; g = 0;
    for (int wy = -1; wy <= 1; wy++)
      for (int wx = -1; wx <= 1; wx++) begin
        int y, x, ix, iy, it;
        y = p / W + wy; x = p % W + wx;
        if (y < 0) y = 0; if (y > H-1) y = H-1;
        if (x < 0) x = 0; if (x > W-1) x = W-1;
        ix = (px(pb, y, x+1) - px(pb, y, x-1)) >>> 1;
        iy = (px(pb, y+1, x) - px(pb, y-1, x)) >>> 1;
        it = px(cb, y, x) - px(pb, y, x);
        a += ix*ix; b += ix*iy; c += iy*iy; e += ix*it; g += iy*it;
      end
    det = a*c - b*b;
    sing = (det < 1);
    if (sing) begin dx = 128; dy = 128; end
    else begin dx = code(b*g - c*e, det); dy = code(b*e - a*g, det); end
  endtask

  task automatic load(int bank);
    for (int a = 0; a < H*W/8; a++) begin
      logic [63:0] d;
      for (int i = 0; i < 8; i++) d[i*8 +: 8] = f[bank][a*8 + i];
      frm_we <= 1; frm_bank <= bank[0]; frm_addr <= 3'(a); frm_data <= d;
      @(posedge clk);
    end
    frm_we <= 0;
  endtask

  task automatic run_pair(int cb);
    int got, t0, cyc;
    got = 0;
    start <= 1; cur_bank <= cb[0];
    @(posedge clk); start <= 0; t0 = 0; cyc = 0;
    while (1) begin
      @(posedge clk); #1; cyc++;
      if (flow_valid) begin
        int dx, dy; bit sg;
        ref_flow(1 - cb, cb, int'(flow_pix), dx, dy, sg);
        checks++;
        if (int'(flow_pix) != got) begin failures++; $display("pixel order %0d exp %0d", flow_pix, got); end
        checks++;
        if (int'(flow_dx) != dx || int'(flow_dy) != dy || flow_singular != sg) begin
          failures++; $display("pix %0d: (%0d,%0d,%b) exp (%0d,%0d,%b)", flow_pix, flow_dx, flow_dy, flow_singular, dx, dy, sg);
        end
        if (sg) n_sing++;
        if (dx != 128 || dy != 128) n_move++;
        got++;
      end
      if (done) break;
      if (cyc > H*W*(WIN*WIN + 60)) break;
    end
    checks++;
    if (got != H*W) begin failures++; $display("%0d flow outputs, exp %0d", got, H*W); end
    checks++;
    if (cyc > H*W*(WIN*WIN + 52)) begin failures++; $display("pair took %0d cycles", cyc); end
    $display("pair done in %0d cycles (%0d per pixel)", cyc, cyc / (H*W));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    frm_we = 0; frm_bank = 0; frm_addr = '0; frm_data = '0; start = 0; cur_bank = 0;
    repeat (2) @(posedge clk); rst_n <= 1;
    // 1. random pair
    for (int i = 0; i < H*W; i++) begin f[0][i] = byte'($urandom); f[1][i] = byte'($urandom); end
    load(0); load(1); run_pair(1);
    // 2. smooth pattern moved right by one pixel, then bank roles swapped
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        f[1][y*W+x] = byte'(16*x + 9*y + ((x*y) % 7));
        f[0][y*W+x] = byte'(16*(x-1) + 9*y + (((x-1)*y) % 7) + 20);
      end
    load(0); load(1); run_pair(0); run_pair(1);
    // 3. flat frame: no gradient anywhere, singular everywhere
    for (int i = 0; i < H*W; i++) begin f[0][i] = 8'd77; f[1][i] = 8'd90; end
    load(0); load(1); run_pair(1);
    checks++;
    if (n_sing == 0 || n_move == 0) begin failures++; $display("singular %0d moving %0d", n_sing, n_move); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
