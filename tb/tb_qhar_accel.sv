// tb_qhar_accel: end-to-end test of the accelerator at its default sizes
// (32 x 32 frames, 16 x 16 PE/SIMD array, both streams).
//
// The testbench builds a random network (8-bit weights with per-channel zero
// points, BN records scaled from the reference accumulators so that both the
// ReLU floor and the 255 ceiling occur), a random RGB frame and eleven grey
// frames of a moving pattern with a flat region. It computes the expected
// outputs itself: Lucas-Kanade flow for the ten frame pairs, then for each
// stream conv1..conv3 (3x3, zero padding), 2x2 max pool, conv4 (1x1), pool,
// conv5 (1x1), each conv followed by the fused BN/ReLU. It then drives the
// accelerator through the processor's command sequence over a 64-bit stream
// with random input gaps and random output back-pressure:
//   LOAD_WEIGHTS, LOAD_BN, LOAD_RGB, RUN spatial, READ_OFM,
//   LOAD_FRAME 0..10, RUN temporal, READ_OFM
// and compares every output byte. It also checks each RUN's cycle count
// against the loop-nest count and counts the mechanisms the design has:
// input gaps, output stalls, padding taps, masked channel lanes, ReLU floor,
// saturation, pooling windows, singular flow pixels and the stream switch.
module tb_qhar_accel;
  import qhar_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cmd_t cmd; logic cmd_valid, cmd_ready, busy, done; logic [31:0] run_cycles;
  logic [63:0] s_axis_tdata, m_axis_tdata; logic s_axis_tvalid, s_axis_tlast, s_axis_tready;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready;

  qhar_accel dut (.*);

  localparam int H = IMG_H, W = IMG_W, NP = H*W;
  localparam int NFR = FLOW_L + 1;

  // ---------------- network shapes (from the network figure) ----------------
  function automatic int cin_of(int s, int i);
    return (i == 0) ? ((s == 0) ? 3 : 2*FLOW_L) : (i == 1) ? 32 : 64;
  endfunction
  function automatic int cout_of(int i); return (i == 0) ? 32 : 64; endfunction
  function automatic int k_of(int i);    return (i < 3) ? 3 : 1;    endfunction
  function automatic int ct_of(int c);   return (c + SIMD - 1) / SIMD; endfunction

  // weights: wt[s][i][((o*k + ky)*k + kx)*CTS + c], CTS = ct*SIMD (padded lanes included)
  byte unsigned wt [2][5][];
  bn_rec_t      bnr [2][5][];
  byte unsigned rgb [NP*SIMD];          // one SIMD word per pixel, lanes >= 3 junk
  byte unsigned frames [NFR][NP];
  byte unsigned expo [2][];             // expected final OFM per stream (word layout)
  longint       exp_cycles [2];

  // mechanism counters
  int n_gap = 0, n_stall = 0, n_pad = 0, n_mask = 0, n_relu0 = 0, n_sat = 0, n_pool = 0;
  int n_sing = 0, n_switch = 0;

  // ---------------- reference model ----------------
  function automatic int px(int f, int y, int x);
    if (y < 0) y = 0; if (y > H-1) y = H-1;
    if (x < 0) x = 0; if (x > W-1) x = W-1;
    return int'(frames[f][y*W + x]);
  endfunction

  function automatic int flow_code(longint num, longint det);
    longint v;
    v = (num * 16) / det;
    return (v < -128) ? 0 : (v > 127) ? 255 : int'(128 + v);
  endfunction

  // flow of pair (f0 -> f1) into channels 2k, 2k+1 of fm (C channels per pixel)
  task automatic lk_ref(int k, ref int fm[], input int C);
    for (int p = 0; p < NP; p++) begin
      longint a, b, c, e, g, det;
      a = 0; b = 0; c = 0; e = 0; g = 0;
      for (int wy = -1; wy <= 1; wy++)
        for (int wx = -1; wx <= 1; wx++) begin
          int y, x, ix, iy, it;
          y = p / W + wy; x = p % W + wx;
          if (y < 0) y = 0; if (y > H-1) y = H-1;
          if (x < 0) x = 0; if (x > W-1) x = W-1;
          ix = (px(k, y, x+1) - px(k, y, x-1)) >>> 1;
          iy = (px(k, y+1, x) - px(k, y-1, x)) >>> 1;
          it = px(k+1, y, x) - px(k, y, x);
          a += ix*ix; b += ix*iy; c += iy*iy; e += ix*it; g += iy*it;
        end
      det = a*c - b*b;
      if (det < 1) begin
        fm[p*C + 2*k] = 128; fm[p*C + 2*k + 1] = 128;
      end else begin
        fm[p*C + 2*k]     = flow_code(b*g - c*e, det);
        fm[p*C + 2*k + 1] = flow_code(b*e - a*g, det);
      end
    end
  endtask

  function automatic int bn_apply(longint acc, bn_rec_t r);
    longint t, q;
    t = (acc + longint'(r.bias)) * longint'(r.mult);
    q = (r.shift == 0) ? t : ((t + (longint'(1) << (r.shift - 1))) >>> r.shift);
    return (q < 0) ? 0 : (q > 255) ? 255 : int'(q);
  endfunction

  // conv layer i of stream s on fm (hh x ww x cin), picking BN records from
  // the accumulators; result in out (hh x ww x cout)
  task automatic conv_ref(int s, int i, int hh, int ww, ref int fm[], ref int out[]);
    int cin, cout, k, pad, cts;
    longint acc [];
    cin = cin_of(s, i); cout = cout_of(i); k = k_of(i); pad = k / 2; cts = ct_of(cin) * SIMD;
    acc = new[hh*ww*cout];
    out = new[hh*ww*cout];
    for (int o = 0; o < cout; o++) begin
      longint mx;
      for (int y = 0; y < hh; y++)
        for (int x = 0; x < ww; x++) begin
          longint sum;
          sum = 0;
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++) begin
              int iy, ix;
              iy = y + ky - pad; ix = x + kx - pad;
              if (iy < 0 || iy >= hh || ix < 0 || ix >= ww) continue;
              for (int c = 0; c < cin; c++)
                sum += longint'(fm[(iy*ww + ix)*cin + c]) *
                       (longint'(wt[s][i][((o*k + ky)*k + kx)*cts + c]) - longint'(bnr[s][i][o].wzp));
            end
          acc[(y*ww + x)*cout + o] = sum;
        end
      // scale: the largest magnitude maps to about 1.3 x 255, bias shifts some below zero
      mx = 1;
      for (int p = 0; p < hh*ww; p++) begin
        longint v; v = acc[p*cout + o]; if (v < 0) v = -v; if (v > mx) mx = v;
      end
      begin
        bn_rec_t r; int sh; longint m;
        r = bnr[s][i][o];
        m = 64 + $urandom % 64;
        sh = 0;
        while (((mx * m) >> sh) > 330) sh++;
        r.mult = 16'(m); r.shift = 8'(sh);
        r.bias = 32'(longint'($urandom % 32'(mx/2 + 1)) - mx/4);
        bnr[s][i][o] = r;
      end
      for (int p = 0; p < hh*ww; p++) out[p*cout + o] = bn_apply(acc[p*cout + o], bnr[s][i][o]);
    end
  endtask

  task automatic pool_ref(int hh, int ww, int C, ref int fm[], ref int out[]);
    out = new[(hh/2)*(ww/2)*C];
    for (int y = 0; y < hh/2; y++)
      for (int x = 0; x < ww/2; x++)
        for (int c = 0; c < C; c++) begin
          int m; m = 0;
          for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
            if (fm[((2*y+dy)*ww + 2*x+dx)*C + c] > m) m = fm[((2*y+dy)*ww + 2*x+dx)*C + c];
          out[(y*(ww/2) + x)*C + c] = m;
        end
  endtask

  task automatic stream_ref(int s, ref int fm[]);
    int a[], b[]; int hh; longint cyc;
    hh = H; cyc = 0;
    a = fm;
    for (int i = 0; i < 5; i++) begin
      conv_ref(s, i, hh, hh, a, b);
      cyc += longint'(hh) * hh * (cout_of(i) / PE) * k_of(i) * k_of(i) * ct_of(cin_of(s, i));
      a = b;
      if (i == 2 || i == 3) begin
        pool_ref(hh, hh, 64, a, b);
        cyc += longint'(hh/2) * (hh/2) * ct_of(64) * 4;
        a = b; hh = hh / 2;
      end
    end
    exp_cycles[s] = cyc;
    // final OFM in word layout: pixel-major, SIMD channels per word
    expo[s] = new[hh*hh*64];
    for (int p = 0; p < hh*hh*64; p++) expo[s][p] = byte'(a[p]);
  endtask

  // ---------------- stream driving ----------------
  task automatic issue(op_e op, int arg);
    @(negedge clk); cmd.op = op; cmd.arg = 16'(arg); cmd_valid = 1;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  task automatic beat(logic [63:0] d, bit last);
    @(negedge clk);
    while ($urandom % 5 == 0) begin n_gap++; @(negedge clk); end
    s_axis_tdata = d; s_axis_tvalid = 1; s_axis_tlast = last;
    #1; while (!s_axis_tready) begin @(negedge clk); #1; end
    @(posedge clk); #1 s_axis_tvalid = 0; s_axis_tlast = 0;
  endtask

  task automatic word128(logic [127:0] w, bit last);
    beat(w[63:0], 0); beat(w[127:64], last);
  endtask

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;
  task automatic wait_done(int n0);
    while (n_done == n0) @(negedge clk);
  endtask

  // output collector with random back-pressure
  byte unsigned got [$];
  int got_last = 0;
  always @(negedge clk) begin
    m_axis_tready = ($urandom % 3) != 0;
    if (m_axis_tvalid && !m_axis_tready) n_stall++;
    if (m_axis_tvalid && m_axis_tready) begin
      for (int i = 0; i < 8; i++) got.push_back(m_axis_tdata[i*8 +: 8]);
      if (m_axis_tlast) got_last++;
    end
  end

  // mechanism monitors inside the design
  always @(posedge clk) if (rst_n) begin
    if (dut.d_valid && !dut.d_pool && dut.d_zero) n_pad++;
    if (dut.d_valid && !dut.d_pool && dut.d_mask != '1) n_mask++;
    if (dut.pool_valid) n_pool++;
    if (dut.conv_valid)
      for (int p = 0; p < PE; p++) begin
        if (dut.conv_word[p*8 +: 8] == 8'd0) n_relu0++;
        if (dut.conv_word[p*8 +: 8] == 8'd255) n_sat++;
      end
    if (dut.flow_valid && dut.flow_singular) n_sing++;
  end

  task automatic read_and_compare(int s);
    int n0;
    got.delete(); got_last = 0;
    n0 = n_done;
    issue(OP_READ_OFM, 0);
    wait_done(n0);
    repeat (10) @(negedge clk);
    checks++;
    if (got.size() != expo[s].size() || got_last != 1) begin
      failures++; $display("stream %0d: %0d bytes out (exp %0d), %0d tlast", s, got.size(), expo[s].size(), got_last);
    end
    for (int i = 0; i < expo[s].size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != expo[s][i]) begin
        failures++;
        if (failures < 20) $display("stream %0d byte %0d (pix %0d ch %0d): %0d exp %0d", s, i, i/64, i%64, got[i], expo[s][i]);
      end
    end
  endtask

  task automatic check_cycles(int s);
    checks++;
    if (longint'(run_cycles) < exp_cycles[s] || longint'(run_cycles) > exp_cycles[s] + 7*8) begin
      failures++; $display("stream %0d: run took %0d cycles, loop nest %0d", s, run_cycles, exp_cycles[s]);
    end
    $display("stream %0d: %0d cycles (loop nest %0d)", s, run_cycles, exp_cycles[s]);
  endtask

  initial begin
    #(64'd200_000_000);   // 20 M cycles
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int fm_s[], fm_t[];
    cmd = '0; cmd_valid = 0; s_axis_tdata = '0; s_axis_tvalid = 0; s_axis_tlast = 0;

    // ---- random network and inputs ----
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 5; i++) begin
        int n; n = cout_of(i) * k_of(i) * k_of(i) * ct_of(cin_of(s, i)) * SIMD;
        wt[s][i] = new[n];
        for (int j = 0; j < n; j++) wt[s][i][j] = byte'($urandom);
        bnr[s][i] = new[cout_of(i)];
        for (int o = 0; o < cout_of(i); o++) begin
          bnr[s][i][o] = '0; bnr[s][i][o].wzp = 8'(100 + $urandom % 56);
        end
      end
    for (int p = 0; p < NP*SIMD; p++) rgb[p] = byte'($urandom);
    for (int f = 0; f < NFR; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          int v;
          v = 128 + 60 * ((((x + f) / 4) + (y / 5)) % 2) + 3 * ((x + f) % 4) + y + 2 * f + ($urandom % 5);
          if (x < 6 && y < 6) v = 50;                 // flat corner: no gradient
          frames[f][y*W + x] = byte'(v);
        end

    // ---- reference ----
    fm_s = new[NP*3];
    for (int p = 0; p < NP; p++) for (int c = 0; c < 3; c++) fm_s[p*3 + c] = int'(rgb[p*SIMD + c]);
    stream_ref(0, fm_s);
    fm_t = new[NP*2*FLOW_L];
    for (int k = 0; k < FLOW_L; k++) lk_ref(k, fm_t, 2*FLOW_L);
    stream_ref(1, fm_t);
    $display("reference model ready");

    repeat (3) @(posedge clk); rst_n = 1;

    // ---- weights: rows in buffer order (stream, conv, ot, ky, kx, ct; row p) ----
    begin
      int n0, rows; n0 = n_done; rows = 0;
      for (int s = 0; s < 2; s++) for (int i = 0; i < 5; i++) rows += cout_of(i) * k_of(i) * k_of(i) * ct_of(cin_of(s, i));
      issue(OP_LOAD_WEIGHTS, rows);
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < 5; i++) begin
          int k, ctn; k = k_of(i); ctn = ct_of(cin_of(s, i));
          for (int ot = 0; ot < cout_of(i) / PE; ot++)
            for (int ky = 0; ky < k; ky++) for (int kx = 0; kx < k; kx++)
              for (int ct = 0; ct < ctn; ct++)
                for (int p = 0; p < PE; p++) begin
                  logic [127:0] w; int o; o = ot*PE + p;
                  for (int l = 0; l < SIMD; l++) w[l*8 +: 8] = wt[s][i][((o*k + ky)*k + kx)*ctn*SIMD + ct*SIMD + l];
                  word128(w, 0);
                end
        end
      wait_done(n0);
    end
    // ---- BN records in buffer order (stream, conv, ot; lane p) ----
    begin
      int n0; n0 = n_done;
      issue(OP_LOAD_BN, 2 * (2 + 4*4) * PE);
      for (int s = 0; s < 2; s++) for (int i = 0; i < 5; i++)
        for (int o = 0; o < cout_of(i); o++) beat(64'(bnr[s][i][o]), 0);
      wait_done(n0);
    end
    $display("weights loaded");

    // ---- spatial stream ----
    begin
      int n0; n0 = n_done;
      issue(OP_LOAD_RGB, 0);
      for (int p = 0; p < NP; p++) begin
        logic [127:0] w;
        for (int l = 0; l < SIMD; l++) w[l*8 +: 8] = rgb[p*SIMD + l];
        word128(w, p == NP - 1);
      end
      wait_done(n0);
      n0 = n_done; issue(OP_RUN, 0); wait_done(n0);
      n_switch++;
      check_cycles(0);
      read_and_compare(0);
    end
    $display("spatial stream checked");

    // ---- temporal stream: frames, flow, run ----
    for (int f = 0; f < NFR; f++) begin
      int n0; n0 = n_done;
      issue(OP_LOAD_FRAME, f);
      for (int a = 0; a < NP/8; a++) begin
        logic [63:0] d;
        for (int i = 0; i < 8; i++) d[i*8 +: 8] = frames[f][a*8 + i];
        beat(d, a == NP/8 - 1);
      end
      wait_done(n0);
    end
    begin
      int n0; n0 = n_done; issue(OP_RUN, 1); wait_done(n0);
      n_switch++;
      check_cycles(1);
      read_and_compare(1);
    end

    $display("mechanisms: gaps %0d stalls %0d pad %0d mask %0d relu0 %0d sat %0d pool %0d singular %0d streams %0d",
             n_gap, n_stall, n_pad, n_mask, n_relu0, n_sat, n_pool, n_sing, n_switch);
    checks++; if (n_gap == 0)    begin failures++; $display("no input gaps"); end
    checks++; if (n_stall == 0)  begin failures++; $display("no output stalls"); end
    checks++; if (n_pad == 0)    begin failures++; $display("no padding taps"); end
    checks++; if (n_mask == 0)   begin failures++; $display("no masked lanes"); end
    checks++; if (n_relu0 == 0)  begin failures++; $display("ReLU floor never hit"); end
    checks++; if (n_sat == 0)    begin failures++; $display("saturation never hit"); end
    checks++; if (n_pool == 0)   begin failures++; $display("no pooling"); end
    checks++; if (n_sing == 0)   begin failures++; $display("no singular flow pixels"); end
    checks++; if (n_switch != 2) begin failures++; $display("stream switch missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
