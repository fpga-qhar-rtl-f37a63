// tb_qhar_ctrl: issues every command to the scheduler with small models of
// the units around it, and checks: where each loaded beat/word is written
// (weight row/word, BN lane/word, buffer A address, frame bank/address), the
// flow start and pair index, the seven layer descriptors of each stream in
// order with the A/B ping-pong, the read-out address sequence with tlast on
// the final word under back-pressure, the done pulses and run_cycles.
module tb_qhar_ctrl;
  import qhar_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int L = SIMD, P = PE, FD = FMAP_DEPTH, WD = WEIGHT_DEPTH, BD = BN_DEPTH, NP = IMG_H*IMG_W;

  cmd_t cmd; logic cmd_valid, cmd_ready, busy, done; logic [31:0] run_cycles;
  logic route_up, raw_valid, raw_ready, up_valid, up_ready;
  logic [63:0] raw_data; logic [L*8-1:0] up_data;
  logic w_we, bn_we, fa_we, frm_we, frm_bank, lk_start, lk_cur_bank, lk_phase, lk_done;
  logic [$clog2(WD)-1:0] w_waddr; logic [$clog2(P)-1:0] w_wrow, bn_wlane; logic [L*8-1:0] w_wdata, fa_wdata;
  logic [$clog2(BD)-1:0] bn_waddr; bn_rec_t bn_wdata; logic [$clog2(FD)-1:0] fa_waddr, rb_addr;
  logic [$clog2(NP/8)-1:0] frm_addr; logic [63:0] frm_data; logic [7:0] flow_pair;
  logic lc_start, layer_phase, src_is_b, lc_done, read_phase, rb_en, o_valid, o_last, o_ready;
  layer_t lc_desc; logic [L*8-1:0] rb_data, o_data;

  qhar_ctrl dut (.*);

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic issue(op_e op, int arg);
    @(negedge clk); cmd.op = op; cmd.arg = 16'(arg); cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic wait_done();
    int n0 = n_done;
    while (n_done == n0) @(negedge clk);
  endtask

  // model of the buffer B read port: data = address pattern, 1-cycle latency
  always_ff @(posedge clk) if (rb_en) rb_data <= {8{16'(rb_addr) ^ 16'h5a00}};

  // model units: LK done 20 cycles after start, layer done 30 cycles after start
  int lk_t = -1, lc_t = -1;
  always_ff @(posedge clk) begin
    lk_done <= 0; lc_done <= 0;
    if (lk_start) lk_t <= 20; else if (lk_t > 0) lk_t <= lk_t - 1;
    if (lk_t == 1) lk_done <= 1;
    if (lc_start) lc_t <= 30; else if (lc_t > 0) lc_t <= lc_t - 1;
    if (lc_t == 1) lc_done <= 1;
  end

  initial begin
    cmd = '0; cmd_valid = 0; raw_valid = 0; raw_data = '0; up_valid = 0; up_data = '0; o_ready = 0;
    repeat (2) @(posedge clk); rst_n <= 1;

    // ---- weights: 40 rows ----
    issue(OP_LOAD_WEIGHTS, 40);
    for (int n = 0; n < 40; n++) begin
      @(negedge clk); up_valid = 1; up_data = {4{32'(n)}}; #1;
      checks++;
      if (!route_up || !up_ready || !w_we || int'(w_waddr) != n / P || int'(w_wrow) != n % P || w_wdata !== up_data) begin
        failures++; $display("weight row %0d: we %b addr %0d row %0d", n, w_we, w_waddr, w_wrow);
      end
    end
    @(negedge clk); up_valid = 0; wait_done();

    // ---- BN: 20 records ----
    issue(OP_LOAD_BN, 20);
    for (int n = 0; n < 20; n++) begin
      @(negedge clk); raw_valid = ($urandom % 3) != 0; raw_data = {32'(n), 32'hbeef}; #1;
      if (!raw_valid) begin n--; continue; end
      checks++;
      if (route_up || !raw_ready || !bn_we || int'(bn_waddr) != n / P || int'(bn_wlane) != n % P || bn_wdata !== bn_rec_t'(raw_data)) begin
        failures++; $display("bn %0d: we %b addr %0d lane %0d", n, bn_we, bn_waddr, bn_wlane);
      end
    end
    @(negedge clk); raw_valid = 0; wait_done();

    // ---- RGB frame ----
    issue(OP_LOAD_RGB, 0);
    for (int n = 0; n < NP; n++) begin
      @(negedge clk); up_valid = 1; up_data = {4{32'(n * 3)}}; #1;
      checks++;
      if (!fa_we || int'(fa_waddr) != n || fa_wdata !== up_data) begin
        failures++; $display("rgb %0d: we %b addr %0d", n, fa_we, fa_waddr);
      end
    end
    @(negedge clk); up_valid = 0; wait_done();

    // ---- grey frames 0 and 1: the second starts the flow of pair 0 ----
    for (int k = 0; k < 3; k++) begin
      bit started;
      started = 0;
      issue(OP_LOAD_FRAME, k);
      for (int n = 0; n < NP/8; n++) begin
        @(negedge clk); raw_valid = 1; raw_data = {32'(k), 32'(n)}; #1;
        checks++;
        if (!frm_we || frm_bank != k[0] || int'(frm_addr) != n || frm_data !== raw_data) begin
          failures++; $display("frame %0d beat %0d: bank %b addr %0d", k, n, frm_bank, frm_addr);
        end
      end
      @(negedge clk); raw_valid = 0;
      while (!done) begin
        if (lk_start) begin
          started = 1;
          checks++;
          if (lk_cur_bank != k[0] || int'(flow_pair) != k - 1) begin
            failures++; $display("flow start: bank %b pair %0d", lk_cur_bank, flow_pair);
          end
        end
        @(negedge clk);
      end
      checks++;
      if (started != (k > 0)) begin failures++; $display("frame %0d: flow started %b", k, started); end
    end

    // ---- runs of both streams ----
    for (int s = 0; s < 2; s++) begin
      int j;
      j = 0;
      issue(OP_RUN, s);
      while (!done) begin
        if (lc_start) begin
          layer_t e; e = layer_desc(stream_e'(s), j);
          checks++;
          if (lc_desc !== e || src_is_b != j[0] || !layer_phase) begin
            failures++; $display("stream %0d layer %0d: descriptor/buffer mismatch", s, j);
          end
          j++;
        end
        @(negedge clk);
      end
      checks++;
      if (j != NUM_LAYERS) begin failures++; $display("stream %0d ran %0d layers", s, j); end
      checks++;
      if (run_cycles < 32'(NUM_LAYERS * 31) || run_cycles > 32'(NUM_LAYERS * 34)) begin
        failures++; $display("run_cycles %0d", run_cycles);
      end
    end

    // ---- read-out with back-pressure ----
    begin
      int n = 0; int words = (IMG_H/4)*(IMG_W/4)*4; bit lastseen = 0;
      issue(OP_READ_OFM, 0);
      while (!done) begin
        o_ready = ($urandom % 2) == 0;
        #1;
        if (o_valid && o_ready) begin
          checks++;
          if (o_data !== {8{16'(n) ^ 16'h5a00}} || o_last != (n == words - 1)) begin
            failures++; $display("read word %0d: %h last %b", n, o_data, o_last);
          end
          if (o_last) lastseen = 1;
          n++;
        end
        @(negedge clk);
      end
      checks++;
      if (n != words || !lastseen) begin failures++; $display("read %0d words, last %b", n, lastseen); end
    end
    checks++;
    @(posedge clk); #1;
    if (n_done != 9) begin failures++; $display("%0d done pulses", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
