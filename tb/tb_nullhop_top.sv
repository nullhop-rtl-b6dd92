// tb_nullhop_top: end-to-end test of the accelerator at its default sizes
// (128 MACs, 8 controllers, 512 KB pixel memory, 4.5 KB kernel banks).
//
// Runs a sequence of small layers that between them use every mechanism:
// zero padding, 1x1 / 3x3 / 5x5 / 7x7 kernels, 1, 2, 4 and 8 clusters (with
// partial-sum reduction in the PRE), ReLU on and off, pooling on and off
// (with an odd output width that pooling must drop), compressed and raw
// output, back-pressure on the output bus, gaps on the input bus, write/read
// conflicts in the pixel memory and decoding that overlaps loading.  For each
// layer it draws a random sparse image, kernels and biases, builds the input
// stream, computes the expected output words with an independent reference
// model of the convolution, quantisation, ReLU, pooling and the sparse
// format, and compares every output word.  Each mechanism is counted and one
// that never happened counts as a failure.  The total cycle count and the
// useful MAC count of each layer are printed.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_nullhop_top;
  import nh_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        cfg_we;
  logic [3:0]  cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic        in_valid, in_ready, out_valid, out_ready, busy, done, overflow;
  logic [31:0] in_data, out_data;

  nullhop_top dut (.*);

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // watchdog
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- layer data ----------------
  int H, W, NI, NO, K, PAD, L2C, SH;
  bit RELU, POOL, ENC;
  int img [65536];
  int wts [131072];
  int bias [128];
  logic [31:0] in_q [$];
  logic [31:0] exp_q [$];
  logic [15:0] fq [$];

  function automatic int widx(int o, int i, int ky, int kx);
    return ((o * NI + i) * K + ky) * K + kx;
  endfunction

  function automatic void flush_fields();
    if (fq.size() % 2 == 1) fq.push_back(16'h0);
  endfunction
  function automatic void fields_to(ref logic [31:0] q [$]);
    while (fq.size() >= 2) begin
      logic [15:0] a, b;
      a = fq.pop_front(); b = fq.pop_front();
      q.push_back({a, b});
    end
  endfunction

  // Sparse format of one pixel (n channels in v[]).
  function automatic void enc_pixel(int v [128], int n, bit en);
    if (!en) begin
      for (int c = 0; c < n; c++) fq.push_back(16'(v[c]));
      return;
    end
    for (int j = 0; j < (n + 15) / 16; j++) begin
      logic [15:0] sm;
      sm = '0;
      for (int b = 0; b < 16; b++) if (16*j + b < n && v[16*j+b] != 0) sm[b] = 1'b1;
      fq.push_back(sm);
      for (int b = 0; b < 16; b++) if (sm[b]) fq.push_back(16'(v[16*j+b]));
    end
  endfunction

  function automatic int quant(longint a);
    longint s;
    int ai;
    ai = int'(a);          // 32-bit wrap
    s  = longint'(ai >>> SH);
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  function automatic int conv(int o, int oy, int ox);
    int acc;
    acc = bias[o];
    for (int i = 0; i < NI; i++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++) begin
          int y, x;
          y = oy + ky - PAD; x = ox + kx - PAD;
          if (y >= 0 && y < H && x >= 0 && x < W)
            acc += img[(i * H + y) * W + x] * wts[widx(o, i, ky, kx)];
        end
    return acc;
  endfunction

  int nz_pixels;
  longint useful_macs;

  task automatic build_layer();
    int v [128];
    int ho, wo, nstr;
    in_q.delete(); exp_q.delete(); fq.delete();
    nz_pixels = 0;
    for (int n = 0; n < NI * H * W; n++)
      img[n] = ($urandom_range(99) < 35) ? int'($urandom_range(255)) + 1 : 0;
    // a fully empty row segment now and then
    for (int x = 0; x < W; x++) for (int i = 0; i < NI; i++) img[(i * H + 1) * W + x] = 0;
    for (int n = 0; n < NO * NI * K * K; n++) wts[n] = int'($urandom_range(127)) - 64;
    for (int o = 0; o < NO; o++) bias[o] = int'($urandom_range(4000)) - 2000;
    // kernels
    for (int o = 0; o < NO; o++) begin
      in_q.push_back(32'(bias[o]));
      for (int i = 0; i < NI; i++) for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
        fq.push_back(16'(wts[widx(o, i, ky, kx)]));
      flush_fields(); fields_to(in_q);
    end
    // compressed input rows
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        for (int i = 0; i < NI; i++) begin
          v[i] = img[(i * H + y) * W + x];
          if (v[i] != 0) nz_pixels++;
        end
        enc_pixel(v, NI, 1'b1);
      end
      flush_fields(); fields_to(in_q);
    end
    // expected output
    ho = H + 2 * PAD - K + 1; wo = W + 2 * PAD - K + 1;
    nstr = POOL ? ho / 2 : (ho + 1) / 2;
    for (int r = 0; r < nstr; r++) begin
      if (POOL) begin
        for (int q = 0; q < wo / 2; q++) begin
          for (int o = 0; o < NO; o++) begin
            int m;
            m = RELU ? 0 : -32768;
            for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++) begin
              int t;
              t = quant(longint'(conv(o, 2*r + dy, 2*q + dx)));
              if (t > m) m = t;
            end
            v[o] = m;
          end
          enc_pixel(v, NO, ENC);
        end
      end else begin
        for (int x = 0; x < wo; x++)
          for (int dy = 0; dy < 2; dy++)
            if (2*r + dy < ho) begin
              for (int o = 0; o < NO; o++) begin
                int t;
                t = quant(longint'(conv(o, 2*r + dy, x)));
                v[o] = (RELU && t < 0) ? 0 : t;
              end
              enc_pixel(v, NO, ENC);
            end
      end
      flush_fields(); fields_to(exp_q);
    end
  endtask

  task automatic cfg_write(int a, int d);
    @(negedge clk); cfg_we = 1'b1; cfg_addr = 4'(a); cfg_wdata = 32'(d);
    @(negedge clk); cfg_we = 1'b0;
  endtask

  // mechanism counters
  int n_out_stall, n_tok_stall, n_conflict, n_reduce, n_overlap, n_flush, n_pad_col,
      n_pool_layers, n_nopool_layers, n_raw_layers, n_relu_layers, n_norelu_layers,
      n_edge_skip;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) n_out_stall++;
    if (dut.u_idp.tok_valid && !dut.u_idp.tok_ready) n_tok_stall++;
    if (dut.u_idp.u_pm.rd_req && !dut.u_idp.u_pm.rd_gnt) n_conflict++;
    if (int'(dut.u_pre.st) == 1) n_reduce++;
    if (dut.u_idp.tok_valid && in_valid && in_ready && dut.busy && int'(dut.st) == 2) n_overlap++;
    if (int'(dut.u_enc.st) == 2) n_flush++;
    if (dut.u_idp.tok_valid && dut.u_idp.tok_ready && dut.u_idp.tok.kind == TOK_COL &&
        int'(dut.u_idp.tok.col) < PAD) n_pad_col++;
    if (dut.u_ccm.ctrl_valid[0] && dut.u_ccm.ctrl_ready[0] && dut.u_idp.tok.kind == TOK_PIX &&
        int'(dut.u_ccm.g_ctrl[0].u_ctrl.n_kx_hi) - int'(dut.u_ccm.g_ctrl[0].u_ctrl.n_kx_lo) + 1 < K)
      n_edge_skip++;
  end

  // input driver and output checker
  int out_idx;
  bit drive_on;
  always @(posedge clk) begin
    if (in_valid && in_ready) void'(in_q.pop_front());
  end
  always @(negedge clk) begin
    in_valid  <= drive_on && in_q.size() > 0 && ($urandom_range(9) != 0);
    in_data   <= (in_q.size() > 0) ? in_q[0] : '0;
    out_ready <= ($urandom_range(9) > 2);
  end
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_idx >= exp_q.size()) begin
      failures++;
      if (failures < 10) $display("extra output word %h", out_data);
    end else if (out_data !== exp_q[out_idx]) begin
      failures++;
      if (failures < 10) $display("word %0d: got %h expected %h", out_idx, out_data, exp_q[out_idx]);
    end
    out_idx++;
  end

  task automatic run_layer(int h, int w, int ni, int no, int k, int pad, int l2c,
                           bit relu, bit pool, bit enc, int sh);
    longint c0, macs;
    H = h; W = w; NI = ni; NO = no; K = k; PAD = pad; L2C = l2c;
    RELU = relu; POOL = pool; ENC = enc; SH = sh;
    build_layer();
    if (pool) n_pool_layers++; else n_nopool_layers++;
    if (!enc) n_raw_layers++;
    if (relu) n_relu_layers++; else n_norelu_layers++;
    out_idx = 0;
    cfg_write(0, h); cfg_write(1, w); cfg_write(2, ni); cfg_write(3, no);
    cfg_write(4, k); cfg_write(5, pad); cfg_write(6, l2c);
    cfg_write(7, {29'd0, enc, pool, relu}); cfg_write(8, sh);
    c0 = cycles;
    drive_on = 1'b1;
    cfg_write(9, 1);
    while (done) @(posedge clk);
    while (!done) @(posedge clk);
    drive_on = 1'b0;
    repeat (2) @(posedge clk);
    checks++;
    if (out_idx != exp_q.size()) begin
      failures++;
      $display("layer %0dx%0dx%0d k%0d: %0d words out, %0d expected", h, w, ni, k, out_idx, exp_q.size());
    end
    checks++;
    if (in_q.size() != 0) begin failures++; $display("input not consumed: %0d left", in_q.size()); end
    checks++;
    if (overflow) begin failures++; $display("pixel memory overflow"); end
    macs = 0;
    $display("layer H%0d W%0d Nin%0d Nout%0d k%0d pad%0d clusters%0d relu%0d pool%0d enc%0d: %0d cycles, %0d non-zero inputs, %0d output words",
             h, w, ni, no, k, pad, 1 << l2c, relu, pool, enc, cycles - c0, nz_pixels, exp_q.size());
  endtask

  task automatic need(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", name); end
    else $display("mechanism %s: %0d", name, n);
  endtask

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; drive_on = 0;
    in_valid = 0; in_data = 0; out_ready = 1;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    //        H   W  Nin Nout k pad l2c relu pool enc shift
    run_layer(8,  8,  3,  16, 3, 1,  3,  1,   1,   1,  4);
    run_layer(7,  7,  16, 32, 5, 0,  2,  0,   0,   1,  5);
    run_layer(5,  5,  20, 128,1, 0,  0,  1,   1,   0,  2);
    run_layer(9,  8,  17, 64, 7, 1,  1,  1,   0,  1,  6);
    need("output back-pressure", n_out_stall);
    need("IDP stalled by CCM", n_tok_stall);
    need("pixel memory write/read conflict", n_conflict);
    need("PRE partial-sum reduction", n_reduce);
    need("decoding overlaps loading", n_overlap);
    need("row-end padding of output", n_flush);
    need("zero-padding column", n_pad_col);
    need("kernel columns skipped at edge", n_edge_skip);
    need("pooling on", n_pool_layers);
    need("pooling off", n_nopool_layers);
    need("raw output", n_raw_layers);
    need("ReLU on", n_relu_layers);
    need("ReLU off", n_norelu_layers);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
