// tb_ccm: the compute core (allocator, controllers, kernel memory and MACs)
// at a reduced size of 16 MACs and 4 controllers.  For each layer the
// kernels and biases are loaded over the bus, the accumulators are
// initialised, and the token stream the input data processor would produce
// for a random sparse image is fed with random gaps.  A PRE model takes each
// column of partial sums, keeps its ready low for a random time afterwards,
// adds the cluster partial sums together as the PRE does, and compares both
// rows of every output map with a direct convolution.  Layers cover one,
// two and four clusters, kernel sizes 1, 3 and 5, and zero padding.  It also
// checks that no column arrives while the PRE model is busy.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_ccm;
  import nh_pkg::*;
  localparam int NM = 16, NC = 4, DEPTH = 256;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  layer_cfg_t cfg;
  logic start, init, k_load_en, in_valid, in_ready, k_load_done;
  logic tok_valid, tok_ready, pre_ready, psum_valid, shifting;
  logic [31:0] in_data;
  idp_tok_t tok;
  acc_t psum0 [NM], psum1 [NM];
  int checks = 0, failures = 0;

  ccm #(.NM(NM), .NC(NC), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int H, W, NI, NO, K, P, V, HO, WO;
  int img [4096];
  int wts [16384];
  int bias [NM];
  logic [31:0] kq [$];
  logic [15:0] fq [$];
  idp_tok_t tq [$];
  int ocol, ostripe, ncols;

  function automatic int conv(int o, int oy, int ox);
    int acc;
    acc = bias[o];
    for (int i = 0; i < NI; i++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++) begin
          int y, x;
          y = oy + ky - P; x = ox + kx - P;
          if (y >= 0 && y < H && x >= 0 && x < W)
            acc += img[(i * H + y) * W + x] * wts[((o * NI + i) * K + ky) * K + kx];
        end
    return acc;
  endfunction

  // PRE model
  int busy_left = 0;
  always @(negedge clk) pre_ready <= (busy_left == 0);
  always @(posedge clk) if (rst_n) begin
    if (busy_left > 0) busy_left--;
    if (psum_valid) begin
      checks++;
      if (!pre_ready) begin failures++; $display("column while PRE busy"); end
      for (int o = 0; o < NO; o++) begin
        acc_t s0, s1;
        s0 = 0; s1 = 0;
        for (int c = 0; c < V; c++) begin s0 += psum0[c * (NM / V) + o]; s1 += psum1[c * (NM / V) + o]; end
        checks++;
        if (s0 !== conv(o, 2 * ostripe, ocol)) begin
          failures++;
          if (failures < 10) $display("row0 o%0d s%0d x%0d: got %0d expected %0d", o, ostripe, ocol, s0, conv(o, 2 * ostripe, ocol));
        end
        if (2 * ostripe + 1 < HO) begin
          checks++;
          if (s1 !== conv(o, 2 * ostripe + 1, ocol)) begin
            failures++;
            if (failures < 10) $display("row1 o%0d s%0d x%0d: got %0d expected %0d", o, ostripe, ocol, s1, conv(o, 2 * ostripe + 1, ocol));
          end
        end
      end
      ncols++;
      ocol++;
      if (ocol == WO) begin ocol = 0; ostripe++; end
      busy_left = int'($urandom_range(6));
    end
  end

  initial begin
    cfg = '0; start = 0; init = 0; k_load_en = 0; in_valid = 0; in_data = 0; tok_valid = 0; tok = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      int L2C, ns, nw;
      case (trial)
        0: begin H = 6; W = 5; NI = 3;  NO = 16; K = 3; P = 1; L2C = 0; end
        1: begin H = 7; W = 6; NI = 10; NO = 8;  K = 3; P = 0; L2C = 1; end
        2: begin H = 5; W = 7; NI = 9;  NO = 4;  K = 5; P = 2; L2C = 2; end
        default: begin H = 4; W = 4; NI = 20; NO = 16; K = 1; P = 0; L2C = 0; end
      endcase
      V = 1 << L2C;
      cfg = '0; cfg.height = 10'(H); cfg.width = 10'(W); cfg.n_in = 11'(NI); cfg.n_out = 8'(NO);
      cfg.k = 3'(K); cfg.pad = 2'(P); cfg.log2_clust = 2'(L2C); cfg.enc_en = 1;
      HO = H + 2 * P - K + 1; WO = W + 2 * P - K + 1; ns = (HO + 1) / 2;
      for (int n = 0; n < NI * H * W; n++) img[n] = ($urandom_range(2) == 0) ? int'($urandom_range(511)) - 256 : 0;
      for (int n = 0; n < NO * NI * K * K; n++) wts[n] = int'($urandom_range(255)) - 128;
      for (int o = 0; o < NO; o++) bias[o] = int'($urandom_range(20000)) - 10000;
      kq.delete(); tq.delete();
      for (int o = 0; o < NO; o++) begin
        kq.push_back(32'(bias[o]));
        for (int n = 0; n < NI * K * K; n++) fq.push_back(16'(wts[o * NI * K * K + n]));
        if (fq.size() % 2) fq.push_back(16'h0);
        while (fq.size() > 0) begin
          logic [15:0] a, b; a = fq.pop_front(); b = fq.pop_front(); kq.push_back({a, b});
        end
      end
      for (int r = 0; r < ns; r++)
        for (int xp = 0; xp < W + 2 * P; xp++) begin
          idp_tok_t t;
          for (int s = 0; s <= K; s++) begin
            int y, x;
            y = 2 * r + s - P; x = xp - P;
            if (y >= 0 && y < H && x >= 0 && x < W)
              for (int i = 0; i < NI; i++)
                if (img[(i * H + y) * W + x] != 0) begin
                  t = '0; t.kind = TOK_PIX; t.value = pix_t'(img[(i * H + y) * W + x]);
                  t.slot = 3'(s); t.col = COL_W'(xp); t.ch = FM_W'(i);
                  tq.push_back(t);
                end
          end
          t = '0; t.kind = TOK_COL; t.col = COL_W'(xp); t.last = (xp == W + 2 * P - 1);
          tq.push_back(t);
        end
      ocol = 0; ostripe = 0; ncols = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      // kernel load
      k_load_en = 1; nw = 0;
      while (!k_load_done) begin
        in_valid = (nw < kq.size()) && ($urandom_range(3) != 0);
        in_data  = (nw < kq.size()) ? kq[nw] : '0;
        @(posedge clk);
        if (in_valid && in_ready) nw++;
        @(negedge clk);
      end
      checks++;
      if (nw != kq.size()) begin failures++; $display("trial %0d: load done after %0d of %0d words", trial, nw, kq.size()); end
      k_load_en = 0; in_valid = 0;
      init = 1; @(negedge clk); init = 0;
      // tokens
      while (tq.size() > 0) begin
        tok_valid = ($urandom_range(3) != 0);
        tok = tq[0];
        @(posedge clk);
        if (tok_valid && tok_ready) void'(tq.pop_front());
        @(negedge clk);
      end
      tok_valid = 0;
      repeat (40) @(posedge clk);
      checks++;
      if (ncols != ns * WO) begin failures++; $display("trial %0d: %0d columns, expected %0d", trial, ncols, ns * WO); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
