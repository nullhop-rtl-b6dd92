// tb_idp: the whole input data processor.  A random sparse image is
// compressed into the input format and streamed in with random gaps; the
// decoded token stream, taken with random back-pressure, must equal the
// reference walk of the stripes computed from the dense image: for every
// stripe, padded column and stripe row, the non-zero pixels in feature-map
// order with their coordinates, then a column token (last at the stripe's
// end).  Several layer shapes: with and without zero padding, kernel sizes
// 1, 3 and 7, one and several SM segments per pixel, pooling and not (which
// sets the stripe count).  Decoding must start before loading has finished.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_idp;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  layer_cfg_t cfg;
  logic start, load_en, run, in_valid, in_ready, tok_valid, tok_ready, overflow, done;
  logic [31:0] in_data;
  idp_tok_t tok;
  logic [ROW_W-1:0] rows_stored;
  int checks = 0, failures = 0;

  idp dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [16384];
  logic [31:0] words [$];
  idp_tok_t expq [$];
  logic [15:0] fq [$];
  int early = 0;

  always @(negedge clk) tok_ready <= ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && tok_valid && tok_ready) begin
    idp_tok_t e;
    checks++;
    if (in_valid && load_en && in_ready) early++;
    if (expq.size() == 0) begin failures++; $display("extra token"); end
    else begin
      e = expq.pop_front();
      if (tok !== e) begin
        failures++;
        if (failures < 10) $display("token: got k%0d v%0d s%0d c%0d ch%0d l%0d, expected k%0d v%0d s%0d c%0d ch%0d l%0d",
          tok.kind, tok.value, tok.slot, tok.col, tok.ch, tok.last, e.kind, e.value, e.slot, e.col, e.ch, e.last);
      end
    end
  end

  initial begin
    cfg = '0; start = 0; load_en = 0; run = 0; in_valid = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      int H, W, NI, K, P, segs, wp, hp, ho, ns, nw;
      case (trial)
        0: begin H = 8; W = 6; NI = 3;  K = 3; P = 1; cfg.pool_en = 1; end
        1: begin H = 7; W = 5; NI = 20; K = 1; P = 0; cfg.pool_en = 0; end
        2: begin H = 9; W = 9; NI = 16; K = 7; P = 0; cfg.pool_en = 0; end
        default: begin H = 10; W = 4; NI = 33; K = 5; P = 2; cfg.pool_en = 1; end
      endcase
      cfg.height = 10'(H); cfg.width = 10'(W); cfg.n_in = 11'(NI); cfg.k = 3'(K); cfg.pad = 2'(P);
      segs = (NI + 15) / 16; wp = W + 2 * P; hp = H + 2 * P; ho = hp - K + 1;
      ns = cfg.pool_en ? ho / 2 : (ho + 1) / 2;
      for (int n = 0; n < NI * H * W; n++)
        img[n] = ($urandom_range(2) == 0) ? int'($urandom_range(65534)) + 1 : 0;
      words.delete(); expq.delete();
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++)
          for (int s = 0; s < segs; s++) begin
            logic [15:0] sm;
            sm = '0;
            for (int b = 0; b < 16; b++) if (16*s+b < NI && img[((16*s+b) * H + y) * W + x] != 0) sm[b] = 1;
            fq.push_back(sm);
            for (int b = 0; b < 16; b++) if (sm[b]) fq.push_back(16'(img[((16*s+b) * H + y) * W + x]));
          end
        if (fq.size() % 2) fq.push_back(16'h0);
        while (fq.size() > 0) begin
          logic [15:0] a, b; a = fq.pop_front(); b = fq.pop_front(); words.push_back({a, b});
        end
      end
      for (int r = 0; r < ns; r++)
        for (int xp = 0; xp < wp; xp++) begin
          idp_tok_t t;
          for (int s = 0; s <= K; s++) begin
            int y, x;
            y = 2 * r + s - P; x = xp - P;
            if (y >= 0 && y < H && x >= 0 && x < W)
              for (int i = 0; i < NI; i++)
                if (img[(i * H + y) * W + x] != 0) begin
                  t = '0; t.kind = TOK_PIX; t.value = pix_t'(img[(i * H + y) * W + x]);
                  t.slot = 3'(s); t.col = COL_W'(xp); t.ch = FM_W'(i);
                  expq.push_back(t);
                end
          end
          t = '0; t.kind = TOK_COL; t.col = COL_W'(xp); t.last = (xp == wp - 1);
          expq.push_back(t);
        end
      @(negedge clk); start = 1; @(negedge clk); start = 0; run = 1; @(negedge clk); run = 0;
      load_en = 1; nw = 0;
      while (!done) begin
        in_valid = (nw < words.size()) && ($urandom_range(3) == 0);
        in_data  = (nw < words.size()) ? words[nw] : '0;
        @(posedge clk);
        if (in_valid && in_ready) nw++;
        @(negedge clk);
      end
      load_en = 0; in_valid = 0;
      repeat (4) @(posedge clk);
      checks++;
      if (expq.size() != 0) begin failures++; $display("trial %0d: %0d tokens missing", trial, expq.size()); end
    end
    checks++;
    if (early == 0) begin failures++; $display("decoding never overlapped loading"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
