// tb_controller: checks the operation sequence a controller issues.  For
// random pixels (stripe row, padded column, feature map) under several kernel
// sizes, cluster counts and output widths it compares every issued
// multiply-accumulate (accumulator row and column, kernel address, pixel)
// with a reference list built from the convolution geometry, checks that a
// pixel takes exactly as many cycles as it has valid kernel taps, and checks
// that column tokens give one shift each whose emit flag is set from the
// k-th column of the stripe on.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_controller;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  layer_cfg_t cfg;
  logic start, tok_valid, tok_ready;
  idp_tok_t tok;
  mac_op_t op;
  logic [KA_W-1:0] kaddr;
  int checks = 0, failures = 0;

  controller dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int row; int col; int addr; int pix; bit shift; bit emit; } exp_t;
  exp_t expq [$];

  // record and compare every op
  always @(posedge clk) if (rst_n && op.valid) begin
    exp_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected op"); end
    else begin
      e = expq.pop_front();
      if (op.shift !== e.shift || (e.shift && op.emit !== e.emit) ||
          (!e.shift && (int'(op.row) != e.row || int'(op.acc_col) != e.col ||
                        int'(kaddr) != e.addr || int'(op.pix) != e.pix))) begin
        failures++;
        $display("op mismatch: got sh%0d em%0d r%0d c%0d a%0d p%0d exp sh%0d em%0d r%0d c%0d a%0d p%0d",
                 op.shift, op.emit, op.row, op.acc_col, kaddr, op.pix,
                 e.shift, e.emit, e.row, e.col, e.addr, e.pix);
      end
    end
  end

  task automatic send(idp_tok_t t);
    @(negedge clk); tok = t; tok_valid = 1;
    @(posedge clk); while (!tok_ready) @(posedge clk);
    @(negedge clk); tok_valid = 0;
  endtask

  initial begin
    cfg = '0; start = 0; tok_valid = 0; tok = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      int k, wp, wo, l2c, col;
      k   = (trial % 4) * 2 + 1;            // 1,3,5,7
      l2c = trial % 4;
      cfg = '0; cfg.k = 3'(k); cfg.width = 10'(6 + trial); cfg.pad = 2'(k / 2);
      cfg.height = 10; cfg.log2_clust = 2'(l2c); cfg.n_in = 64;
      wp = int'(cfg.width) + 2 * int'(cfg.pad); wo = wp - k + 1;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (col = 0; col < wp; col++) begin
        int npix;
        npix = $urandom_range(3);
        for (int n = 0; n < npix; n++) begin
          idp_tok_t t;
          int cyc0, taps;
          t = '0; t.kind = TOK_PIX; t.slot = 3'($urandom_range(k));
          t.col = COL_W'(col); t.ch = FM_W'($urandom_range(63));
          t.value = pix_t'(int'($urandom_range(500)) + 1);
          taps = 0;
          for (int ro = 0; ro < 2; ro++)
            for (int kx = 0; kx < k; kx++) begin
              int ky, ox;
              ky = int'(t.slot) - ro; ox = col - kx;
              if (ky >= 0 && ky < k && ox >= 0 && ox < wo) begin
                exp_t e;
                e.row = ro; e.col = k - 1 - kx; e.pix = int'(t.value); e.shift = 0; e.emit = 0;
                e.addr = (((int'(t.ch) >> l2c) * k + ky) * k + kx) % 4096;
                expq.push_back(e); taps++;
              end
            end
          send(t);
          // the pixel must take exactly 'taps' issue cycles
          cyc0 = 0;
          while (expq.size() > 0) begin @(posedge clk); #0.1; cyc0++; end
          checks++;
          if (cyc0 != taps) begin failures++; $display("pixel took %0d cycles for %0d taps", cyc0, taps); end
        end
        begin
          idp_tok_t t; exp_t e;
          t = '0; t.kind = TOK_COL; t.col = COL_W'(col); t.last = (col == wp - 1);
          e.shift = 1; e.emit = (col >= k - 1); e.row = 0; e.col = 0; e.addr = 0; e.pix = 0;
          expq.push_back(e);
          send(t);
          @(posedge clk); @(posedge clk);
        end
      end
      checks++;
      if (expq.size() != 0) begin failures++; $display("%0d ops missing", expq.size()); expq.delete(); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
