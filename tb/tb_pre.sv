// tb_pre: drives the PRE with random columns of partial sums, as the MAC
// array delivers them, for several layer shapes: 1 to 8 clusters, ReLU on
// and off, pooling on and off, odd output width and height.  Acting as the
// encoder, it checks every output buffer it is asked to encode (n_out
// values) and the row-end flag against a reference of cluster summation,
// quantisation with saturation, ReLU and 2x2 max pooling; it also checks
// that the summation and transfer take log2(v)+1 cycles, and that done
// rises after the last column.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_pre;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  layer_cfg_t cfg;
  logic start, in_valid, ready, enc_req, enc_row_end, enc_ack, done;
  acc_t in0 [NMAC];
  acc_t in1 [NMAC];
  pix_t outbuf [NMAC];
  int checks = 0, failures = 0;

  pre dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int quant(longint a, int sh);
    int s;
    s = int'(a) >>> sh;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  int colv [2][2][128];   // [column parity][row][o] quantised sums
  int expq [$];
  bit expe [$];

  task automatic encode_check(int no);
    int e [128]; bit re;
    @(posedge clk); while (!enc_req) @(posedge clk);
    #0.1;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected encode"); end
    else begin
      for (int o = 0; o < no; o++) e[o] = expq.pop_front();
      re = expe.pop_front();
      for (int o = 0; o < no; o++)
        if (int'(outbuf[o]) != e[o]) begin
          failures++; if (failures < 10) $display("o %0d: got %0d expected %0d", o, outbuf[o], e[o]); break;
        end
      if (enc_row_end !== re) begin failures++; $display("row_end %0d expected %0d", enc_row_end, re); end
    end
    @(negedge clk); enc_ack = 1; @(negedge clk); enc_ack = 0;
  endtask

  initial begin
    cfg = '0; start = 0; in_valid = 0; enc_ack = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      int v, no, wo, ho, ns, sh;
      cfg.log2_clust = 2'(trial % 4); v = 1 << cfg.log2_clust;
      no = NMAC / v; if (trial == 5) no = 10;
      cfg.n_out = 8'(no); cfg.relu_en = trial[0]; cfg.pool_en = (trial % 3 != 1);
      cfg.k = 3; cfg.pad = 0; cfg.width = 10'(7 + trial % 2); cfg.height = 10'(6 + trial % 2);
      sh = trial; cfg.out_shift = 5'(sh);
      wo = int'(cfg.width) - 2; ho = int'(cfg.height) - 2;
      ns = cfg.pool_en ? ho / 2 : (ho + 1) / 2;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int r = 0; r < ns; r++)
        for (int c = 0; c < wo; c++) begin
          int lat;
          for (int m = 0; m < NMAC; m++) begin
            in0[m] = acc_t'(int'($urandom_range(400000)) - 200000);
            in1[m] = acc_t'(int'($urandom_range(400000)) - 200000);
          end
          for (int o = 0; o < no; o++) begin
            longint s0, s1;
            s0 = 0; s1 = 0;
            for (int cl = 0; cl < v; cl++) begin s0 += in0[cl * (NMAC / v) + o]; s1 += in1[cl * (NMAC / v) + o]; end
            colv[c % 2][0][o] = quant(s0, sh); colv[c % 2][1][o] = quant(s1, sh);
          end
          if (cfg.pool_en) begin
            if (c % 2 == 1) begin
              int e [128];
              for (int o = 0; o < no; o++) begin
                int m;
                m = cfg.relu_en ? 0 : -32768;
                for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) if (colv[a][b][o] > m) m = colv[a][b][o];
                e[o] = m;
              end
              for (int o = 0; o < no; o++) expq.push_back(e[o]);
              expe.push_back(c == (wo / 2) * 2 - 1);
            end
          end else begin
            for (int rr = 0; rr < 2; rr++) if (2 * r + rr < ho) begin
              int e [128];
              for (int o = 0; o < no; o++) e[o] = (cfg.relu_en && colv[c % 2][rr][o] < 0) ? 0 : colv[c % 2][rr][o];
              for (int o = 0; o < no; o++) expq.push_back(e[o]);
              expe.push_back((c == wo - 1) && (rr == 1 || 2 * r + 1 >= ho));
            end
          end
          while (!ready) @(negedge clk);
          in_valid = 1; @(negedge clk); in_valid = 0;
          if (expq.size() > 0) begin
            lat = 0;
            while (!enc_req) begin @(negedge clk); lat++; end
            checks++;
            if (lat != int'(cfg.log2_clust) + 1) begin
              failures++; $display("reduce+transfer took %0d cycles, expected %0d", lat, cfg.log2_clust + 1);
            end
            while (expq.size() > 0) encode_check(no);
          end
        end
      repeat (12) @(negedge clk);
      checks++;
      if (!done) begin failures++; $display("done missing, trial %0d", trial); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
