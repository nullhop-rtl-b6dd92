// tb_encoder: feeds random sparse output pixels (with all-zero segments,
// full segments and channel counts that are not multiples of 16) and checks
// every output word against a reference of the format: per 16 channels an SM
// segment (bit b = channel 16j+b non-zero) followed by the non-zero values,
// fields packed two per word upper half first, continuous across pixels, a
// zero field completing the last word of a stripe; or, in raw mode, all
// values two per word.  Random back-pressure on the output.  Also checks the
// rate: a segment with n non-zero values must not take more than
// ceil((n+1)/2) cycles when the output is never stalled.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_encoder;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  layer_cfg_t cfg;
  logic start, req, row_end, ack, busy, out_valid, out_ready;
  pix_t pix [NMAC];
  logic [31:0] out_data;
  int checks = 0, failures = 0;

  encoder dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] fq [$];
  logic [31:0] expq [$];
  bit stall_on;
  always @(negedge clk) out_ready <= stall_on ? ($urandom_range(3) != 0) : 1'b1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("extra word %h", out_data); end
    else begin
      logic [31:0] e;
      e = expq.pop_front();
      if (e !== out_data) begin failures++; if (failures < 10) $display("got %h expected %h", out_data, e); end
    end
  end

  initial begin
    cfg = '0; start = 0; req = 0; row_end = 0; stall_on = 0;
    for (int j = 0; j < NMAC; j++) pix[j] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      int no;
      no = (trial == 0) ? 16 : (trial == 1) ? 128 : (trial == 2) ? 40 : (trial == 3) ? 8 : 64;
      cfg.n_out = 8'(no); cfg.enc_en = (trial != 4); stall_on = (trial >= 2);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int p = 0; p < 12; p++) begin
        int t0, budget;
        budget = 0;
        for (int j = 0; j < NMAC; j++) begin
          pix[j] = ($urandom_range(2) == 0) ? pix_t'(int'($urandom_range(65535))) : '0;
          if (p % 4 == 1 && j < 16) pix[j] = '0;                       // empty segment
          if (p % 4 == 2 && j < 16) pix[j] = pix_t'(j + 1);              // full segment
        end
        row_end = (p % 3 == 2);
        if (cfg.enc_en) begin
          for (int s = 0; s < (no + 15) / 16; s++) begin
            logic [15:0] sm; int n;
            sm = '0; n = 0;
            for (int bb = 0; bb < 16; bb++) if (16*s+bb < no && pix[16*s+bb] != 0) begin sm[bb] = 1; n++; end
            fq.push_back(sm);
            for (int bb = 0; bb < 16; bb++) if (sm[bb]) fq.push_back(16'(pix[16*s+bb]));
            budget += (n + 2) / 2;
          end
        end else begin
          for (int j = 0; j < no; j++) fq.push_back(16'(pix[j]));
          budget = (no + 1) / 2;
        end
        if (row_end && fq.size() % 2) fq.push_back(16'h0);
        while (fq.size() >= 2) begin
          logic [15:0] a, bq; a = fq.pop_front(); bq = fq.pop_front(); expq.push_back({a, bq});
        end
        @(negedge clk); req = 1;
        t0 = 0;
        @(posedge clk);
        while (!ack) begin @(posedge clk); t0++; end
        @(negedge clk); req = 0;
        if (!stall_on) begin
          checks++;
          if (t0 > budget + 2) begin failures++; $display("pixel took %0d cycles, budget %0d", t0, budget); end
        end
      end
      // push any half word through with a final row end
      repeat (20) @(posedge clk);
      if (fq.size() != 0) begin
        // the reference holds a half word; complete the stripe
        @(negedge clk);
        for (int j = 0; j < NMAC; j++) pix[j] = '0;
        row_end = 1;
        if (cfg.enc_en) for (int s = 0; s < (no + 15) / 16; s++) fq.push_back(16'h0);
        else for (int j = 0; j < no; j++) fq.push_back(16'h0);
        if (fq.size() % 2) fq.push_back(16'h0);
        while (fq.size() >= 2) begin
          logic [15:0] a, bq; a = fq.pop_front(); bq = fq.pop_front(); expq.push_back({a, bq});
        end
        req = 1; @(posedge clk); while (!ack) @(posedge clk); @(negedge clk); req = 0;
      end
      repeat (40) @(posedge clk);
      checks++;
      if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); expq.delete(); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
