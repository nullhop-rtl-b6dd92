// tb_pixel_allocator: checks the routing of pixel tokens to controller
// (ch mod v) and the broadcast of column tokens, which must reach all v
// active controllers at once and only when all of them are ready and col_ok
// is high; tok_ready must follow the same rules.  Random inputs, all four
// cluster counts.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_pixel_allocator;
  import nh_pkg::*;
  layer_cfg_t cfg;
  logic tok_valid, tok_ready, col_ok;
  idp_tok_t tok;
  logic [NCTRL-1:0] ctrl_valid, ctrl_ready;
  int checks = 0, failures = 0;

  pixel_allocator dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    for (int n = 0; n < 4000; n++) begin
      logic [NCTRL-1:0] exp_v;
      logic exp_r;
      int v;
      cfg.log2_clust = 2'($urandom_range(3));
      v = 1 << cfg.log2_clust;
      tok = '0;
      tok.kind = ($urandom_range(3) == 0) ? TOK_COL : TOK_PIX;
      tok.ch = FM_W'($urandom_range(1023));
      tok_valid = $urandom_range(1);
      ctrl_ready = NCTRL'($urandom);
      if ($urandom_range(1)) ctrl_ready = '1;
      col_ok = $urandom_range(1);
      #1;
      exp_v = '0;
      if (tok.kind == TOK_PIX) begin
        exp_r = ctrl_ready[int'(tok.ch) % v];
        if (tok_valid) exp_v[int'(tok.ch) % v] = 1'b1;
      end else begin
        bit all;
        all = 1;
        for (int c = 0; c < v; c++) if (!ctrl_ready[c]) all = 0;
        exp_r = all && col_ok;
        if (tok_valid && exp_r) for (int c = 0; c < v; c++) exp_v[c] = 1'b1;
      end
      checks++;
      if (ctrl_valid !== exp_v || tok_ready !== exp_r) begin
        failures++;
        if (failures < 10) $display("kind %0d ch %0d v %0d: valid %b/%b ready %b/%b",
                                    tok.kind, tok.ch, v, ctrl_valid, exp_v, tok_ready, exp_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
