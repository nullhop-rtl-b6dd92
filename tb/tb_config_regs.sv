// tb_config_regs: writes random values to every layer register and checks
// the configuration record and the read-back, that START gives a pulse of
// exactly one cycle, and that the status register reflects busy and done.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_config_regs;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic cfg_we, busy, done, start;
  logic [3:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  layer_cfg_t cfg;
  int checks = 0, failures = 0;

  config_regs dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = 32'(d);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    int h, w, ni, no, k, pad, l2c, fl, sh, starts;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; busy = 0; done = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      h = $urandom_range(512); w = $urandom_range(512); ni = $urandom_range(1024);
      no = $urandom_range(128); k = $urandom_range(7); pad = $urandom_range(3);
      l2c = $urandom_range(3); fl = $urandom_range(7); sh = $urandom_range(31);
      wr(0, h); wr(1, w); wr(2, ni); wr(3, no); wr(4, k); wr(5, pad); wr(6, l2c); wr(7, fl); wr(8, sh);
      chk("height", int'(cfg.height), h); chk("width", int'(cfg.width), w);
      chk("n_in", int'(cfg.n_in), ni); chk("n_out", int'(cfg.n_out), no);
      chk("k", int'(cfg.k), k); chk("pad", int'(cfg.pad), pad);
      chk("clusters", int'(cfg.log2_clust), l2c);
      chk("flags", int'({cfg.enc_en, cfg.pool_en, cfg.relu_en}), fl);
      chk("shift", int'(cfg.out_shift), sh);
      @(negedge clk); cfg_addr = 4'd0; #0.1; chk("read height", int'(cfg_rdata), h);
      cfg_addr = 4'd4; #0.1; chk("read k", int'(cfg_rdata), k);
      busy = n[0]; done = n[1]; cfg_addr = 4'd10; #0.1; chk("status", int'(cfg_rdata), n % 4);
      starts = 0;
      fork
        wr(9, 1);
        repeat (5) begin @(posedge clk); #0.1; if (start) starts++; end
      join
      chk("start pulses", starts, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
