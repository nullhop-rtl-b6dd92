// tb_kernel_memory: loads random kernels and biases through the load stream
// for several layer shapes and cluster counts, then reads every weight back
// from the bank and address where the compute core will look for it
// (bank = (i mod v)*(128/v) + o, addr = ((i div v)*k + ky)*k + kx) and
// checks the bias registers (bias on cluster 0, zero elsewhere).  Also
// checks that loading takes one cycle per weight plus one per bias word.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_kernel_memory;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  layer_cfg_t cfg;
  logic start, load_en, in_valid, in_ready, load_done;
  logic [31:0] in_data;
  logic [NMAC-1:0] rd_en;
  logic [KA_W-1:0] rd_addr [NMAC];
  pix_t rdata [NMAC];
  acc_t bias [NMAC];
  int checks = 0, failures = 0;

  kernel_memory dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w [32768];
  int b [128];
  logic [31:0] q [$];

  initial begin
    int ni, no, k, l2c, v, cyc;
    cfg = '0; start = 0; load_en = 0; in_valid = 0; in_data = 0; rd_en = '0;
    for (int m = 0; m < NMAC; m++) rd_addr[m] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      case (trial)
        0: begin ni = 3;  no = 16;  k = 3; l2c = 3; end
        1: begin ni = 16; no = 32;  k = 5; l2c = 2; end
        2: begin ni = 9;  no = 128; k = 1; l2c = 0; end
        default: begin ni = 7; no = 64; k = 7; l2c = 1; end
      endcase
      v = 1 << l2c;
      cfg.n_in = FM_W'(ni); cfg.n_out = 8'(no); cfg.k = 3'(k); cfg.log2_clust = 2'(l2c);
      q.delete();
      for (int o = 0; o < no; o++) begin
        logic [15:0] f [$];
        b[o] = int'($urandom);
        q.push_back(32'(b[o]));
        for (int n = 0; n < ni * k * k; n++) begin
          w[o * ni * k * k + n] = int'($urandom_range(65535)) - 32768;
          f.push_back(16'(w[o * ni * k * k + n]));
        end
        if (f.size() % 2) f.push_back(16'h0);
        while (f.size() > 0) begin
          logic [15:0] hi, lo;
          hi = f.pop_front(); lo = f.pop_front(); q.push_back({hi, lo});
        end
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0; load_en = 1;
      cyc = 0;
      while (!load_done) begin
        in_valid = (q.size() > 0); in_data = (q.size() > 0) ? q[0] : '0;
        @(posedge clk); cyc++;
        if (in_valid && in_ready) void'(q.pop_front());
        @(negedge clk);
      end
      load_en = 0; in_valid = 0;
      checks++;
      if (cyc != no * (ni * k * k + 1)) begin
        failures++; $display("load took %0d cycles, expected %0d", cyc, no * (ni * k * k + 1));
      end
      for (int m = 0; m < NMAC; m++) begin
        int exp_b;
        exp_b = (m < no) ? b[m] : 0;
        checks++;
        if (int'(bias[m]) != exp_b) begin failures++; $display("bias %0d: %0d vs %0d", m, bias[m], exp_b); end
      end
      for (int o = 0; o < no; o++)
        for (int i = 0; i < ni; i++)
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++) begin
              int bank, addr;
              bank = (i % v) * (NMAC / v) + o;
              addr = ((i / v) * k + ky) * k + kx;
              @(negedge clk); rd_en = '0; rd_en[bank] = 1'b1; rd_addr[bank] = KA_W'(addr);
              @(negedge clk); rd_en = '0;
              checks++;
              if (int'(rdata[bank]) != w[(o * ni + i) * k * k + ky * k + kx]) begin
                failures++;
                if (failures < 10) $display("w(%0d,%0d,%0d,%0d) bank %0d addr %0d: %0d vs %0d", o, i, ky, kx,
                                            bank, addr, rdata[bank], w[(o * ni + i) * k * k + ky * k + kx]);
              end
            end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
