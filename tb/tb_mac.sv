// tb_mac: checks one MAC unit against a reference model of its 2 x k
// accumulator window: bias initialisation, random multiply-accumulates into
// random entries, and shifts that must output the left-most column, move the
// window left and load the bias on the right.  Every output of a shift is
// compared; the weight is presented one cycle after its operation, as the
// kernel bank does.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_mac;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [2:0] k;
  logic       init;
  mac_op_t    op;
  pix_t       weight, w_next;
  acc_t       bias, out0, out1;
  logic       out_valid;
  int checks = 0, failures = 0;

  mac dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_acc [2][KMAX];
  int exp0, exp1;
  bit exp_v;

  always @(posedge clk) weight <= w_next;   // bank latency of one cycle

  initial begin
    k = 3'd5; init = 0; op = '0; w_next = '0; bias = 32'sd1000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      k = 3'(trial + 3 > 7 ? 7 : trial + 3);
      if (trial == 3) k = 3'd1;
      bias = acc_t'(int'($urandom_range(2000)) - 1000);
      @(negedge clk); init = 1; @(negedge clk); init = 0;
      for (int r = 0; r < 2; r++) for (int c = 0; c < KMAX; c++) ref_acc[r][c] = bias;
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        if ($urandom_range(5) == 0) begin
          op = '0; op.valid = 1; op.shift = 1; op.emit = $urandom_range(1);
          w_next = '0;
          exp0 = ref_acc[0][0]; exp1 = ref_acc[1][0]; exp_v = op.emit;
          for (int r = 0; r < 2; r++) begin
            for (int c = 0; c < int'(k) - 1; c++) ref_acc[r][c] = ref_acc[r][c+1];
            ref_acc[r][k-1] = bias;
          end
          @(negedge clk); op = '0;
          @(negedge clk);   // result registered two edges after the op
          checks++;
          if (out_valid !== exp_v || (exp_v && (out0 !== exp0 || out1 !== exp1))) begin
            failures++;
            $display("shift: got v%0d %0d %0d exp v%0d %0d %0d", out_valid, out0, out1, exp_v, exp0, exp1);
          end
        end else begin
          op = '0; op.valid = 1; op.row = $urandom_range(1);
          op.acc_col = 3'($urandom_range(int'(k) - 1));
          op.pix = pix_t'(int'($urandom_range(600)) - 300);
          w_next = pix_t'(int'($urandom_range(200)) - 100);
          ref_acc[op.row][op.acc_col] += int'(op.pix) * int'(w_next);
        end
      end
      @(negedge clk); op = '0; @(negedge clk);
      // drain: shift k times and check everything
      for (int c = 0; c < int'(k); c++) begin
        @(negedge clk); op = '0; op.valid = 1; op.shift = 1; op.emit = 1;
        exp0 = ref_acc[0][0]; exp1 = ref_acc[1][0];
        for (int r = 0; r < 2; r++) begin
          for (int cc = 0; cc < int'(k) - 1; cc++) ref_acc[r][cc] = ref_acc[r][cc+1];
          ref_acc[r][k-1] = bias;
        end
        @(negedge clk); op = '0; @(negedge clk);
        checks++;
        if (!out_valid || out0 !== exp0 || out1 !== exp1) begin
          failures++; $display("drain %0d: got %0d %0d exp %0d %0d", c, out0, out1, exp0, exp1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
