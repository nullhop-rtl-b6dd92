// tb_input_tracker: stores random row pointers while reading them back in
// random order, checks the read data, that a write always wins over a read in
// the same cycle (no grant) and that a granted read answers one cycle later.
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_input_tracker;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic wr_en, rd_req, rd_gnt, rd_valid;
  logic [8:0] wr_row, rd_row;
  logic [PADR_W-1:0] wr_addr, rd_data;
  int checks = 0, failures = 0;

  input_tracker dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int model [512];
  bit written [512];
  int pending;   // -1: none
  int conflicts = 0;

  initial begin
    wr_en = 0; rd_req = 0; wr_row = 0; rd_row = 0; wr_addr = 0; pending = -1;
    for (int i = 0; i < 512; i++) written[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (pending >= 0) begin
        checks++;
        if (!rd_valid || int'(rd_data) != model[pending]) begin
          failures++; $display("row %0d: got %0d (v%0d) expected %0d", pending, rd_data, rd_valid, model[pending]);
        end
        pending = -1;
      end else begin
        checks++;
        if (rd_valid) begin failures++; $display("rd_valid without a granted read"); end
      end
      wr_en = ($urandom_range(2) == 0);
      wr_row = 9'($urandom_range(511)); wr_addr = PADR_W'($urandom);
      rd_req = $urandom_range(1);
      rd_row = 9'($urandom_range(511));
      if (!written[rd_row]) rd_req = 0;
      #0.1;
      checks++;
      if (rd_gnt !== (rd_req && !wr_en)) begin failures++; $display("grant rule broken"); end
      if (rd_req && wr_en) conflicts++;
      if (rd_gnt) pending = int'(rd_row);
      @(posedge clk);
      if (wr_en) begin model[wr_row] = int'(wr_addr); written[wr_row] = 1; end
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("no write/read conflict exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
