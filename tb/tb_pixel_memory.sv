// tb_pixel_memory: streams a random compressed image (rows of pixel
// positions with one or more SM segments each, empty segments, rows ending
// in an upper or lower half word) into the pixel memory with random gaps,
// while issuing random reads of already-stored words.  Checks: every row
// start reported to the input tracker (row, word address) against the
// positions computed while building the stream, rows_stored, the data of
// every granted read, and the arbitration rule (a read on the bank being
// written is not granted, otherwise it is).
//
// The expected values come from an independent model of the behaviour the
// paper describes for this block; the stimulus mix is this testbench's own.
`timescale 1ns/1ps
module tb_pixel_memory;
  import nh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  layer_cfg_t cfg;
  logic start, load_en, in_valid, in_ready, rd_req, rd_gnt, rd_valid, trk_we, overflow;
  logic [31:0] in_data, rd_data;
  logic [16:0] rd_addr;
  logic [8:0] trk_row;
  logic [PADR_W-1:0] trk_addr;
  logic [ROW_W-1:0] rows_stored;
  int checks = 0, failures = 0;

  pixel_memory dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] words [$];
  int row_start [$];
  logic [15:0] fq [$];
  int nw;           // words accepted so far
  int exp_rd;       // address of the granted read, -1 none
  int n_conflict = 0, n_trk = 0;

  always @(posedge clk) if (rst_n) begin
    if (trk_we) begin
      checks++; n_trk++;
      if (int'(trk_row) >= row_start.size() || row_start[trk_row] != int'(trk_addr)) begin
        failures++; $display("row %0d start %0d unexpected", trk_row, trk_addr);
      end
    end
  end

  initial begin
    int H, W, NI, segs;
    cfg = '0; start = 0; load_en = 0; in_valid = 0; in_data = 0; rd_req = 0; rd_addr = 0;
    H = 9; W = 5; NI = 20; segs = 2;
    cfg.height = 10'(H); cfg.width = 10'(W); cfg.n_in = 11'(NI);
    for (int y = 0; y < H; y++) begin
      row_start.push_back(words.size());
      for (int x = 0; x < W; x++)
        for (int s = 0; s < segs; s++) begin
          logic [15:0] sm;
          sm = 16'($urandom);
          if ($urandom_range(3) == 0) sm = '0;
          if (s == 1) sm[15:4] = '0;          // channels 20..31 do not exist
          fq.push_back(sm);
          for (int b = 0; b < 16; b++) if (sm[b]) fq.push_back(16'($urandom_range(65535)));
        end
      if (fq.size() % 2) fq.push_back(16'h0);
      while (fq.size() > 0) begin
        logic [15:0] a, b; a = fq.pop_front(); b = fq.pop_front(); words.push_back({a, b});
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0; load_en = 1;
    nw = 0; exp_rd = -1;
    while (nw < words.size() || exp_rd >= 0) begin
      @(negedge clk);
      if (exp_rd >= 0) begin
        checks++;
        if (!rd_valid || rd_data !== words[exp_rd]) begin
          failures++; $display("read %0d: got %h expected %h", exp_rd, rd_data, words[exp_rd]);
        end
        exp_rd = -1;
      end
      in_valid = (nw < words.size()) && ($urandom_range(4) != 0);
      in_data  = (nw < words.size()) ? words[nw] : '0;
      rd_req   = (nw > 0) && $urandom_range(1);
      rd_addr  = 17'($urandom_range(nw > 0 ? nw - 1 : 0));
      #0.1;
      checks++;
      if (rd_gnt !== (rd_req && !(in_valid && in_ready && (nw % 2) == (int'(rd_addr) % 2)))) begin
        failures++; $display("arbitration rule broken");
      end
      if (rd_req && !rd_gnt) n_conflict++;
      if (rd_gnt) exp_rd = int'(rd_addr);
      @(posedge clk);
      if (in_valid && in_ready) nw++;
    end
    repeat (3) @(posedge clk);
    checks++;
    if (int'(rows_stored) != H) begin failures++; $display("rows_stored %0d", rows_stored); end
    checks++;
    if (n_trk != H) begin failures++; $display("%0d row starts reported", n_trk); end
    checks++;
    if (n_conflict == 0) begin failures++; $display("no conflict exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
