// pixel_memory: the IDP's storage for the compressed input feature maps.
//
// The compressed stream arrives as 32-bit words, each holding two 16-bit
// fields, the upper half first.  A field is either a sparsity-map (SM)
// segment or a non-zero pixel value; every SM segment is followed by as many
// values as it has ones.  Words are stored in arrival order in NBANK
// single-port SRAM banks, interleaved on the low address bit.  Writes from the
// input bus have priority: a read request from the IDP manager that falls on
// the bank being written is not granted that cycle (rd_gnt=0).  A granted read
// returns rd_data one clock edge later, with rd_valid.
//
// While storing, a small parser follows the field stream to find row
// boundaries.  A row holds width x ceil(n_in/16) SM segments (one group of
// segments per pixel position, channel order inside) plus their values and
// always starts on a new word; if it ends in an upper half, the lower half is
// padding.  When the first word of a row is written, its address is sent to
// the input tracker; rows_stored counts completely stored rows, so that the
// IDP manager can decode rows while later rows are still being loaded.
// Segment grouping per pixel, the word alignment of rows and the bank count
// are this design's own choices; the paper gives the field format, the write
// priority and the interleaving of SM segments and values.
module pixel_memory
  import nh_pkg::*;
#(
  parameter int WORDS = PIX_WORDS,
  parameter int NBANK = 2,
  localparam int AW  = $clog2(WORDS),
  localparam int BW  = $clog2(NBANK),
  localparam int RAW = $clog2(MAX_ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  layer_cfg_t        cfg,
  input  logic              start,     // new layer: empty the memory
  input  logic              load_en,   // input bus carries feature-map words
  // input bus
  input  logic              in_valid,
  input  logic [BUS_W-1:0]  in_data,
  output logic              in_ready,
  // read port (IDP manager)
  input  logic              rd_req,
  input  logic [AW-1:0]     rd_addr,
  output logic              rd_gnt,
  output logic              rd_valid,
  output logic [BUS_W-1:0]  rd_data,
  // row starts to the input tracker
  output logic              trk_we,
  output logic [RAW-1:0]    trk_row,
  output logic [PADR_W-1:0] trk_addr,
  output logic [ROW_W-1:0]  rows_stored,
  output logic              overflow
);
  logic [AW:0]      wptr;
  logic             wr;
  logic [15:0]      segs_left;
  logic [4:0]       vals_left;
  logic             row_open;       // a row has been started and not finished
  logic [BW-1:0]    rd_bank_q;
  logic [BUS_W-1:0] bank_rdata [NBANK];
  logic [15:0]      segs_per_row;

  assign segs_per_row = 16'(int'(cfg.width) * int'(segs_per_pix(int'(cfg.n_in))));
  assign in_ready = load_en && (int'(wptr) < WORDS) && (rows_stored < cfg.height);
  assign wr       = in_valid && in_ready;
  assign overflow = load_en && in_valid && (int'(wptr) >= WORDS);

  if (NBANK == 1) begin : g_onebank
    assign rd_gnt = rd_req && !wr;
  end else begin : g_banks
    assign rd_gnt = rd_req && !(wr && (wptr[BW-1:0] == rd_addr[BW-1:0]));
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic sel_w, sel_r;
    if (NBANK == 1) begin : g_s1
      assign sel_w = wr;
      assign sel_r = rd_gnt;
    end else begin : g_sn
      assign sel_w = wr && (wptr[BW-1:0] == BW'(b));
      assign sel_r = rd_gnt && (rd_addr[BW-1:0] == BW'(b));
    end
    sram_sp #(.WIDTH(BUS_W), .DEPTH(WORDS / NBANK)) u_bank (
      .clk   (clk),
      .en    (sel_w || sel_r),
      .we    (sel_w),
      .addr  (sel_w ? wptr[AW-1:BW] : rd_addr[AW-1:BW]),
      .wdata (in_data),
      .rdata (bank_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid  <= 1'b0;
      rd_bank_q <= '0;
    end else begin
      rd_valid  <= rd_gnt;
      if (rd_gnt) rd_bank_q <= (NBANK == 1) ? '0 : BW'(rd_addr);
    end
  end
  assign rd_data = bank_rdata[rd_bank_q];

  // Row parser: two fields per written word.
  logic [15:0] n_segs;
  logic [4:0]  n_vals;
  logic        row_done;
  always_comb begin
    logic [15:0] f;
    n_segs   = row_open ? segs_left : segs_per_row;
    n_vals   = row_open ? vals_left : 5'd0;
    row_done = 1'b0;
    for (int h = 0; h < 2; h++) begin
      f = (h == 0) ? in_data[31:16] : in_data[15:0];
      if (!row_done) begin
        if (n_vals != 0) n_vals = n_vals - 5'd1;
        else begin
          n_segs = n_segs - 16'd1;
          n_vals = popcount16(f);
        end
        if (n_vals == 0 && n_segs == 0) row_done = 1'b1;
      end
    end
  end

  assign trk_we   = wr && !row_open;
  assign trk_row  = RAW'(rows_stored);
  assign trk_addr = PADR_W'(wptr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr        <= '0;
      segs_left   <= '0;
      vals_left   <= '0;
      row_open    <= 1'b0;
      rows_stored <= '0;
    end else if (start) begin
      wptr        <= '0;
      segs_left   <= '0;
      vals_left   <= '0;
      row_open    <= 1'b0;
      rows_stored <= '0;
    end else if (wr) begin
      wptr <= wptr + 1'b1;
      if (row_done) begin
        row_open    <= 1'b0;
        rows_stored <= rows_stored + 1'b1;
      end else begin
        row_open  <= 1'b1;
        segs_left <= n_segs;
        vals_left <= n_vals;
      end
    end
  end

  // The compressed layer must fit: words beyond the memory are refused.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !overflow)
    else $error("pixel_memory: input feature maps exceed the pixel memory");
endmodule
