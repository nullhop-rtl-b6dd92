// input_tracker: memory of row start pointers for the compressed input.
//
// Every compressed input row is stored in the pixel memory starting at a new
// 32-bit word.  When the pixel memory stores the first word of a row it
// writes the row index and that word address here; the IDP manager later
// reads the start address of each row of the stripe it decodes.  The storage
// is one single-port SRAM with one entry per possible input row.  As in the
// pixel memory, a write always wins: a read request in the same cycle is not
// granted (rd_gnt=0) and must be repeated.  A granted read returns rd_data on
// the next clock edge, flagged by rd_valid.
//
// The paper gives its job (row start pointers in a small SRAM, same
// write-first arbitration as the pixel memory); the pointer width and the
// one-cycle read latency are this design's own.
module input_tracker
  import nh_pkg::*;
#(
  parameter int ROWS = MAX_ROWS,
  localparam int RAW = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write side (from the pixel memory)
  input  logic              wr_en,
  input  logic [RAW-1:0]    wr_row,
  input  logic [PADR_W-1:0] wr_addr,
  // read side (from the IDP manager)
  input  logic              rd_req,
  input  logic [RAW-1:0]    rd_row,
  output logic              rd_gnt,
  output logic              rd_valid,
  output logic [PADR_W-1:0] rd_data
);
  assign rd_gnt = rd_req && !wr_en;

  sram_sp #(.WIDTH(PADR_W), .DEPTH(ROWS)) u_mem (
    .clk   (clk),
    .en    (wr_en || rd_req),
    .we    (wr_en),
    .addr  (wr_en ? wr_row : rd_row),
    .wdata (wr_addr),
    .rdata (rd_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_gnt;
  end
endmodule
