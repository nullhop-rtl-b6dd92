// idp: Input Data Processor.  Stores the compressed input feature maps as they
// arrive on the input bus and decodes them, stripe by stripe, into a stream of
// non-zero pixels with coordinates for the compute core.
//
// It joins the three parts the paper names: the pixel memory (banked SRAM and
// write-priority arbitration), the input tracker (row start pointers) and the
// IDP manager (row FSMs).  Decoding of a stripe starts as soon as its rows are
// stored, so loading and computing overlap.  Token handshake: tok is held
// while tok_valid=1 and tok_ready=0.
module idp
  import nh_pkg::*;
#(
  parameter int WORDS = PIX_WORDS,
  parameter int NBANK = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_cfg_t       cfg,
  input  logic             start,       // layer start: empty memory
  input  logic             load_en,     // input bus carries feature maps
  input  logic             run,         // pulse: begin decoding
  input  logic             in_valid,
  input  logic [BUS_W-1:0] in_data,
  output logic             in_ready,
  output logic             tok_valid,
  output idp_tok_t         tok,
  input  logic             tok_ready,
  output logic [ROW_W-1:0] rows_stored,
  output logic             overflow,
  output logic             done
);
  localparam int RAW = $clog2(MAX_ROWS);

  logic              trk_we;
  logic [RAW-1:0]    trk_row;
  logic [PADR_W-1:0] trk_addr;
  logic              trk_rd_req, trk_rd_gnt, trk_rd_valid;
  logic [RAW-1:0]    trk_rd_row;
  logic [PADR_W-1:0] trk_rd_data;
  logic              pm_rd_req, pm_rd_gnt, pm_rd_valid;
  logic [PADR_W-1:0] pm_rd_addr;
  logic [BUS_W-1:0]  pm_rd_data;

  pixel_memory #(.WORDS(WORDS), .NBANK(NBANK)) u_pm (
    .clk, .rst_n, .cfg, .start, .load_en,
    .in_valid, .in_data, .in_ready,
    .rd_req   (pm_rd_req),
    .rd_addr  ($clog2(WORDS)'(pm_rd_addr)),
    .rd_gnt   (pm_rd_gnt),
    .rd_valid (pm_rd_valid),
    .rd_data  (pm_rd_data),
    .trk_we, .trk_row, .trk_addr,
    .rows_stored, .overflow
  );

  input_tracker u_trk (
    .clk, .rst_n,
    .wr_en    (trk_we),
    .wr_row   (trk_row),
    .wr_addr  (trk_addr),
    .rd_req   (trk_rd_req),
    .rd_row   (trk_rd_row),
    .rd_gnt   (trk_rd_gnt),
    .rd_valid (trk_rd_valid),
    .rd_data  (trk_rd_data)
  );

  idp_manager u_mgr (
    .clk, .rst_n, .cfg,
    .start (run),
    .rows_stored,
    .trk_rd_req, .trk_rd_row, .trk_rd_gnt, .trk_rd_valid, .trk_rd_data,
    .pm_rd_req, .pm_rd_addr, .pm_rd_gnt, .pm_rd_valid, .pm_rd_data,
    .tok_valid, .tok, .tok_ready,
    .done
  );
endmodule
