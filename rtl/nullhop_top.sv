// nullhop_top: the NullHop CNN accelerator.  One convolutional layer (or one
// pass of a layer with more than 128 output maps) per run: convolution over
// sparse, compressed input feature maps, optional ReLU, optional 2x2 max
// pooling, and compressed (or raw) output feature maps.
//
// Interfaces: a configuration port for the host (config_regs), a 32-bit
// input bus and a 32-bit output bus, both valid/ready streams, and clock and
// reset.  A run is: write the layer registers, write START; the input bus
// then carries the kernels and biases (kernel_memory's load order) followed
// by the compressed input rows (pixel_memory's format); the output bus
// carries the compressed output rows; done rises when the last word has left.
// The IDP starts decoding as soon as the kernels are in and the first rows
// of the stripe are stored, while the rest of the image is still arriving.
// Layers with more output maps than MACs are run as several passes by the
// host, reloading kernels and re-sending the input each time.
//
// The block structure follows the paper's architecture; the layer sequence,
// the kernel-then-pixels use of one input bus and the handshakes are this
// design's own choices, since the paper does not describe them.
module nullhop_top
  import nh_pkg::*;
#(
  parameter int NM        = NMAC,
  parameter int NC        = NCTRL,
  parameter int KDEPTH    = KB_DEPTH,
  parameter int PWORDS    = PIX_WORDS,
  parameter int NBANK     = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration interface
  input  logic             cfg_we,
  input  logic [3:0]       cfg_addr,
  input  logic [31:0]      cfg_wdata,
  output logic [31:0]      cfg_rdata,
  // input data bus
  input  logic             in_valid,
  input  logic [BUS_W-1:0] in_data,
  output logic             in_ready,
  // output data bus
  output logic             out_valid,
  output logic [BUS_W-1:0] out_data,
  input  logic             out_ready,
  // status
  output logic             busy,
  output logic             done,
  output logic             overflow
);
  typedef enum logic [1:0] {T_IDLE, T_KLOAD, T_RUN, T_DONE} tstate_e;
  tstate_e    st;
  layer_cfg_t cfg;
  logic       start, run_pulse;

  config_regs u_cfg (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .busy, .done, .cfg, .start
  );

  logic             k_in_ready, k_load_done, p_in_ready;
  logic             tok_valid, tok_ready, idp_done;
  idp_tok_t         tok;
  logic [ROW_W-1:0] rows_stored;
  logic             pre_ready, psum_valid, shifting, pre_done;
  acc_t             psum0 [NM];
  acc_t             psum1 [NM];
  logic             enc_req, enc_row_end, enc_ack, enc_busy;
  pix_t             outbuf [NM];

  assign in_ready = (st == T_KLOAD) ? k_in_ready : (st == T_RUN) ? p_in_ready : 1'b0;
  assign busy     = (st == T_KLOAD) || (st == T_RUN);
  assign done     = (st == T_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; run_pulse <= 1'b0;
    end else begin
      run_pulse <= 1'b0;
      if (start) st <= T_KLOAD;
      else unique case (st)
        T_KLOAD: if (k_load_done) begin st <= T_RUN; run_pulse <= 1'b1; end
        T_RUN:   if (pre_done && !enc_busy && !out_valid) st <= T_DONE;
        default: ;
      endcase
    end
  end

  idp #(.WORDS(PWORDS), .NBANK(NBANK)) u_idp (
    .clk, .rst_n, .cfg, .start,
    .load_en  (st == T_RUN),
    .run      (run_pulse),
    .in_valid (in_valid && st == T_RUN),
    .in_data,
    .in_ready (p_in_ready),
    .tok_valid, .tok, .tok_ready,
    .rows_stored, .overflow,
    .done     (idp_done)
  );

  ccm #(.NM(NM), .NC(NC), .DEPTH(KDEPTH)) u_ccm (
    .clk, .rst_n, .cfg, .start,
    .init      (run_pulse),
    .k_load_en (st == T_KLOAD),
    .in_valid  (in_valid && st == T_KLOAD),
    .in_data,
    .in_ready  (k_in_ready),
    .k_load_done,
    .tok_valid, .tok, .tok_ready,
    .pre_ready, .psum_valid, .psum0, .psum1,
    .shifting
  );

  pre #(.NM(NM)) u_pre (
    .clk, .rst_n, .cfg, .start,
    .in_valid (psum_valid), .in0 (psum0), .in1 (psum1),
    .ready (pre_ready),
    .enc_req, .enc_row_end, .enc_ack,
    .outbuf, .done (pre_done)
  );

  encoder #(.NM(NM)) u_enc (
    .clk, .rst_n, .cfg, .start,
    .req (enc_req), .row_end (enc_row_end), .pix (outbuf),
    .ack (enc_ack), .busy (enc_busy),
    .out_valid, .out_data, .out_ready
  );
endmodule
