// ccm: Compute Core Module.  Pixel allocator, NC controllers, NM MAC units
// and the kernel memory (one bank per MAC, with the bias registers).
//
// MAC m belongs to the cluster m div (NM / v), v = 2^log2_clust, and takes
// its operations and its kernel address from that cluster's controller; so
// with 128 output maps one controller drives all 128 MACs, and with 16
// output maps 8 controllers drive 16 MACs each.  Within a cluster, MAC o
// computes output map o.  When a column-advance token is broadcast, every
// MAC shifts in the same cycle and the left-most accumulator column of all
// MACs leaves as psum_valid with psum0 (row 0) and psum1 (row 1), three clock
// edges after the token was accepted.  col_ok is withheld while such a shift
// is on its way so that the PRE, which takes one column at a time, is never
// overrun.  Kernel loading uses the input bus before the feature maps.
//
// The block split (allocator, controllers, kernel banks, MACs) and the
// clusters follow the paper; the three-cycle shift path and the rule that holds
// back a column while a shift is in flight are this design's own.
module ccm
  import nh_pkg::*;
#(
  parameter int NM    = NMAC,
  parameter int NC    = NCTRL,
  parameter int DEPTH = KB_DEPTH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_cfg_t       cfg,
  input  logic             start,
  input  logic             init,       // after kernel load: biases into accumulators
  input  logic             k_load_en,
  input  logic             in_valid,
  input  logic [BUS_W-1:0] in_data,
  output logic             in_ready,
  output logic             k_load_done,
  input  logic             tok_valid,
  input  idp_tok_t         tok,
  output logic             tok_ready,
  input  logic             pre_ready,
  output logic             psum_valid,
  output acc_t             psum0 [NM],
  output acc_t             psum1 [NM],
  output logic             shifting     // a shift is in flight (for monitoring)
);
  localparam int AW = $clog2(DEPTH);

  logic [NC-1:0]   ctrl_valid, ctrl_ready;
  mac_op_t         cop   [NC];
  logic [KA_W-1:0] ckadr [NC];
  logic [NM-1:0]   rd_en;
  logic [AW-1:0]   rd_addr [NM];
  pix_t            wdata   [NM];
  acc_t            bias    [NM];
  logic [NM-1:0]   mval;
  logic            sh0, sh1, sh2;

  always_comb begin
    sh0 = 1'b0;
    for (int c = 0; c < NC; c++) sh0 |= cop[c].valid && cop[c].shift;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin sh1 <= 1'b0; sh2 <= 1'b0; end
    else begin sh1 <= sh0; sh2 <= sh1; end
  end
  assign shifting = sh0 || sh1 || sh2;

  pixel_allocator #(.NC(NC)) u_alloc (
    .cfg, .tok_valid, .tok, .tok_ready,
    .col_ok (pre_ready && !shifting),
    .ctrl_valid, .ctrl_ready
  );

  for (genvar c = 0; c < NC; c++) begin : g_ctrl
    controller u_ctrl (
      .clk, .rst_n, .cfg, .start,
      .tok_valid (ctrl_valid[c]),
      .tok       (tok),
      .tok_ready (ctrl_ready[c]),
      .op        (cop[c]),
      .kaddr     (ckadr[c])
    );
  end

  kernel_memory #(.NB(NM), .DEPTH(DEPTH)) u_kmem (
    .clk, .rst_n, .cfg, .start,
    .load_en (k_load_en), .in_valid, .in_data, .in_ready,
    .load_done (k_load_done),
    .rd_en, .rd_addr, .rdata (wdata), .bias
  );

  for (genvar m = 0; m < NM; m++) begin : g_mac
    int unsigned c;
    mac_op_t     op_m;
    assign c    = m / (NM >> cfg.log2_clust);
    assign op_m = (c < NC) ? cop[c] : '0;
    assign rd_en[m]   = op_m.valid && !op_m.shift;
    assign rd_addr[m] = (c < NC) ? AW'(ckadr[c]) : '0;
    mac u_mac (
      .clk, .rst_n,
      .k      (cfg.k),
      .init   (init),
      .op     (op_m),
      .weight (wdata[m]),
      .bias   (bias[m]),
      .out_valid (mval[m]),
      .out0   (psum0[m]),
      .out1   (psum1[m])
    );
  end
  assign psum_valid = mval[0];
endmodule
