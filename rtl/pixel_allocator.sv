// pixel_allocator: hands the decoded pixels from the IDP to the controllers.
//
// With v = 2^log2_clust active clusters the input feature maps are split
// over the clusters: a pixel of map ch goes to controller ch mod v, whose
// cluster of MACs holds the kernels of that subset of input maps.  With one
// cluster (n_out = 128) every pixel goes to controller 0.  A pixel waits
// until its controller can take it; pixels for different controllers are
// therefore processed in parallel.  A column-advance token is broadcast to all
// active controllers at once, only when all of them can take it, when no
// earlier shift is still on its way to the PRE and when the PRE can accept a
// new column (col_ok).  All clusters then shift in the same cycle and the PRE
// receives the partial sums of all clusters together.  The mapping ch mod v is
// this design's own; the paper says only that the allocator sends pixels to v
// controllers in parallel.
module pixel_allocator
  import nh_pkg::*;
#(
  parameter int NC = NCTRL
) (
  input  layer_cfg_t       cfg,
  input  logic             tok_valid,
  input  idp_tok_t         tok,
  output logic             tok_ready,
  input  logic             col_ok,
  output logic [NC-1:0]    ctrl_valid,
  input  logic [NC-1:0]    ctrl_ready
);
  logic [NC-1:0] active;
  logic          all_ready;
  logic [31:0]   target;

  always_comb begin
    for (int c = 0; c < NC; c++) active[c] = (c < (1 << cfg.log2_clust));
    all_ready  = &(ctrl_ready | ~active);
    target     = int'(tok.ch) & ((1 << cfg.log2_clust) - 1);
    ctrl_valid = '0;
    if (tok.kind == TOK_PIX) begin
      tok_ready = ctrl_ready[target];
      ctrl_valid[target] = tok_valid;
    end else begin
      tok_ready  = all_ready && col_ok;
      ctrl_valid = (tok_valid && all_ready && col_ok) ? active : '0;
    end
  end
endmodule
