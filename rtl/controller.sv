// controller: turns each pixel it is given into the sequence of
// multiply-accumulate operations of its cluster of MACs, and each column
// advance into one accumulator shift.
//
// A pixel P in row s of the stripe (0..k) and padded column x meets at most
// two kernel rows: ky = s for output row 0 and ky = s-1 for output row 1 of
// the double row.  For each valid row it meets kernel columns kx, which feed
// output columns x-kx; kernel columns whose output column falls outside the
// output (left or right edge) are skipped, costing no cycle.  So a pixel takes
// between 1 and 2k cycles, one operation per cycle, and every operation sends
// the same kernel address to all banks of the cluster:
//   addr = ((ch div v) * k + ky) * k + kx
// together with the accumulator entry (row, k-1-kx) and the pixel value.
// On a TOK_COL token the controller issues one shift; it marks the shifted-out
// accumulator column as a finished output once the column counter has passed
// k-1 (the first k-1 shifts of a stripe push out nothing).  The column counter
// returns to 0 at the end of the stripe.
//
// Handshake: tok_ready is high when the controller is idle or in the last
// operation of a pixel, so consecutive pixels follow without a gap.  The
// operation and the kernel address come out of registers' combinational
// decode in the same cycle; the banks return the weight one cycle later.
//
// Following the paper, one kernel address per cycle goes to all banks of the
// cluster and taps that add to no output are skipped; the explicit column token
// and the tap loop order are this design's own choices.
module controller
  import nh_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  layer_cfg_t      cfg,
  input  logic            start,
  input  logic            tok_valid,
  input  idp_tok_t        tok,
  output logic            tok_ready,
  output mac_op_t         op,
  output logic [KA_W-1:0] kaddr
);
  typedef enum logic [1:0] {C_IDLE, C_PIX, C_SHIFT} cstate_e;
  cstate_e          st;
  pix_t             pix;
  logic [2:0]       slot;
  logic [FM_W-1:0]  ch;
  logic             ro, ro_hi;
  logic [2:0]       kx, kx_lo, kx_hi;
  logic [COL_W-1:0] cur_col;
  logic             col_last;

  logic last_op;
  assign last_op   = (st == C_PIX) && (kx == kx_hi) && (ro == ro_hi);
  assign tok_ready = (st == C_IDLE) || (st == C_SHIFT) || last_op;

  // Loop bounds for an incoming pixel.
  logic       n_ro_lo, n_ro_hi;
  logic [2:0] n_kx_lo, n_kx_hi;
  always_comb begin
    int wo, x;
    wo      = int'(out_w(cfg));
    x       = int'(tok.col);
    n_ro_lo = (tok.slot > cfg.k - 3'd1);        // row 0 needs ky = s <= k-1
    n_ro_hi = (tok.slot != 3'd0);               // row 1 needs ky = s-1 >= 0
    n_kx_lo = (x - (wo - 1) > 0) ? 3'(x - (wo - 1)) : 3'd0;
    n_kx_hi = (x < int'(cfg.k) - 1) ? 3'(x) : cfg.k - 3'd1;
  end

  always_comb begin
    int ky;
    ky    = int'(slot) - int'(ro);
    op    = '0;
    kaddr = KA_W'(((int'(ch) >> cfg.log2_clust) * int'(cfg.k) + ky) * int'(cfg.k) + int'(kx));
    if (st == C_PIX) begin
      op.valid   = 1'b1;
      op.row     = ro;
      op.acc_col = cfg.k - 3'd1 - kx;
      op.pix     = pix;
    end else if (st == C_SHIFT) begin
      op.valid = 1'b1;
      op.shift = 1'b1;
      op.emit  = (int'(cur_col) >= int'(cfg.k) - 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; pix <= '0; slot <= '0; ch <= '0; ro <= 1'b0; ro_hi <= 1'b0;
      kx <= '0; kx_lo <= '0; kx_hi <= '0; cur_col <= '0; col_last <= 1'b0;
    end else if (start) begin
      st <= C_IDLE; cur_col <= '0;
    end else begin
      // finish the current step
      if (st == C_SHIFT) cur_col <= col_last ? '0 : cur_col + 1'b1;
      if (st == C_PIX && !last_op) begin
        if (kx != kx_hi) kx <= kx + 3'd1;
        else begin kx <= kx_lo; ro <= 1'b1; end
      end
      if (tok_ready) begin
        if (tok_valid && tok.kind == TOK_PIX) begin
          st <= C_PIX; pix <= tok.value; slot <= tok.slot; ch <= tok.ch;
          ro <= n_ro_lo; ro_hi <= n_ro_hi; kx <= n_kx_lo; kx_lo <= n_kx_lo; kx_hi <= n_kx_hi;
        end else if (tok_valid && tok.kind == TOK_COL) begin
          st <= C_SHIFT; col_last <= tok.last;
        end else st <= C_IDLE;
      end
    end
  end
endmodule
