// idp_manager: decodes the compressed rows of one vertical stripe and sends
// the non-zero pixels, with their coordinates, to the compute core.
//
// A stripe is the k+1 (padded) input rows that produce one double row of the
// output.  The manager keeps, for each of the up to KMAX+1 rows of the
// stripe, the registers of one row FSM: a pointer to the next 16-bit field in
// the pixel memory and the SM segment being decoded.  At the start of a
// stripe the row pointers are loaded from the input tracker (waiting until
// the row is completely stored).  The stripe is then walked column by column
// and, inside a column, row by row from the top (the winding order of the
// paper's Fig. 8): for each stored pixel position the FSM of that row reads
// its SM segment(s) and then one value per set bit.  Every value read leaves
// as a TOK_PIX token {value, stripe row, padded column, feature map}; zero
// pixels never do.  After each column a TOK_COL token (last=1 at the end of
// the stripe) tells the compute core to shift its accumulators.
//
// Zero padding costs no memory and no cycles: rows and columns outside the
// image are simply skipped, and all coordinates are given in the padded
// frame.  The row FSMs share one read port of the pixel memory, which returns
// data one cycle after a granted request, so each field takes two cycles;
// the paper's version reads up to k+1 pixels per cycle.  That sharing, the
// token format and the bit order of the SM (bit b = feature map 16*j+b) are
// this design's own choices.
module idp_manager
  import nh_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  layer_cfg_t        cfg,
  input  logic              start,
  input  logic [ROW_W-1:0]  rows_stored,
  // input tracker read port
  output logic              trk_rd_req,
  output logic [$clog2(MAX_ROWS)-1:0] trk_rd_row,
  input  logic              trk_rd_gnt,
  input  logic              trk_rd_valid,
  input  logic [PADR_W-1:0] trk_rd_data,
  // pixel memory read port
  output logic              pm_rd_req,
  output logic [PADR_W-1:0] pm_rd_addr,
  input  logic              pm_rd_gnt,
  input  logic              pm_rd_valid,
  input  logic [BUS_W-1:0]  pm_rd_data,
  // tokens to the compute core
  output logic              tok_valid,
  output idp_tok_t          tok,
  input  logic              tok_ready,
  output logic              done
);
  typedef enum logic [3:0] {
    S_IDLE, S_PTR_REQ, S_PTR_WAIT, S_SLOT, S_SM_REQ, S_SM_WAIT,
    S_PIX_REQ, S_PIX_WAIT, S_COL, S_DONE
  } state_e;

  state_e           state;
  logic [ROW_W-1:0] stripe;
  logic [COL_W-1:0] xcol;
  logic [2:0]       slot;
  logic [6:0]       seg;
  logic [15:0]      sm_rem;
  logic [FLD_W-1:0] ptr  [NSLOT];
  logic [NSLOT-1:0] rowv;

  // Row of the stripe in image coordinates and its validity.
  logic [31:0] yp, xp;
  logic        y_in, x_in;
  always_comb begin
    yp   = 2 * int'(stripe) + int'(slot);
    xp   = int'(xcol);
    y_in = (yp >= int'(cfg.pad)) && (yp - int'(cfg.pad) < int'(cfg.height));
    x_in = (xp >= int'(cfg.pad)) && (xp - int'(cfg.pad) < int'(cfg.width));
  end

  logic [15:0] field;
  assign field = ptr[slot][0] ? pm_rd_data[15:0] : pm_rd_data[31:16];

  assign trk_rd_req = (state == S_PTR_REQ) && y_in &&
                      (int'(rows_stored) > yp - int'(cfg.pad));
  assign trk_rd_row = $clog2(MAX_ROWS)'(yp - int'(cfg.pad));
  assign pm_rd_req  = (state == S_SM_REQ) || (state == S_PIX_REQ && !tok_valid);
  assign pm_rd_addr = ptr[slot][FLD_W-1:1];
  assign done       = (state == S_DONE);

  logic last_seg, last_slot, last_col, last_stripe;
  assign last_seg    = (int'(seg) == int'(segs_per_pix(int'(cfg.n_in))) - 1);
  assign last_slot   = (slot == cfg.k);
  assign last_col    = (int'(xcol) == int'(padded_w(cfg)) - 1);
  assign last_stripe = (int'(stripe) == int'(n_stripes(cfg)) - 1);

  logic [15:0] rem_n;
  assign rem_n = sm_rem & (sm_rem - 16'd1);   // SM bits left after clearing the lowest

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      stripe    <= '0;
      xcol      <= '0;
      slot      <= '0;
      seg       <= '0;
      sm_rem    <= '0;
      rowv      <= '0;
      tok_valid <= 1'b0;
      tok       <= '0;
      for (int i = 0; i < NSLOT; i++) ptr[i] <= '0;
    end else begin
      if (tok_valid && tok_ready) tok_valid <= 1'b0;
      if (start) begin
        state     <= S_PTR_REQ;
        stripe    <= '0;
        slot      <= '0;
        tok_valid <= 1'b0;
      end else begin
        unique case (state)
          S_IDLE, S_DONE: ;
          S_PTR_REQ: begin
            if (!y_in) begin
              rowv[slot] <= 1'b0;
              if (last_slot) begin state <= S_SLOT; slot <= '0; xcol <= '0; end
              else slot <= slot + 1'b1;
            end else if (trk_rd_req && trk_rd_gnt) begin
              state <= S_PTR_WAIT;
            end
          end
          S_PTR_WAIT: if (trk_rd_valid) begin
            ptr[slot]  <= {trk_rd_data, 1'b0};
            rowv[slot] <= 1'b1;
            if (last_slot) begin state <= S_SLOT; slot <= '0; xcol <= '0; end
            else begin state <= S_PTR_REQ; slot <= slot + 1'b1; end
          end
          S_SLOT: begin
            if (rowv[slot] && x_in) begin
              seg   <= '0;
              state <= S_SM_REQ;
            end else if (last_slot) state <= S_COL;
            else slot <= slot + 1'b1;
          end
          S_SM_REQ: if (pm_rd_gnt) state <= S_SM_WAIT;
          S_SM_WAIT: if (pm_rd_valid) begin
            ptr[slot] <= ptr[slot] + 1'b1;
            sm_rem    <= field;
            if (field != '0) state <= S_PIX_REQ;
            else if (!last_seg) begin seg <= seg + 1'b1; state <= S_SM_REQ; end
            else if (last_slot) state <= S_COL;
            else begin slot <= slot + 1'b1; state <= S_SLOT; end
          end
          S_PIX_REQ: if (pm_rd_req && pm_rd_gnt) state <= S_PIX_WAIT;
          S_PIX_WAIT: if (pm_rd_valid) begin
            ptr[slot]  <= ptr[slot] + 1'b1;
            sm_rem     <= rem_n;
            tok_valid  <= 1'b1;
            tok.kind   <= TOK_PIX;
            tok.last   <= 1'b0;
            tok.value  <= pix_t'(field);
            tok.slot   <= slot;
            tok.col    <= xcol;
            tok.ch     <= FM_W'(int'(seg) * SEG_W + int'(lowest16(sm_rem)));
            if (rem_n != '0) state <= S_PIX_REQ;
            else if (!last_seg) begin seg <= seg + 1'b1; state <= S_SM_REQ; end
            else if (last_slot) state <= S_COL;
            else begin slot <= slot + 1'b1; state <= S_SLOT; end
          end
          S_COL: if (!tok_valid) begin
            tok_valid <= 1'b1;
            tok.kind  <= TOK_COL;
            tok.last  <= last_col;
            tok.value <= '0;
            tok.slot  <= '0;
            tok.col   <= xcol;
            tok.ch    <= '0;
            slot      <= '0;
            if (!last_col) begin
              xcol  <= xcol + 1'b1;
              state <= S_SLOT;
            end else if (last_stripe) begin
              state <= S_DONE;
            end else begin
              stripe <= stripe + 1'b1;
              state  <= S_PTR_REQ;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  a_tok_stable: assert property (@(posedge clk) disable iff (!rst_n)
    tok_valid && !tok_ready && !start |=> tok_valid && $stable(tok))
    else $error("idp_manager: token changed while waiting for ready");
endmodule
