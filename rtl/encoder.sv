// encoder: compresses the output buffer into sparsity-map (SM) segments and
// non-zero values and packs them, two 16-bit fields per word, onto the
// 32-bit output bus.
//
// On enc_req the encoder takes the first n_out entries of the output buffer
// as the channels of one output pixel.  Segment j covers channels
// 16j..16j+15 (channels beyond n_out count as zero): its SM has bit b set
// when channel 16j+b is non-zero, and it is followed by the non-zero values
// in channel order.  Each cycle the encoder produces the SM and the first
// value of a segment, or two values, as the paper describes.  Fields are
// packed continuously (upper half first) across pixels; when the pixel
// closes a stripe (row_end) a half-filled word is completed with a zero
// field, so that every output row starts on a word boundary, which is what
// the pixel memory expects of an input row.  With enc_en=0 all n_out values
// are sent raw, two per word, with no SM.  ack is high for one cycle once the
// pixel has been handed to the output register; req must drop after it.  Output handshake: out_data
// is held while out_valid=1 and out_ready=0.
module encoder
  import nh_pkg::*;
#(
  parameter int NM = NMAC
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_cfg_t       cfg,
  input  logic             start,
  input  logic             req,
  input  logic             row_end,
  input  pix_t             pix [NM],
  output logic             ack,
  output logic             busy,
  output logic             out_valid,
  output logic [BUS_W-1:0] out_data,
  input  logic             out_ready
);
  localparam int SW = $clog2(NM / SEG_W) + 1;
  localparam int PW = $clog2(NM) + 1;

  typedef enum logic [1:0] {E_IDLE, E_RUN, E_FLUSH, E_ACK} estate_e;
  estate_e       st;
  logic [SW-1:0] seg;
  logic          need_sm;
  logic [15:0]   rem;
  logic [PW-1:0] p;
  logic          hold_v;
  logic [15:0]   hold;
  logic          row_end_q;

  logic free;
  assign free = !out_valid || out_ready;
  assign busy = (st != E_IDLE);
  assign ack  = (st == E_ACK);

  // One cycle of field generation.
  logic [15:0] sm_j, f1, f2, r_n;
  logic [1:0]  nf;
  logic        seg_done, finished;
  always_comb begin
    int base, nseg;
    base = int'(seg) * SEG_W;
    nseg = int'(segs_per_pix(int'(cfg.n_out)));
    for (int b = 0; b < SEG_W; b++)
      sm_j[b] = (base + b < int'(cfg.n_out)) && (base + b < NM) &&
                (pix[(base + b) % NM] != '0);
    f1 = '0; f2 = '0; nf = 2'd0; r_n = rem; seg_done = 1'b0; finished = 1'b0;
    if (cfg.enc_en) begin
      if (need_sm) begin
        f1 = sm_j; r_n = sm_j; nf = 2'd1;
      end else begin
        f1 = pix[(base + int'(lowest16(rem))) % NM]; r_n = rem & (rem - 16'd1); nf = 2'd1;
      end
      if (r_n != '0) begin
        f2 = pix[(base + int'(lowest16(r_n))) % NM]; r_n = r_n & (r_n - 16'd1); nf = 2'd2;
      end
      seg_done = (r_n == '0);
      finished = seg_done && (int'(seg) == nseg - 1);
    end else begin
      f1 = pix[int'(p) % NM]; nf = 2'd1;
      if (int'(p) + 1 < int'(cfg.n_out)) begin f2 = pix[(int'(p) + 1) % NM]; nf = 2'd2; end
      finished = (int'(p) + 2 >= int'(cfg.n_out));
    end
  end

  // the hold register is full after this cycle's fields (decides the flush)
  logic hv_n;
  assign hv_n = hold_v ? (nf == 2'd2) : (nf == 2'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_IDLE; seg <= '0; need_sm <= 1'b1; rem <= '0; p <= '0;
      hold_v <= 1'b0; hold <= '0; row_end_q <= 1'b0;
      out_valid <= 1'b0; out_data <= '0;
    end else if (start) begin
      st <= E_IDLE; hold_v <= 1'b0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (st)
        E_IDLE: if (req) begin
          st <= E_RUN; seg <= '0; need_sm <= 1'b1; p <= '0; row_end_q <= row_end;
        end
        E_RUN: if (free) begin
          // pack the fields of this cycle
          if (hold_v) begin
            out_valid <= 1'b1; out_data <= {hold, f1};
            if (nf == 2'd2) hold <= f2;
            hold_v <= (nf == 2'd2);
          end else if (nf == 2'd2) begin
            out_valid <= 1'b1; out_data <= {f1, f2};
          end else begin
            hold <= f1; hold_v <= 1'b1;
          end
          // advance
          if (cfg.enc_en) begin
            if (seg_done) begin seg <= seg + 1'b1; need_sm <= 1'b1; end
            else begin rem <= r_n; need_sm <= 1'b0; end
          end else p <= p + PW'(2);
          if (finished) st <= (row_end_q && hv_n) ? E_FLUSH : E_ACK;
        end
        E_FLUSH: if (free) begin
          out_valid <= 1'b1; out_data <= {hold, 16'h0000}; hold_v <= 1'b0;
          st <= E_ACK;
        end
        E_ACK: st <= E_IDLE;
        default: st <= E_IDLE;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready && !start |=> out_valid && $stable(out_data))
    else $error("encoder: output word changed while waiting for ready");
endmodule
