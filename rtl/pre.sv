// pre: Pooling-ReLU-Encoding unit (without the encoder itself): the PRE
// buffer, the summation of cluster partial sums, quantisation to 16 bits,
// ReLU and on-the-fly 2x2 max pooling into the output buffer.
//
// Each shift of the MAC array delivers one column of the double row: 2 x NM
// 32-bit values (in_valid, in0 = row 0, in1 = row 1), captured into the PRE
// buffer while ready=1.  With v = 2^log2_clust clusters the values of one
// output map sit NM/v apart; log2(v) reduction cycles add the upper half of
// the buffer onto the lower half, leaving the full sums in entries 0..n_out-1.
// Then one transfer cycle quantises every sum (arithmetic shift right by
// out_shift, saturation to 16 bits) and stores the maximum of the value(s)
// and the current output buffer entry.  The output buffer is initialised to
// 0 when ReLU is on (so the max is the ReLU) and to the most negative number
// otherwise.  With pooling, both rows of a column go in at once and two
// columns are merged before the buffer is encoded, giving the 2x2 maximum;
// an odd last output column or row is dropped.  Without pooling, row 0 and
// then row 1 of each column are encoded one after the other, so the two
// output rows of a stripe leave interleaved column by column (the paper says
// only that one row at a time is transferred).  The encoder is asked to work
// on the output buffer with enc_req and answers with enc_ack; enc_row_end
// marks the last pixel of a stripe, where the output stream is word-aligned.
module pre
  import nh_pkg::*;
#(
  parameter int NM = NMAC
) (
  input  logic       clk,
  input  logic       rst_n,
  input  layer_cfg_t cfg,
  input  logic       start,
  input  logic       in_valid,
  input  acc_t       in0 [NM],
  input  acc_t       in1 [NM],
  output logic       ready,
  output logic       enc_req,
  output logic       enc_row_end,
  input  logic       enc_ack,
  output pix_t       outbuf [NM],
  output logic       done
);
  typedef enum logic [2:0] {P_IDLE, P_RED, P_XFER0, P_ENC0, P_XFER1, P_ENC1, P_NEXT, P_DONE} pstate_e;
  pstate_e          st;
  acc_t             pbuf [2][NM];
  logic [1:0]       step;
  logic [COL_W-1:0] col;
  logic [ROW_W-1:0] stripe;

  function automatic pix_t quant(acc_t a, logic [4:0] sh);
    acc_t s;
    s = a >>> sh;
    if (s > acc_t'(32767))       return pix_t'(16'sh7fff);
    else if (s < acc_t'(-32768)) return pix_t'(16'sh8000);
    else                         return pix_t'(s);
  endfunction
  function automatic pix_t max2(pix_t a, pix_t b);
    return (a > b) ? a : b;
  endfunction

  pix_t init_v;
  assign init_v = cfg.relu_en ? pix_t'(0) : pix_t'(16'sh8000);

  logic wo_last, row1_ok, col_odd, col_unpaired, pool_row_end, last_stripe;
  always_comb begin
    int wo;
    wo           = int'(out_w(cfg));
    wo_last      = (int'(col) == wo - 1);
    row1_ok      = (2 * int'(stripe) + 1 < int'(out_h(cfg)));
    col_odd      = col[0];
    col_unpaired = (wo % 2 == 1) && wo_last;
    pool_row_end = (int'(col) == (wo / 2) * 2 - 1);
    last_stripe  = (int'(stripe) == int'(n_stripes(cfg)) - 1);
  end

  // width of the live half during the cluster reduction
  logic [31:0] half;
  assign half = 32'(NM) >> (int'(step) + 1);

  assign ready       = (st == P_IDLE);
  assign enc_req     = (st == P_ENC0) || (st == P_ENC1);
  assign enc_row_end = cfg.pool_en ? pool_row_end
                     : ((st == P_ENC1) ? wo_last : (wo_last && !row1_ok));
  assign done        = (st == P_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; step <= '0; col <= '0; stripe <= '0;
      for (int j = 0; j < NM; j++) begin
        outbuf[j] <= '0; pbuf[0][j] <= '0; pbuf[1][j] <= '0;
      end
    end else if (start) begin
      st <= P_IDLE; step <= '0; col <= '0; stripe <= '0;
      for (int j = 0; j < NM; j++) outbuf[j] <= init_v;
    end else begin
      unique case (st)
        P_IDLE: if (in_valid) begin
          for (int j = 0; j < NM; j++) begin pbuf[0][j] <= in0[j]; pbuf[1][j] <= in1[j]; end
          step <= '0;
          st   <= (cfg.log2_clust == 0) ? P_XFER0 : P_RED;
        end
        P_RED: begin
          for (int j = 0; j < NM; j++)
            if (j < half) begin
              pbuf[0][j] <= pbuf[0][j] + pbuf[0][j + half];
              pbuf[1][j] <= pbuf[1][j] + pbuf[1][j + half];
            end
          step <= step + 2'd1;
          if (step + 2'd1 == cfg.log2_clust) st <= P_XFER0;
        end
        P_XFER0: begin
          if (cfg.pool_en) begin
            if (col_unpaired) st <= P_NEXT;
            else begin
              for (int j = 0; j < NM; j++)
                outbuf[j] <= max2(outbuf[j], max2(quant(pbuf[0][j], cfg.out_shift),
                                                  quant(pbuf[1][j], cfg.out_shift)));
              st <= col_odd ? P_ENC0 : P_NEXT;
            end
          end else begin
            for (int j = 0; j < NM; j++)
              outbuf[j] <= max2(outbuf[j], quant(pbuf[0][j], cfg.out_shift));
            st <= P_ENC0;
          end
        end
        P_ENC0: if (enc_ack) begin
          for (int j = 0; j < NM; j++) outbuf[j] <= init_v;
          st <= (!cfg.pool_en && row1_ok) ? P_XFER1 : P_NEXT;
        end
        P_XFER1: begin
          for (int j = 0; j < NM; j++)
            outbuf[j] <= max2(outbuf[j], quant(pbuf[1][j], cfg.out_shift));
          st <= P_ENC1;
        end
        P_ENC1: if (enc_ack) begin
          for (int j = 0; j < NM; j++) outbuf[j] <= init_v;
          st <= P_NEXT;
        end
        P_NEXT: begin
          if (!wo_last) begin col <= col + 1'b1; st <= P_IDLE; end
          else begin
            col <= '0;
            if (last_stripe) st <= P_DONE;
            else begin stripe <= stripe + 1'b1; st <= P_IDLE; end
          end
        end
        P_DONE: ;
        default: st <= P_IDLE;
      endcase
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> ready) else $error("pre: column arrived while busy");
endmodule
