// kernel_memory: the NB kernel memory banks of the compute core (one per MAC)
// and the per-MAC bias registers, with the loader that fills them from the
// input bus at the start of a layer.
//
// Each bank is a 16-bit single-port SRAM of DEPTH words (4.5 KB).  Bank m is
// read by the MAC m it feeds: a read with rd_en[m]=1 returns rdata[m] on the
// next clock edge.  The load stream (an assumption of this design; the paper
// only says that kernels come over the input bus) is, for every output
// feature map o = 0..n_out-1: one 32-bit bias word, then the weights
// w(o, i, ky, kx) in i, ky, kx order, two per word (upper half first), the
// last word padded.  Weight (o, i, ky, kx) goes to the MAC that computes o for
// the cluster that receives input map i:
//   bank = (i mod v) * (NB / v) + o,  addr = ((i div v) * k + ky) * k + kx
// with v = 2^log2_clust clusters, so that splitting the input maps over
// clusters also splits a large kernel over several banks.  The bias is given
// only to the MAC of cluster 0; the partial sums of the other clusters start
// at zero.  One weight is written per cycle: the upper weight of a word
// straight from the bus, the lower one from a holding register.
module kernel_memory
  import nh_pkg::*;
#(
  parameter int NB    = NMAC,
  parameter int DEPTH = KB_DEPTH,
  localparam int AW = $clog2(DEPTH),
  localparam int MW = $clog2(NB)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_cfg_t       cfg,
  input  logic             start,
  input  logic             load_en,
  input  logic             in_valid,
  input  logic [BUS_W-1:0] in_data,
  output logic             in_ready,
  output logic             load_done,
  input  logic [NB-1:0]    rd_en,
  input  logic [AW-1:0]    rd_addr [NB],
  output pix_t             rdata   [NB],
  output acc_t             bias    [NB]
);
  typedef enum logic [1:0] {L_IDLE, L_BIAS, L_WGT, L_DONE} lstate_e;
  lstate_e          st;
  logic [7:0]       o;
  logic [FM_W-1:0]  i;
  logic [2:0]       ky, kx;
  logic             have_word;
  logic [BUS_W-1:0] wbuf;

  logic          wr;
  logic [MW-1:0] wr_bank;
  logic [AW-1:0] wr_addr;
  pix_t          wr_data;
  logic [31:0]   clusters;
  always_comb begin
    clusters = 1 << cfg.log2_clust;
    wr       = (st == L_WGT) && (have_word || (in_valid && in_ready));
    wr_bank  = MW'((int'(i) % clusters) * (NB / clusters) + int'(o));
    wr_addr  = AW'(((int'(i) / clusters) * int'(cfg.k) + int'(ky)) * int'(cfg.k) + int'(kx));
    wr_data  = have_word ? pix_t'(wbuf[15:0]) : pix_t'(in_data[31:16]);
  end

  assign in_ready  = load_en && ((st == L_BIAS) || (st == L_WGT && !have_word));
  assign load_done = (st == L_DONE);

  logic last_w;
  assign last_w = (kx == cfg.k - 3'd1) && (ky == cfg.k - 3'd1) &&
                  (int'(i) == int'(cfg.n_in) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; o <= '0; i <= '0; ky <= '0; kx <= '0;
      have_word <= 1'b0; wbuf <= '0;
      for (int m = 0; m < NB; m++) bias[m] <= '0;
    end else if (start) begin
      st <= L_BIAS; o <= '0; i <= '0; ky <= '0; kx <= '0;
      have_word <= 1'b0;
      for (int m = 0; m < NB; m++) bias[m] <= '0;
    end else begin
      unique case (st)
        L_IDLE, L_DONE: ;
        L_BIAS: if (in_valid && in_ready) begin
          bias[MW'(o)] <= acc_t'(in_data);
          st <= L_WGT; i <= '0; ky <= '0; kx <= '0; have_word <= 1'b0;
        end
        L_WGT: if (wr) begin
          // upper weight straight from the bus, lower one from the buffer
          if (!have_word) wbuf <= in_data;
          if (kx != cfg.k - 3'd1) kx <= kx + 3'd1;
          else begin
            kx <= '0;
            if (ky != cfg.k - 3'd1) ky <= ky + 3'd1;
            else begin ky <= '0; i <= i + 1'b1; end
          end
          if (last_w) begin
            have_word <= 1'b0;
            if (int'(o) == int'(cfg.n_out) - 1) st <= L_DONE;
            else begin o <= o + 8'd1; st <= L_BIAS; end
          end else have_word <= !have_word;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  for (genvar m = 0; m < NB; m++) begin : g_bank
    logic w_m;
    assign w_m = wr && (wr_bank == MW'(m));
    sram_sp #(.WIDTH(DATA_W), .DEPTH(DEPTH)) u_bank (
      .clk   (clk),
      .en    (w_m || rd_en[m]),
      .we    (w_m),
      .addr  (w_m ? wr_addr : rd_addr[m]),
      .wdata (wr_data),
      .rdata (rdata[m])
    );
  end

  a_addr_fits: assert property (@(posedge clk) disable iff (!rst_n)
    wr |-> ((int'(i) / clusters) * int'(cfg.k) * int'(cfg.k) < DEPTH))
    else $error("kernel_memory: kernel does not fit its bank; use more clusters");
endmodule
