// config_regs: the input configuration interface of the accelerator.
//
// A host microcontroller writes the layer parameters into a small register
// file before each layer (or each pass of a layer) and then writes the START
// register, which produces a one-cycle start pulse.  Reads return the
// registers and a status word (busy, done).  The paper only names this
// interface; the register map below is this design's own:
//   0 height  1 width  2 n_in  3 n_out  4 k  5 pad  6 log2 clusters
//   7 flags {enc_en, pool_en, relu_en}  8 out_shift  9 START (write)
//   10 status {done, busy} (read)
// Writes take effect on the next clock edge; reads are combinational.
module config_regs
  import nh_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [3:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic [31:0] cfg_rdata,
  input  logic        busy,
  input  logic        done,
  output layer_cfg_t  cfg,
  output logic        start
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg   <= '0;
      start <= 1'b0;
    end else begin
      start <= 1'b0;
      if (cfg_we) begin
        unique case (cfg_addr)
          4'd0: cfg.height     <= cfg_wdata[ROW_W-1:0];
          4'd1: cfg.width      <= cfg_wdata[COL_W-1:0];
          4'd2: cfg.n_in       <= cfg_wdata[FM_W-1:0];
          4'd3: cfg.n_out      <= cfg_wdata[7:0];
          4'd4: cfg.k          <= cfg_wdata[2:0];
          4'd5: cfg.pad        <= cfg_wdata[1:0];
          4'd6: cfg.log2_clust <= cfg_wdata[1:0];
          4'd7: {cfg.enc_en, cfg.pool_en, cfg.relu_en} <= cfg_wdata[2:0];
          4'd8: cfg.out_shift  <= cfg_wdata[4:0];
          4'd9: start          <= 1'b1;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (cfg_addr)
      4'd0:    cfg_rdata = 32'(cfg.height);
      4'd1:    cfg_rdata = 32'(cfg.width);
      4'd2:    cfg_rdata = 32'(cfg.n_in);
      4'd3:    cfg_rdata = 32'(cfg.n_out);
      4'd4:    cfg_rdata = 32'(cfg.k);
      4'd5:    cfg_rdata = 32'(cfg.pad);
      4'd6:    cfg_rdata = 32'(cfg.log2_clust);
      4'd7:    cfg_rdata = 32'({cfg.enc_en, cfg.pool_en, cfg.relu_en});
      4'd8:    cfg_rdata = 32'(cfg.out_shift);
      4'd10:   cfg_rdata = 32'({done, busy});
      default: cfg_rdata = '0;
    endcase
  end
endmodule
