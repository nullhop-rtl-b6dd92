// nh_pkg: constants, types and helper functions shared by the NullHop
// accelerator RTL.
//
// The default sizes are those of the implemented chip: 16-bit activations and
// weights, 32-bit accumulators, a 32-bit input and output bus, 128 MAC units
// driven by 8 controllers, kernels up to 7x7, a 512 KB pixel memory and a
// 4.5 KB kernel bank per MAC (576 KB in total), images up to 512x512 with up
// to 1024 feature maps.  The layer configuration record, the token format
// between the input decoder and the compute core, the MAC operation format and
// the formulas for the derived layer sizes (padded size, output size, number
// of double-row stripes) are this design's own choices.
package nh_pkg;

  localparam int DATA_W     = 16;     // activation / weight precision
  localparam int ACC_W      = 32;     // MAC accumulator precision
  localparam int BUS_W      = 32;     // input and output data bus width
  localparam int SEG_W      = 16;     // sparsity-map segment length (= DATA_W)
  localparam int NMAC       = 128;    // number of MAC units (M)
  localparam int NCTRL      = 8;      // number of controllers (C)
  localparam int KMAX       = 7;      // largest kernel size
  localparam int NSLOT      = KMAX + 1; // row FSMs in the IDP manager
  localparam int PIX_WORDS  = 131072; // 512 KB of 32-bit words
  localparam int KB_DEPTH   = 2304;   // 4.5 KB of 16-bit weights per bank
  localparam int MAX_ROWS   = 512;
  localparam int MAX_COLS   = 512;
  localparam int MAX_FMAPS  = 1024;

  localparam int ROW_W  = $clog2(MAX_ROWS) + 1;  // 10: holds 0..512
  localparam int COL_W  = $clog2(MAX_COLS) + 1;  // 10
  localparam int FM_W   = $clog2(MAX_FMAPS) + 1; // 11
  localparam int PADR_W = $clog2(PIX_WORDS);     // 17: pixel-memory word address
  localparam int FLD_W  = PADR_W + 1;            // 18: 16-bit field index
  localparam int KA_W   = $clog2(KB_DEPTH);      // 12: kernel bank address

  typedef logic signed [DATA_W-1:0] pix_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Layer configuration, written by the host through the configuration port.
  typedef struct packed {
    logic [ROW_W-1:0] height;      // input rows H
    logic [COL_W-1:0] width;       // input columns W
    logic [FM_W-1:0]  n_in;        // input feature maps
    logic [7:0]       n_out;       // output feature maps in this pass (<= 128)
    logic [2:0]       k;           // kernel size (square), 1..7
    logic [1:0]       pad;         // zero padding on every border, 0..3
    logic [1:0]       log2_clust;  // log2 of the number of active clusters (1,2,4,8)
    logic             relu_en;
    logic             pool_en;     // 2x2 max pooling
    logic             enc_en;      // sparse encoding of the output
    logic [4:0]       out_shift;   // accumulator -> 16-bit: arithmetic right shift
  } layer_cfg_t;

  // Token from the input decoder to the compute core.
  typedef enum logic [0:0] {TOK_PIX = 1'b0, TOK_COL = 1'b1} tok_kind_e;

  typedef struct packed {
    tok_kind_e        kind;
    logic             last;   // TOK_COL: last column of the stripe
    pix_t             value;  // TOK_PIX: non-zero pixel value
    logic [2:0]       slot;   // TOK_PIX: row of the stripe, 0..k
    logic [COL_W-1:0] col;    // padded column index
    logic [FM_W-1:0]  ch;     // input feature map
  } idp_tok_t;

  // One operation from a controller to the MACs of its cluster.
  typedef struct packed {
    logic       valid;
    logic       shift;    // shift accumulators left, bias into the right end
    logic       emit;     // with shift: left-most column is a finished output
    logic       row;      // accumulator row (output row of the double row)
    logic [2:0] acc_col;  // accumulator column
    pix_t       pix;      // input pixel
  } mac_op_t;

  function automatic int unsigned padded_w(layer_cfg_t c);
    return int'(c.width) + 2 * int'(c.pad);
  endfunction
  function automatic int unsigned padded_h(layer_cfg_t c);
    return int'(c.height) + 2 * int'(c.pad);
  endfunction
  function automatic int unsigned out_w(layer_cfg_t c);
    return padded_w(c) - int'(c.k) + 1;
  endfunction
  function automatic int unsigned out_h(layer_cfg_t c);
    return padded_h(c) - int'(c.k) + 1;
  endfunction
  // Double-row stripes: pooling drops an odd last row, otherwise it is kept.
  function automatic int unsigned n_stripes(layer_cfg_t c);
    return c.pool_en ? out_h(c) / 2 : (out_h(c) + 1) / 2;
  endfunction
  // Sparsity-map segments per pixel position (one per 16 feature maps).
  function automatic int unsigned segs_per_pix(int unsigned n);
    return (n + SEG_W - 1) / SEG_W;
  endfunction

  function automatic logic [4:0] popcount16(logic [15:0] v);
    logic [4:0] n;
    n = '0;
    for (int i = 0; i < 16; i++) n = n + 5'(v[i]);
    return n;
  endfunction

  // Index of the lowest set bit (0 when none is set).
  function automatic logic [3:0] lowest16(logic [15:0] v);
    logic [3:0] r;
    r = '0;
    for (int i = 15; i >= 0; i--) if (v[i]) r = 4'(i);
    return r;
  endfunction

endpackage
