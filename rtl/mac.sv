// mac: one MAC unit: a 16x16-bit multiplier, a 32-bit adder and 2 x KMAX
// accumulators holding the partial results of a window of k output columns
// of the two output rows of the current double row.
//
// Operations come from the unit's controller (mac_op_t) together with a
// kernel address sent to the unit's kernel bank; the bank's weight arrives
// one cycle later, so the unit registers the operation and executes it when
// the weight is present.  A multiply-accumulate adds pix*weight to
// accumulator (row, acc_col).  A shift sends the left-most column of both
// rows out (out_valid when the operation was marked emit), moves every entry
// one place to the left and loads the bias into the right-most entry
// (column k-1).  init loads the bias into every entry at the start of a layer.
// Output values are registered: out_valid follows the shift by one edge.
// Overflow wraps around (two's complement), an assumption: the paper gives
// only the 32-bit precision.
module mac
  import nh_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] k,
  input  logic       init,
  input  mac_op_t    op,
  input  pix_t       weight,
  input  acc_t       bias,
  output logic       out_valid,
  output acc_t       out0,
  output acc_t       out1
);
  mac_op_t op_q;
  acc_t    acc [2][KMAX];
  acc_t    prod;

  assign prod = acc_t'(op_q.pix) * acc_t'(weight);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_q      <= '0;
      out_valid <= 1'b0;
      out0      <= '0;
      out1      <= '0;
      for (int r = 0; r < 2; r++) for (int c = 0; c < KMAX; c++) acc[r][c] <= '0;
    end else begin
      op_q      <= op;
      out_valid <= 1'b0;
      if (init) begin
        op_q <= '0;
        for (int r = 0; r < 2; r++) for (int c = 0; c < KMAX; c++) acc[r][c] <= bias;
      end else if (op_q.valid) begin
        if (op_q.shift) begin
          out_valid <= op_q.emit;
          out0      <= acc[0][0];
          out1      <= acc[1][0];
          for (int r = 0; r < 2; r++)
            for (int c = 0; c < KMAX; c++)
              if (c == int'(k) - 1)    acc[r][c] <= bias;
              else if (c < int'(k) - 1) acc[r][c] <= acc[r][(c == KMAX-1) ? c : c+1];
        end else begin
          acc[op_q.row][op_q.acc_col] <= acc[op_q.row][op_q.acc_col] + prod;
        end
      end
    end
  end
endmodule
