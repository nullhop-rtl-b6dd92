// sram_sp: single-port synchronous SRAM, the storage element behind the pixel
// memory banks, the input tracker and the kernel memory banks.
//
// One access per cycle: with en=1 and we=1 the word at addr is written; with
// en=1 and we=0 it is read and appears on rdata on the next clock edge.  rdata
// holds its value between reads.  The array is written as plain RTL so that a
// synthesis flow can map it to an SRAM macro of the same size; the macro
// itself is process specific.
//
// The paper uses foundry SRAM macros; this plain array is this design's
// stand-in for them.
module sram_sp #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 1024,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
