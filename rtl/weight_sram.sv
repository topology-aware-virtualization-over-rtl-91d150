// weight_sram: weight-zone scratchpad of one core.
//
// Holds model weights, inputs and intermediate results. The paper gives the
// size (512 KB per tile in the FPGA prototype) and that it is separate from
// the meta-zone; its organisation is this design's own: LINES lines of
// LINE_W bits (32768 x 128 bits = 512 KB by default), one write port and
// one read port. A read returns its line on the cycle after re; a write and
// a read of the same line in one cycle return the old contents.
module weight_sram
  import vnpu_pkg::*;
#(
  parameter int unsigned LINES = 32768
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(LINES)-1:0] waddr,
  input  logic [LINE_W-1:0]        wdata,
  input  logic                     re,
  input  logic [$clog2(LINES)-1:0] raddr,
  output logic [LINE_W-1:0]        rdata
);
  logic [LINE_W-1:0] mem [LINES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
