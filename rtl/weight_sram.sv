// weight_sram: per-core weight SRAM holding the nonzero weight-groups of the
// current layer, from which the core controller (re)loads the two CIM macros.
//
// Word = one weight-group (16 signed 8-bit weights, weight i in bits
// 8i+7:8i). Layout (this design's choice): the 16 weight-groups of the
// group-set described by index code j sit at addresses 16*j .. 16*j+15, word
// k belonging to kernel k of the core. Hence DEPTH = 16 x index depth
// (2048 x 128 bit = 256 Kbit, enough for the largest compressed VGG16 layer the
// paper lists, about 221 Kbit per core). One write port for loading from
// outside, one synchronous read port (data one clock after `re`, held).
module weight_sram
  import mars_pkg::*;
#(
  parameter int DEPTH = W_DEPTH,
  parameter int WIDTH = GW * WBITS
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
