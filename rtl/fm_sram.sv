// fm_sram: one 512-Kbit feature-map SRAM of the ping-pong SRAM system
// (SRAM1 or SRAM2). Per layer one of the two holds the input feature map and
// the other receives the output feature map.
//
// Single port, 4096 words of 128 bits: a word holds 16 channels of one pixel,
// 8 bits each; word address = pixel * (channels/16) + channel group. The
// 512-Kbit size is the paper's; the 128-bit word is this design's choice (it
// matches the 128-bit input buffer of a core). `en` with `we` writes, `en`
// alone reads; read data appears one clock later and holds until the next
// read. Runs on the 400 MHz system clock.
module fm_sram
  import mars_pkg::*;
#(
  parameter int DEPTH = FM_DEPTH,
  parameter int WIDTH = FM_DW
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata <= mem[addr];
    end
  end
endmodule
