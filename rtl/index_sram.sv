// index_sram: per-core index SRAM holding the 16-bit index code of every
// group-set stored for the current layer (see mars_pkg::idx_code_t).
//
// One write port for loading from outside the accelerator and one read port
// for the core controller (a simple two-port SRAM). Reads are synchronous:
// `rdata` shows the word addressed with `re` high at the previous clock edge
// and holds until the next read. The depth (128 codes) is this design's
// choice; the paper gives only the 16-bit word. 128 codes cover the largest
// per-core index of the compressed VGG16 layers the paper lists (about 111).
module index_sram
  import mars_pkg::*;
#(
  parameter int DEPTH = IDX_DEPTH,
  parameter int WIDTH = 16
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
