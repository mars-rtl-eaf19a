// sas: sparsity address search.
//
// Because only nonzero group-sets are stored in the CIM macros, each stored
// group-set carries a 16-bit index code telling which part of the original
// kernel it is: its position in the 3x3 window and its 16-channel group.
// For the output pixel being computed, SAS turns that code into the address
// of the IFM word (16 channels of one pixel) that the group-set must be
// multiplied with, and reports when that pixel lies in the zero padding.
//
// The index-code layout (bit 15 first group, 14:9 group count minus 1, 8:5
// window position, 4:0 channel group) is the paper's. The row-major window
// numbering (position 0..8 = ky*3+kx), stride 1, padding of 0 or 1 and the
// IFM word address (iy*W + ix)*CG + ch are this design's choices.
// Purely combinational.
module sas
  import mars_pkg::*;
(
  input  logic [15:0]      idx,      // index code (idx_code_t)
  input  logic [7:0]       oy,       // output pixel row
  input  logic [7:0]       ox,       // output pixel column
  input  logic [7:0]       h,        // IFM height
  input  logic [7:0]       w,        // IFM width
  input  logic [5:0]       cg,       // IFM channel groups
  input  logic             pad,      // zero padding of one pixel
  output logic [FM_AW-1:0] addr,     // IFM word address
  output logic             is_pad,   // the position is outside the IFM
  output logic             first,    // first group-set of the kernel-set
  output logic [6:0]       ngroups   // group-sets of the kernel-set (1..64)
);
  idx_code_t c;
  logic [3:0] ky, kx;
  logic signed [9:0] iy, ix;
  logic [19:0] lin;

  always_comb begin
    c       = idx_code_t'(idx);
    first   = c.first;
    ngroups = {1'b0, c.total_m1} + 7'd1;
    ky      = (c.pos >= 4'd6) ? 4'd2 : (c.pos >= 4'd3) ? 4'd1 : 4'd0;
    kx      = c.pos - ky * 4'd3;
    iy      = $signed({2'b00, oy}) + $signed({6'b0, ky}) - (pad ? 10'sd1 : 10'sd0);
    ix      = $signed({2'b00, ox}) + $signed({6'b0, kx}) - (pad ? 10'sd1 : 10'sd0);
    is_pad  = (iy < 0) || (ix < 0) || (iy >= $signed({2'b00, h})) || (ix >= $signed({2'b00, w}));
    lin     = (20'(iy[7:0]) * 20'(w) + 20'(ix[7:0])) * 20'(cg) + 20'(c.ch);
    addr    = lin[FM_AW-1:0];
  end
endmodule
