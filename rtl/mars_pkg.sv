// mars_pkg: types and sizes shared by the MARS accelerator.
//
// MARS runs sparse, quantised 3x3 convolutions on SRAM computing-in-memory
// (CIM) macros. This package fixes the numbers the blocks agree on:
//   * four CIM cores, each with two CIM macros of 8 partitions x 64
//     weight-groups x 16 weights (8 bits), i.e. 16 kernels per core,
//   * the 16-bit index code of a stored group-set, laid out as printed in the
//     paper's index-code table (bit 15 first-group flag, 14:9 group count
//     minus one, 8:5 position in the 3x3 window, 4:0 channel group),
//   * the feature-map word: 16 channels of one pixel, 8 bits each (128 bits,
//     the width of the core's input buffer); 4-bit activations sit in the low
//     nibble of each byte,
//   * the per-layer instruction word and the request a core sends through the
//     shunter to the feature-map SRAMs.
// Sizes the paper gives: 4 cores, 2 macros/core, 8x64x16 weights per macro,
// 8-bit weights, 4-bit macro inputs, 512-Kbit FM SRAMs, 128-bit input buffer,
// 16-bit index code. Depths of the index/weight SRAMs and of the instruction
// register file, and the instruction fields, are this design's choices.
package mars_pkg;

  localparam int NCORES     = 4;    // CIM cores
  localparam int LANES      = 16;   // kernels per core = channels per FM word
  localparam int PARTS      = 8;    // partitions per CIM macro
  localparam int GROUPS     = 64;   // weight-groups per partition
  localparam int GW         = 16;   // weights per weight-group
  localparam int WBITS      = 8;    // weight bits
  localparam int INBITS     = 4;    // CIM input bits per pass
  localparam int MOUTW      = 16;   // CIM macro output width (exact inner product)
  localparam int ACCW       = 32;   // kernel accumulator width
  localparam int FM_DW      = 128;  // FM word: 16 channels x 8 bits
  localparam int FM_DEPTH   = 4096; // 512 Kbit / 128 bit
  localparam int FM_AW      = $clog2(FM_DEPTH);
  localparam int IDX_DEPTH  = 128;  // index codes per core
  localparam int IDX_AW     = $clog2(IDX_DEPTH);
  localparam int W_DEPTH    = IDX_DEPTH * LANES; // one weight-group per kernel per index code
  localparam int W_AW       = $clog2(W_DEPTH);
  localparam int IRF_DEPTH  = 32;   // layer instructions
  localparam int IRF_AW     = $clog2(IRF_DEPTH);

  // Index code of one group-set (16 bits, field order as in the paper).
  typedef struct packed {
    logic       first;     // [15]   first group of the kernel-set
    logic [5:0] total_m1;  // [14:9] number of nonzero groups of the kernel-set, minus 1
    logic [3:0] pos;       // [8:5]  position in the 3x3 window, 0..8 row-major
    logic [4:0] ch;        // [4:0]  channel group (16 channels each)
  } idx_code_t;

  // One layer instruction.
  typedef struct packed {
    logic              last;     // stop after this layer
    logic              src_sel;  // 0: IFM in SRAM1, OFM to SRAM2; 1: the reverse
    logic              a8;       // 8-bit activations (two 4-bit CIM passes), else 4-bit
    logic              pool;     // 2x2 max pooling after activation
    logic              pad;      // zero padding of 1 (same-size output)
    logic [7:0]        h;        // IFM height
    logic [7:0]        w;        // IFM width
    logic [5:0]        cg;       // IFM channel groups (channels / 16), 1..32
    logic [5:0]        kg;       // OFM channel groups (kernels / 16), 1..63
    logic [4:0]        shift;    // requantisation right shift
    logic [IDX_AW-1:0] idx_base; // first index code of this layer in every core
  } instr_t;

  localparam int INSTR_W = $bits(instr_t);

  // Request of one core to the feature-map SRAMs (IFM read and/or OFM write).
  typedef struct packed {
    logic             rd;
    logic [FM_AW-1:0] raddr;
    logic             wr;
    logic [FM_AW-1:0] waddr;
    logic [FM_DW-1:0] wdata;
  } fm_req_t;

endpackage
