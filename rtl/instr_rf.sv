// instr_rf: instruction register file of MARS, one instruction (mars_pkg::instr_t)
// per network layer. Written from outside before a run, read by the
// controller. Flip-flop storage, asynchronous read; 32 entries is this
// design's choice (VGG16 has 13 convolution layers).
module instr_rf
  import mars_pkg::*;
#(
  parameter int DEPTH = IRF_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  instr_t                   wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output instr_t                   rdata
);
  instr_t regs [DEPTH];

  always_ff @(posedge clk)
    if (we) regs[waddr] <= wdata;

  assign rdata = regs[raddr];
endmodule
