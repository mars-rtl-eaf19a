// acc_system: accumulator system of a CIM core (shift adder + kernel adder).
//
// The two CIM macros of a core deliver 16 inner products per compute (8 per
// macro, one per kernel). With 8-bit activations each group-set is computed
// in two passes, low nibble then high nibble; the shift adder weights a pass
// by 2^(4*nib_hi). The kernel adder adds every pass of every group-set of a
// kernel into one of 16 signed accumulators, giving the convolution sum of
// 16 output channels for one output pixel.
//
// Timing: updates on enabled edges (`ce`). `in_valid` adds the shifted
// inputs; `clr` together with `in_valid` starts a new sum with this input.
// `sum` is registered. The 32-bit accumulator width is this design's choice
// (the worst case, 64 groups x 16 x 127 x 255, needs 27 bits).
module acc_system
  import mars_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          ce,
  input  logic                          in_valid,
  input  logic                          clr,
  input  logic                          nib_hi,
  input  logic [LANES-1:0][MOUTW-1:0]   in,
  output logic [LANES-1:0][ACCW-1:0]    sum
);
  logic [LANES-1:0][ACCW-1:0] shifted;

  // shift adder: weight the pass by its nibble position
  always_comb
    for (int k = 0; k < LANES; k++)
      shifted[k] = ACCW'($signed(in[k])) <<< (nib_hi ? 4 : 0);

  // kernel adder: accumulate passes and group-sets of the 16 kernels
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum <= '0;
    else if (ce && in_valid)
      for (int k = 0; k < LANES; k++)
        sum[k] <= (clr ? '0 : sum[k]) + shifted[k];
  end
endmodule
