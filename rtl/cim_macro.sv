// cim_macro: behavioural model of the 64-Kbit 6T SRAM computing-in-memory macro.
//
// BEHAVIOURAL MODEL. The real part is a mixed-signal 28 nm macro (bit-line
// current summation and ADCs); this model reproduces its digital function
// only, with exact arithmetic and no ADC error.
//
// Organisation (as the paper gives it): 8 partitions, each of 64 weight-groups
// of 16 signed 8-bit weights (8 x 64 x 16 x 8 = 64 Kbit). A compute access
// activates the weight-group at the same address `grp` in all 8 partitions (a
// group-set slice of 8), multiplies it with 16 shared unsigned 4-bit inputs and
// produces 8 inner products, one per partition, in the next cycle.
//
// Interface and timing (this design's choices): everything advances on `clk`
// when `ce` (the core clock enable) is high. `we` writes one whole
// weight-group (`wdata`, weight i in bits 8i+7:8i) at partition `wpart`,
// address `wgrp`. `cen` starts a compute; `dout`/`dvalid` are registered and
// hold until the next enabled edge; `rst_n`
// clears `dvalid` only (weights are not reset, as in an SRAM). Write and compute may not use the macro in
// the same cycle.
module cim_macro
  import mars_pkg::*;
#(
  parameter int P_PARTS  = PARTS,
  parameter int P_GROUPS = GROUPS,
  parameter int P_GW     = GW,
  parameter int P_WBITS  = WBITS,
  parameter int P_INBITS = INBITS,
  parameter int P_OUTW   = MOUTW
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  ce,
  input  logic                                  we,
  input  logic [$clog2(P_PARTS)-1:0]            wpart,
  input  logic [$clog2(P_GROUPS)-1:0]           wgrp,
  input  logic [P_GW*P_WBITS-1:0]               wdata,
  input  logic                                  cen,
  input  logic [$clog2(P_GROUPS)-1:0]           grp,
  input  logic [P_GW*P_INBITS-1:0]              din,
  output logic [P_PARTS-1:0][P_OUTW-1:0]        dout,
  output logic                                  dvalid
);

  logic [P_GW*P_WBITS-1:0] mem [P_PARTS*P_GROUPS];

  always_ff @(posedge clk) begin
    if (ce && we) mem[{wpart, wgrp}] <= wdata;
  end

  // Inner product of one partition's active weight-group with the inputs.
  function automatic logic signed [P_OUTW-1:0] dot(input logic [P_GW*P_WBITS-1:0] wg,
                                                   input logic [P_GW*P_INBITS-1:0] x);
    logic signed [P_OUTW-1:0] s;
    s = '0;
    for (int i = 0; i < P_GW; i++)
      s += P_OUTW'($signed(wg[i*P_WBITS +: P_WBITS])) *
           $signed({1'b0, x[i*P_INBITS +: P_INBITS]});
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dvalid <= 1'b0;
    else if (ce) dvalid <= cen;
  end

  always_ff @(posedge clk) begin
    if (ce) begin
      if (cen)
        for (int p = 0; p < P_PARTS; p++)
          dout[p] <= dot(mem[{p[$clog2(P_PARTS)-1:0], grp}], din);
    end
  end

  always @(posedge clk) begin
    if (ce) assert (!(we && cen)) else $error("cim_macro: write and compute in the same cycle");
  end

endmodule
