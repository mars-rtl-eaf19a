// apw: activation, pooling and output writer of a CIM core.
//
// Activation: the paper quantises every layer input with
// round(clamp(A,0,1) * (2^bA - 1)). In integer form a kernel sum S becomes
//   act = min( (max(S,0) + 2^(shift-1)) >> shift , 2^bA - 1 )
// with bA = 8 (`a8`) or 4 and a per-layer right shift `shift` (the scale of
// the fused batch-norm/quantisation; rounding half up). The clamp at 0 is the
// ReLU.
// Pooling: with `pool`, the core delivers the four pixels of a 2x2 window one
// after the other (`win_first` on the first, `win_last` on the fourth) and
// APW keeps the running maximum; only the window maximum is written.
// Output writer: the 16 activations are packed into one 128-bit OFM word
// (channel k in bits 8k+7:8k) and `out_valid` asks the core controller to
// write it.
//
// The paper names these three stages only; the integer requantisation,
// rounding and 2x2 max pooling are this design's choices.
// Timing: `in_valid` on an enabled edge (`ce`) registers the result;
// `out_valid`/`out_word` hold until the next enabled edge.
module apw
  import mars_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        ce,
  input  logic                        in_valid,
  input  logic [LANES-1:0][ACCW-1:0]  sum,
  input  logic                        a8,
  input  logic [4:0]                  shift,
  input  logic                        pool,
  input  logic                        win_first,
  input  logic                        win_last,
  output logic                        out_valid,
  output logic [FM_DW-1:0]            out_word
);
  logic [LANES-1:0][7:0] act, pmax, nxt;

  function automatic logic [7:0] activate(input logic [ACCW-1:0] s, input logic a8_i,
                                          input logic [4:0] sh);
    logic signed [ACCW:0] r;
    logic [ACCW:0] q;
    logic [7:0] amax;
    amax = a8_i ? 8'd255 : 8'd15;
    r = $signed({s[ACCW-1], s});
    if (r <= 0) return 8'd0;
    q = (sh == 0) ? unsigned'(r) : (unsigned'(r) + ((ACCW+1)'(1) << (sh - 1))) >> sh;
    return (q > (ACCW+1)'(amax)) ? amax : q[7:0];
  endfunction

  always_comb
    for (int k = 0; k < LANES; k++) begin
      act[k] = activate(sum[k], a8, shift);
      nxt[k] = (win_first || act[k] > pmax[k]) ? act[k] : pmax[k];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_word  <= '0;
      pmax      <= '0;
    end else if (ce) begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (!pool) begin
          out_valid <= 1'b1;
          out_word  <= act;
        end else begin
          pmax <= nxt;
          if (win_last) begin
            out_valid <= 1'b1;
            out_word  <= nxt;
          end
        end
      end
    end
  end
endmodule
