// tb_apw: checks activation (ReLU, rounding right shift, clamp to 15 or 255)
// on random kernel sums, with and without 2x2 max pooling, against values
// computed here; a pooled word must be written only after the fourth pixel
// of a window.
module tb_apw;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, ce = 0, in_valid = 0, a8 = 0, pool = 0, win_first = 0, win_last = 0;
  logic [4:0] shift = '0;
  logic [15:0][31:0] sum = '0;
  logic out_valid; logic [127:0] out_word;
  apw dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  function automatic int act(input int s, input bit b8, input int sh);
    longint q;
    if (s <= 0) return 0;
    q = sh == 0 ? longint'(s) : (longint'(s) + (longint'(1) << (sh - 1))) >>> sh;
    if (b8) return q > 255 ? 255 : int'(q);
    return q > 15 ? 15 : int'(q);
  endfunction
  initial begin
    int mx [16];
    repeat (2) @(negedge clk);
    rst_n = 1; ce = 1;
    for (int t = 0; t < 400; t++) begin
      a8 = 1'($urandom); shift = 5'($urandom_range(12)); pool = 1'($urandom);
      for (int k = 0; k < 16; k++) mx[k] = 0;
      for (int px = 0; px < (pool ? 4 : 1); px++) begin
        @(negedge clk);
        in_valid = 1; win_first = (px == 0); win_last = !pool || px == 3;
        for (int k = 0; k < 16; k++) begin
          sum[k] = 32'($urandom_range(40000) - 15000);
          if (act(int'($signed(sum[k])), a8, int'(shift)) > mx[k] || px == 0) mx[k] = act(int'($signed(sum[k])), a8, int'(shift));
        end
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (out_valid != win_last) failures++;
      end
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (int'(out_word[k*8 +: 8]) != mx[k]) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d k%0d got %0d exp %0d", t, k, out_word[k*8 +: 8], mx[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
