// tb_acc_system: feeds random 16-lane CIM outputs as kernel sums of random
// length, with 4-bit (one pass) and 8-bit (low then high nibble pass)
// activations, and compares the 16 accumulators with sums computed here;
// also checks that nothing is added while the clock enable is low.
module tb_acc_system;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, ce = 0, in_valid = 0, clr = 0, nib_hi = 0;
  logic [15:0][15:0] in = '0;
  logic [15:0][31:0] sum;
  acc_system dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    longint r [16];
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      int ng;
      bit a8;
      ng = $urandom_range(20, 1); a8 = 1'($urandom);
      for (int k = 0; k < 16; k++) r[k] = 0;
      for (int g = 0; g < ng; g++)
        for (int pass = 0; pass < (a8 ? 2 : 1); pass++) begin
          ce = 1; in_valid = 1; clr = (g == 0 && pass == 0); nib_hi = (pass == 1);
          for (int k = 0; k < 16; k++) begin
            in[k] = 16'($urandom_range(60000) - 30000);
            r[k] = (clr ? 0 : r[k]) + (longint'($signed(in[k])) << (nib_hi ? 4 : 0));
          end
          @(negedge clk);
          // a disabled cycle in between must not add
          if ($urandom_range(3) == 0) begin
            ce = 0; in[0] = ~in[0];
            @(negedge clk);
          end
        end
      in_valid = 0;
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (longint'($signed(sum[k])) != r[k]) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d k%0d got %0d exp %0d", t, k, $signed(sum[k]), r[k]);
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
