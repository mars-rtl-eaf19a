// tb_cim_macro: checks the CIM macro model. Random weight-groups are written
// into every partition at several addresses; compute accesses with random
// 4-bit inputs must return the 8 exact inner products (signed weights x
// unsigned inputs) one enabled cycle later, and nothing may change while the
// clock enable is low.
module tb_cim_macro;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, ce = 0, we = 0, cen = 0;
  logic [2:0] wpart = '0; logic [5:0] wgrp = '0, grp = '0;
  logic [127:0] wdata = '0; logic [63:0] din = '0;
  logic [7:0][15:0] dout; logic dvalid;
  cim_macro dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [127:0] ref_mem [8][64];
  bit written [64];

  function automatic int dotp(input logic [127:0] w, input logic [63:0] x);
    int s = 0;
    for (int i = 0; i < 16; i++) s += int'($signed(w[i*8 +: 8])) * int'(x[i*4 +: 4]);
    return s;
  endfunction

  initial begin
    void'($urandom(3));
    repeat (2) @(negedge clk);
    rst_n = 1; ce = 1;
    @(negedge clk);
    check_dv0: begin checks++; if (dvalid) failures++; end
    for (int g = 0; g < 64; g += 7) begin
      for (int p = 0; p < 8; p++) begin
        we = 1; wpart = 3'(p); wgrp = 6'(g);
        for (int i = 0; i < 4; i++) wdata[i*32 +: 32] = $urandom;
        ref_mem[p][g] = wdata;
        @(negedge clk);
      end
      written[g] = 1;
    end
    we = 0;
    for (int t = 0; t < 200; t++) begin
      int g;
      do g = int'($urandom_range(63)); while (!written[g]);
      cen = 1; grp = 6'(g); din = {$urandom, $urandom};
      @(negedge clk);
      cen = 0;
      checks++; if (!dvalid) failures++;
      for (int p = 0; p < 8; p++) begin
        checks++;
        if (int'($signed(dout[p])) != dotp(ref_mem[p][g], din)) begin
          failures++;
          if (failures < 10) $display("FAIL g%0d p%0d got %0d exp %0d", g, p, $signed(dout[p]), dotp(ref_mem[p][g], din));
        end
      end
      // hold while ce is low
      if (t % 10 == 0) begin
        logic [7:0][15:0] held;
        held = dout;
        ce = 0; cen = 1; grp = grp + 6'd7; din = ~din;
        @(negedge clk);
        checks++; if (dout != held || !dvalid) failures++;
        ce = 1; cen = 0;
      end
      @(negedge clk);
      checks++; if (dvalid) failures++;
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
