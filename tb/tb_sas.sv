// tb_sas: checks the sparsity address search. First the four index codes of
// the paper's index-code example (first flag only on the first, group count
// 4, positions/channels (0,0) (0,3) (2,1) (5,0)), then random codes, pixels
// and layer shapes against an independent address computation, with and
// without padding.
module tb_sas;
  import mars_pkg::*;
  logic [15:0] idx; logic [7:0] oy, ox, h, w; logic [5:0] cg; logic pad;
  logic [11:0] addr; logic is_pad, first; logic [6:0] ngroups;
  sas dut (.*);
  int checks = 0, failures = 0;

  task automatic chk(input int exp_addr, input bit exp_pad, input bit exp_first, input int exp_n);
    #1;
    checks++;
    if (is_pad != exp_pad || first != exp_first || int'(ngroups) != exp_n ||
        (!exp_pad && int'(addr) != exp_addr)) begin
      failures++;
      if (failures < 10) $display("FAIL idx=%h oy%0d ox%0d: addr %0d/%0d pad %0d/%0d first %0d/%0d n %0d/%0d",
        idx, oy, ox, addr, exp_addr, is_pad, exp_pad, first, exp_first, ngroups, exp_n);
    end
  endtask

  initial begin
    int ex_pos[4] = '{0, 0, 2, 5};
    int ex_ch[4]  = '{0, 3, 1, 0};
    // paper example, 10x10 layer with 4 channel groups, pixel (4,4), padding on
    h = 10; w = 10; cg = 4; pad = 1; oy = 4; ox = 4;
    for (int e = 0; e < 4; e++) begin
      idx = {e == 0, 6'b000011, 4'(ex_pos[e]), 5'(ex_ch[e])};
      chk(((4 + ex_pos[e]/3 - 1) * 10 + (4 + ex_pos[e]%3 - 1)) * 4 + ex_ch[e], 0, e == 0, 4);
    end
    for (int t = 0; t < 5000; t++) begin
      int p, c, n, iy, ix;
      bit f;
      h = 8'($urandom_range(32, 3)); w = 8'($urandom_range(32, 3));
      cg = 6'($urandom_range(4, 1)); pad = 1'($urandom);
      p = $urandom_range(8); c = $urandom_range(int'(cg) - 1); n = $urandom_range(64, 1); f = 1'($urandom);
      oy = 8'($urandom_range(pad ? int'(h) - 1 : int'(h) - 3));
      ox = 8'($urandom_range(pad ? int'(w) - 1 : int'(w) - 3));
      idx = {f, 6'(n - 1), 4'(p), 5'(c)};
      iy = int'(oy) + p / 3 - int'(pad);
      ix = int'(ox) + p % 3 - int'(pad);
      chk((iy * int'(w) + ix) * int'(cg) + c, (iy < 0 || ix < 0 || iy >= int'(h) || ix >= int'(w)), f, n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
