// tb_controller: runs programs of 1 to 6 layers against four modelled cores
// that finish after random delays. Checks that each layer's instruction is
// presented in order, that `go` stays high until all four cores are done and
// low until all have dropped done, that the run stops after the instruction
// marked last, and the `done` pulse and layer count.
module tb_controller;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, go; logic [4:0] pc; instr_t instr, cfg;
  logic [3:0] core_done = '0; logic [7:0] layer;
  instr_t prog [32];
  controller dut (.*);
  assign instr = prog[pc];
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  // core models: finish some cycles after go, drop done some cycles after go falls
  int cnt [4];
  always @(posedge clk) for (int k = 0; k < 4; k++) begin
    if (go && !core_done[k]) begin
      if (cnt[k] == 0) cnt[k] <= $urandom_range(20, 1);
      else if (cnt[k] == 1) begin core_done[k] <= 1'b1; cnt[k] <= 0; end
      else cnt[k] <= cnt[k] - 1;
    end else if (!go && core_done[k]) begin
      if ($urandom_range(2) == 0) core_done[k] <= 1'b0;
    end
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      int nl, seen;
      nl = $urandom_range(6, 1);
      for (int i = 0; i < 32; i++) begin
        prog[i] = instr_t'({$urandom, $urandom});
        prog[i].last = (i == nl - 1);
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      chk(busy, "busy after start");
      seen = 0;
      while (!done) begin
        @(negedge clk);
        if (go && seen < 32) begin
          if (seen == 0 || cfg != prog[seen - 1]) begin
            chk(cfg == prog[seen], $sformatf("run %0d layer %0d instruction", run, seen));
            seen++;
          end
        end
      end
      chk(seen == nl, $sformatf("run %0d: %0d layers executed, %0d expected", run, seen, nl));
      chk(layer == 8'(nl), "layer count");
      @(negedge clk);
      chk(!busy && !done, "idle after the last layer, done is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // go may only fall once every core is done, and rise only when none is
  logic go_q;
  always @(posedge clk) begin
    go_q <= go;
    if (rst_n && go_q && !go) begin checks++; if (!(&core_done)) failures++; end
    if (rst_n && !go_q && go) begin checks++; if (|core_done) failures++; end
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
