// tb_instr_rf: writes random instructions into all 32 entries and reads them
// back through the asynchronous read port, in random order.
module tb_instr_rf;
  import mars_pkg::*;
  logic clk = 0, we = 0; logic [4:0] waddr = '0, raddr = '0;
  instr_t wdata = '0, rdata;
  instr_rf dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  instr_t ref_rf [32];
  initial begin
    for (int a = 0; a < 32; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = instr_t'({$urandom, $urandom}); ref_rf[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      raddr = 5'($urandom); #1;
      checks++; if (rdata != ref_rf[raddr]) failures++;
      @(negedge clk);
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
