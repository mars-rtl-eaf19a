// tb_weight_sram: writes random words to random addresses, then reads them back:
// read data must appear one clock after the read enable, hold while no read
// is enabled, and a write must not disturb the read data.
module tb_weight_sram;
  logic clk = 0, we = 0, re = 0;
  logic [$clog2(2048)-1:0] waddr = '0, raddr = '0;
  logic [128-1:0] wdata = '0, rdata;
  weight_sram dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [128-1:0] ref_mem [2048];
  bit valid [2048];
  initial begin
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      we = 1; waddr = $urandom_range(2048-1);
      for (int i = 0; i < (128+31)/32; i++) wdata[i*32 +: 32] = $urandom;
      ref_mem[waddr] = wdata; valid[waddr] = 1;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 2048; a++) if (valid[a]) begin
      logic [128-1:0] held;
      re = 1; raddr = a[$clog2(2048)-1:0];
      @(negedge clk);
      re = 0;
      checks++; if (rdata != ref_mem[a]) failures++;
      held = rdata;
      raddr = raddr + 1'b1; we = 1; waddr = raddr; wdata = ~held;
      @(negedge clk);
      we = 0;
      checks++; if (rdata != held) failures++;
      if (valid[waddr]) ref_mem[waddr] = wdata;
      else begin ref_mem[waddr] = wdata; end
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
