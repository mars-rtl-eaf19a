// tb_fm_sram: fills the whole 512-Kbit feature-map SRAM with an address-
// dependent pattern, reads every word back (one-clock latency) and checks that
// read data hold while the SRAM is not enabled and across a write.
module tb_fm_sram;
  logic clk = 0, en = 0, we = 0;
  logic [11:0] addr = '0;
  logic [127:0] wdata = '0, rdata;
  fm_sram dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  function automatic logic [127:0] pat(input int a);
    return {4{32'(a) * 32'h9E3779B1 ^ 32'h5A5A0000}} ^ {32'(a), 96'h0};
  endfunction
  initial begin
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 12'(a); wdata = pat(a);
    end
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk); en = 1; we = 0; addr = 12'(a);
      @(negedge clk); en = 0;
      checks++; if (rdata != pat(a)) failures++;
      if (a % 512 == 0) begin
        en = 1; we = 1; addr = 12'(a); wdata = pat(a);
        @(negedge clk); en = 0; we = 0;
        checks++; if (rdata != pat(a)) failures++;
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
