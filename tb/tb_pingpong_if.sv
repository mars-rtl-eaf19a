// tb_pingpong_if: checks the ping-pong routing with two FM SRAMs attached.
// While idle the host port writes and reads either SRAM; while busy, IFM
// reads must reach SRAM[src_sel] and OFM writes SRAM[!src_sel], for both
// directions, and the read data must come from the IFM SRAM.
module tb_pingpong_if;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, busy = 0, src_sel = 0;
  fm_req_t req = '0; logic [127:0] rdata;
  logic h_en = 0, h_we = 0, h_sel = 0; logic [11:0] h_addr = '0; logic [127:0] h_wdata = '0, h_rdata;
  logic [1:0] s_en, s_we; logic [1:0][11:0] s_addr; logic [1:0][127:0] s_wdata, s_rdata;
  pingpong_if dut (.*);
  for (genvar s = 0; s < 2; s++) begin : g_fm
    fm_sram u (.clk, .en(s_en[s]), .we(s_we[s]), .addr(s_addr[s]), .wdata(s_wdata[s]), .rdata(s_rdata[s]));
  end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  function automatic logic [127:0] pat(input int s, input int a);
    return {32'(s), 32'(a), 32'hC0DE0000 + 32'(a), 32'(s * 7 + a)};
  endfunction
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // host fills both SRAMs
    for (int s = 0; s < 2; s++) for (int a = 0; a < 64; a++) begin
      h_en = 1; h_we = 1; h_sel = s[0]; h_addr = 12'(a); h_wdata = pat(s, a); @(negedge clk);
    end
    h_en = 0; h_we = 0;
    for (int dir = 0; dir < 2; dir++) begin
      busy = 1; src_sel = dir[0];
      for (int a = 0; a < 32; a++) begin
        // read IFM word a and write OFM word a+32 in the same request
        req.rd = 1; req.raddr = 12'(a); req.wr = 1; req.waddr = 12'(a + 32); req.wdata = ~pat(9, a);
        @(negedge clk);
        req = '0;
        chk(rdata == pat(dir, a), $sformatf("IFM read dir %0d a %0d", dir, a));
      end
      busy = 0;
      // host reads back: OFM words changed, IFM words untouched
      for (int a = 0; a < 32; a++) begin
        h_en = 1; h_we = 0; h_sel = !dir[0]; h_addr = 12'(a + 32); @(negedge clk); h_en = 0;
        chk(h_rdata == ~pat(9, a), "OFM write landed in the other SRAM");
        h_en = 1; h_sel = dir[0]; h_addr = 12'(a + 32); @(negedge clk); h_en = 0;
        chk(h_rdata == pat(dir, a + 32), "IFM SRAM not written");
      end
      // restore
      for (int a = 32; a < 64; a++) begin
        h_en = 1; h_we = 1; h_sel = !dir[0]; h_addr = 12'(a); h_wdata = pat(!dir[0], a); @(negedge clk);
      end
      h_en = 0; h_we = 0;
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
