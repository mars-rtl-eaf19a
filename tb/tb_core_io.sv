// tb_core_io: checks the system-core IO protocol and input buffer. Requests
// must only be valid in the core's clock-enable cycle, a padding read must not
// be sent and must clear the buffer, returned data must be captured, and the
// 16 CIM inputs must be the low or high nibbles of the buffered bytes.
module tb_core_io;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, ce = 0;
  logic rd_req = 0, rd_pad = 0, wr_req = 0, nib_hi = 0, rsp_valid = 0;
  logic [11:0] rd_addr = '0, wr_addr = '0;
  logic [127:0] wr_data = '0, rsp_data = '0;
  fm_req_t req; logic [63:0] cim_din;
  core_io dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  function automatic logic [63:0] nib(input logic [127:0] b, input bit hi);
    logic [63:0] r;
    for (int i = 0; i < 16; i++) r[i*4 +: 4] = hi ? b[i*8+4 +: 4] : b[i*8 +: 4];
    return r;
  endfunction
  initial begin
    logic [127:0] buf_ref;
    repeat (2) @(negedge clk);
    rst_n = 1;
    buf_ref = '0;
    for (int t = 0; t < 300; t++) begin
      // core cycle: ce high
      @(negedge clk);
      ce = 1; rd_req = 1'($urandom); rd_pad = ($urandom_range(3) == 0); wr_req = 1'($urandom);
      rd_addr = 12'($urandom); wr_addr = 12'($urandom); wr_data = {4{$urandom}};
      #1;
      chk(req.rd == (rd_req && !rd_pad) && req.wr == wr_req, "request valid in ce cycle");
      chk(!req.rd || req.raddr == rd_addr, "read address");
      chk(!req.wr || (req.waddr == wr_addr && req.wdata == wr_data), "write address/data");
      @(negedge clk);
      if (rd_req && rd_pad) buf_ref = '0;
      ce = 0;
      #1;
      chk(!req.rd && !req.wr, "no request outside ce");
      // response one cycle later if a read was sent
      if (rd_req && !rd_pad) begin
        rsp_valid = 1; rsp_data = {$urandom, $urandom, $urandom, $urandom};
        buf_ref = rsp_data;
        @(negedge clk);
        rsp_valid = 0; rsp_data = ~rsp_data;
      end
      nib_hi = 0; #1; chk(cim_din == nib(buf_ref, 0), "low nibbles");
      nib_hi = 1; #1; chk(cim_din == nib(buf_ref, 1), "high nibbles");
      rd_req = 0; wr_req = 0;
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
