// tb_shunter: checks the four-core time-division access. Every core requests
// whenever it is enabled; the accepted core must follow Core1, Core2, Core3,
// Core4, Core1, ... one per system cycle (the paper's shunter timing table),
// so each core is served exactly once every four system cycles; the accepted
// request must be passed unchanged and read data must return to the
// requesting core one cycle later.
module tb_shunter;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] ce, rsp_valid;
  fm_req_t [3:0] core_req;
  logic [127:0] rsp_data, fm_rdata = '0;
  fm_req_t fm_req;
  shunter dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  always_comb begin
    for (int k = 0; k < 4; k++) core_req[k] = '0;
    for (int k = 0; k < 4; k++)
      if (ce[k]) begin
        core_req[k].rd = 1'b1;
        core_req[k].raddr = 12'(k * 1000 + 7);
        core_req[k].wr = (k % 2 == 0);
        core_req[k].waddr = 12'(k);
        core_req[k].wdata = {4{32'(k)}};
      end
  end
  bit armed = 0;
  initial begin
    int prev = -1, last_served[4];
    for (int k = 0; k < 4; k++) last_served[k] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int who;
      @(negedge clk);
      who = -1;
      for (int k = 0; k < 4; k++) if (ce[k]) who = k;
      chk($countones(ce) == 1, $sformatf("one core enabled per system cycle t%0d", t));
      if (prev >= 0) chk(who == (prev + 1) % 4, "round-robin order Core1..Core4");
      chk(fm_req == core_req[who], "accepted request passed unchanged");
      if (last_served[who] >= 0) chk(t - last_served[who] == 4, "each core served every 4 cycles");
      last_served[who] = t;
      @(posedge clk); #1;
      fm_rdata = {4{32'(who) + 32'h100}};   // what the SRAM returns for this accept
      armed = 1;
      prev = who;
      // now the response of the previously accepted core
      chk(rsp_valid == (4'b1 << who), "read response to the requesting core");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // read data seen by the requesting core
  always @(posedge clk) if (rst_n && armed) for (int k = 0; k < 4; k++)
    if (rsp_valid[k]) begin
      checks++; if (rsp_data != {4{32'(k) + 32'h100}}) failures++;
    end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
