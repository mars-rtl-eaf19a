// shunter: time-division access of the four CIM cores to the FM SRAMs.
//
// The cores run at 100 MHz, the system (shunter, ping-pong interface, FM
// SRAMs, controller) at exactly four times that. A two-bit slot counter
// walks 0,1,2,3,0,... at the system clock; in slot k the shunter accepts the
// request of core k and passes it to the ping-pong interface, so each core
// gets one FM access in every core cycle and the accepts go Core1, Core2,
// Core3, Core4, Core1, ... as in the paper's shunter timing table. The slot
// is also core k's clock enable (`ce[k]`), which staggers the four cores by
// one system cycle each, the "Wait" steps of that table.
// A request may carry one IFM read and one OFM write at once (they go to
// different SRAMs). Read data arrives one system cycle after the accept and
// is handed to the requesting core with `rsp_valid[k]`; `rsp_data` is shared.
// The round-robin order is the paper's; using the slot as clock enable is
// this design's way of running the cores at a quarter of the system clock.
module shunter
  import mars_pkg::*;
#(
  parameter int N = NCORES
) (
  input  logic                clk,
  input  logic                rst_n,
  output logic [N-1:0]        ce,
  input  fm_req_t [N-1:0]     core_req,
  output logic [N-1:0]        rsp_valid,
  output logic [FM_DW-1:0]    rsp_data,
  // towards the ping-pong interface
  output fm_req_t             fm_req,
  input  logic [FM_DW-1:0]    fm_rdata
);
  logic [$clog2(N)-1:0] slot, rd_core;
  logic                 rd_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot    <= '0;
      rd_core <= '0;
      rd_pend <= 1'b0;
    end else begin
      slot    <= (slot == $clog2(N)'(N - 1)) ? '0 : slot + 1'b1;
      rd_core <= slot;
      rd_pend <= core_req[slot].rd;
    end
  end

  always_comb begin
    ce        = '0;
    ce[slot]  = 1'b1;
    fm_req    = core_req[slot];
    rsp_valid = '0;
    rsp_valid[rd_core] = rd_pend;
    rsp_data  = fm_rdata;
  end

  // A core only requests in its own slot.
  always @(posedge clk)
    if (rst_n)
      for (int k = 0; k < N; k++)
        if (k != int'(slot)) assert (!core_req[k].rd && !core_req[k].wr)
          else $error("shunter: core %0d requested outside its slot", k);
endmodule
