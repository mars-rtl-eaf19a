// pingpong_if: ping-pong interface between the shunter and the two FM SRAMs.
//
// Per layer the instruction's `src_sel` decides which SRAM is the IFM: with
// src_sel = 0 IFM reads go to SRAM1 and OFM writes to SRAM2, with 1 the
// reverse. The next layer flips src_sel, so a layer's output becomes the next
// layer's input without any copy (the paper's ping-pong SRAM system).
// While the accelerator is idle (`busy` low) a host port reaches either SRAM
// (`h_sel`) to load the input image and read the result; this host port is
// this design's choice, the paper does not say how data enter and leave.
// Timing: SRAM read data come one system cycle after the request; `rdata`
// (core side) and `h_rdata` follow the SRAM that was read.
module pingpong_if
  import mars_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             busy,
  input  logic             src_sel,
  // core side (from the shunter)
  input  fm_req_t          req,
  output logic [FM_DW-1:0] rdata,
  // host side
  input  logic             h_en,
  input  logic             h_we,
  input  logic             h_sel,
  input  logic [FM_AW-1:0] h_addr,
  input  logic [FM_DW-1:0] h_wdata,
  output logic [FM_DW-1:0] h_rdata,
  // the two SRAMs: index 0 = SRAM1, 1 = SRAM2
  output logic [1:0]              s_en,
  output logic [1:0]              s_we,
  output logic [1:0][FM_AW-1:0]   s_addr,
  output logic [1:0][FM_DW-1:0]   s_wdata,
  input  logic [1:0][FM_DW-1:0]   s_rdata
);
  logic h_sel_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)               h_sel_q <= 1'b0;
    else if (h_en && !h_we)   h_sel_q <= h_sel;

  always_comb begin
    s_en = '0; s_we = '0; s_addr = '0; s_wdata = '0;
    if (busy) begin
      // IFM side
      s_en[src_sel]    = req.rd;
      s_addr[src_sel]  = req.raddr;
      // OFM side
      s_en[!src_sel]    = req.wr;
      s_we[!src_sel]    = req.wr;
      s_addr[!src_sel]  = req.waddr;
      s_wdata[!src_sel] = req.wdata;
    end else begin
      s_en[h_sel]    = h_en;
      s_we[h_sel]    = h_we;
      s_addr[h_sel]  = h_addr;
      s_wdata[h_sel] = h_wdata;
    end
    rdata   = s_rdata[src_sel];
    h_rdata = s_rdata[h_sel_q];
  end

  always @(posedge clk)
    if (rst_n && !busy) assert (!req.rd && !req.wr) else $error("pingpong_if: core access while idle");
endmodule
