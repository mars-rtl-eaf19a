// core_io: system-core IO protocol and the core's 128-bit input buffer.
//
// A core runs at a quarter of the system clock. The shunter serves core k in
// system cycle k of every four; that cycle is also core k's clock enable `ce`.
// core_io gathers what the core controller wants from the feature-map SRAMs
// into one fm_req_t: an IFM read (address from SAS) and/or an OFM write (the
// word from APW). The request is only valid in the core's own `ce` cycle, so
// the shunter never sees a stale request.
//
// The IFM word comes back one system cycle after the request (`rsp_valid`)
// and is captured in the input buffer, which then holds 16 channels x 8 bits.
// A read that SAS flagged as padding is not sent; the buffer is cleared
// instead. Towards the CIM macros the buffer gives 16 unsigned 4-bit inputs:
// the low nibbles, or the high nibbles when `nib_hi` is set (second pass of
// 8-bit activations). The nibble split follows the 4-bit macro input of the
// paper; the protocol itself is this design's choice.
module core_io
  import mars_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  // from the core controller / SAS / APW
  input  logic                 rd_req,
  input  logic [FM_AW-1:0]     rd_addr,
  input  logic                 rd_pad,
  input  logic                 wr_req,
  input  logic [FM_AW-1:0]     wr_addr,
  input  logic [FM_DW-1:0]     wr_data,
  input  logic                 nib_hi,
  // to / from the shunter
  output fm_req_t              req,
  input  logic                 rsp_valid,
  input  logic [FM_DW-1:0]     rsp_data,
  // to the CIM macros
  output logic [GW*INBITS-1:0] cim_din
);
  logic [FM_DW-1:0] buffer;

  always_comb begin
    req       = '0;
    req.rd    = ce && rd_req && !rd_pad;
    req.raddr = rd_addr;
    req.wr    = ce && wr_req;
    req.waddr = wr_addr;
    req.wdata = wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       buffer <= '0;
    else if (ce && rd_req && rd_pad)  buffer <= '0;
    else if (rsp_valid)               buffer <= rsp_data;
  end

  always_comb
    for (int i = 0; i < GW; i++)
      cim_din[i*INBITS +: INBITS] = nib_hi ? buffer[i*8+4 +: 4] : buffer[i*8 +: 4];
endmodule
