// cim_core: one CIM core of MARS.
//
// Two CIM macros share one control path and one 16-input vector, so a compute
// cycle activates the same group-set slot in 16 partitions and yields the
// inner products of 16 kernels at once (kernels 0-7 from macro 0, 8-15 from
// macro 1). Around them: the index SRAM (index codes of the stored group-sets),
// the weight SRAM (their weights, used to reload the macros), SAS (index code
// -> IFM address), the IO protocol with the 128-bit input buffer, the
// accumulator system (shift adder + kernel adder), APW (activation, pooling,
// output writer) and the core controller. This structure is the paper's.
//
// Interface: the core runs on the system clock with clock enable `ce`, high
// one system cycle in four (its 100 MHz rate); the shunter serves its FM
// request in that same cycle and returns read data in the next (`rsp_valid`).
// `go`/`done` is a four-phase handshake with the top controller; `cfg` is the
// layer instruction, held during the layer. The index and weight SRAMs are
// written from outside through `il_*` / `wl_*` while the core is idle.
module cim_core
  import mars_pkg::*;
#(
  parameter int CORE_ID = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ce,
  input  logic              go,
  input  instr_t            cfg,
  output logic              done,
  // loading of the index and weight SRAMs
  input  logic              il_we,
  input  logic [IDX_AW-1:0] il_addr,
  input  logic [15:0]       il_data,
  input  logic              wl_we,
  input  logic [W_AW-1:0]   wl_addr,
  input  logic [FM_DW-1:0]  wl_data,
  // shunter side
  output fm_req_t           req,
  input  logic              rsp_valid,
  input  logic [FM_DW-1:0]  rsp_data,
  // event strobes for monitoring
  output logic              ev_group,
  output logic              ev_load,
  output logic              ev_pad
);
  logic                      idx_re, w_re, m_cen, nib_hi, rd_req, wr_req;
  logic [IDX_AW-1:0]         idx_raddr;
  logic [15:0]               idx_rdata;
  logic [W_AW-1:0]           w_raddr;
  logic [FM_DW-1:0]          w_rdata;
  logic [1:0]                m_we;
  logic [2:0]                m_wpart;
  logic [5:0]                m_wgrp, m_grp;
  logic [6:0]                sas_ngroups;
  logic [7:0]                oy, ox;
  logic [FM_AW-1:0]          sas_addr, wr_addr;
  logic                      sas_pad, sas_first;
  logic [GW*INBITS-1:0]      cim_din;
  logic [PARTS-1:0][MOUTW-1:0] dout0, dout1;
  logic                      dvalid0, dvalid1;
  logic                      acc_valid, acc_clr, acc_hi;
  logic [LANES-1:0][ACCW-1:0] sum;
  logic                      apw_in_valid, win_first, win_last, apw_out_valid;
  logic [FM_DW-1:0]          apw_word;

  core_ctrl #(.CORE_ID(CORE_ID)) u_ctrl (
    .clk, .rst_n, .ce, .go, .cfg, .done,
    .idx_re, .idx_raddr, .sas_ngroups, .sas_first, .oy, .ox,
    .w_re, .w_raddr, .m_we, .m_wpart, .m_wgrp,
    .m_cen, .m_grp, .nib_hi, .m_dvalid(dvalid0),
    .rd_req,
    .acc_valid, .acc_clr, .acc_hi,
    .apw_in_valid, .win_first, .win_last, .apw_out_valid,
    .wr_req, .wr_addr,
    .ev_group, .ev_load
  );

  index_sram u_idx (
    .clk, .we(il_we), .waddr(il_addr), .wdata(il_data),
    .re(ce && idx_re), .raddr(idx_raddr), .rdata(idx_rdata)
  );

  weight_sram u_wsram (
    .clk, .we(wl_we), .waddr(wl_addr), .wdata(wl_data),
    .re(ce && w_re), .raddr(w_raddr), .rdata(w_rdata)
  );

  sas u_sas (
    .idx(idx_rdata), .oy, .ox, .h(cfg.h), .w(cfg.w), .cg(cfg.cg), .pad(cfg.pad),
    .addr(sas_addr), .is_pad(sas_pad), .first(sas_first), .ngroups(sas_ngroups)
  );

  core_io u_io (
    .clk, .rst_n, .ce,
    .rd_req, .rd_addr(sas_addr), .rd_pad(sas_pad),
    .wr_req, .wr_addr, .wr_data(apw_word), .nib_hi,
    .req, .rsp_valid, .rsp_data, .cim_din
  );

  cim_macro u_cim1 (
    .clk, .rst_n, .ce, .we(m_we[0]), .wpart(m_wpart), .wgrp(m_wgrp), .wdata(w_rdata),
    .cen(m_cen), .grp(m_grp), .din(cim_din), .dout(dout0), .dvalid(dvalid0)
  );

  cim_macro u_cim2 (
    .clk, .rst_n, .ce, .we(m_we[1]), .wpart(m_wpart), .wgrp(m_wgrp), .wdata(w_rdata),
    .cen(m_cen), .grp(m_grp), .din(cim_din), .dout(dout1), .dvalid(dvalid1)
  );

  acc_system u_acc (
    .clk, .rst_n, .ce, .in_valid(acc_valid), .clr(acc_clr), .nib_hi(acc_hi),
    .in({dout1, dout0}), .sum
  );

  apw u_apw (
    .clk, .rst_n, .ce, .in_valid(apw_in_valid), .sum, .a8(cfg.a8), .shift(cfg.shift),
    .pool(cfg.pool), .win_first, .win_last, .out_valid(apw_out_valid), .out_word(apw_word)
  );

  assign ev_pad = ce && rd_req && sas_pad;

  // Both macros share control, so their results are always valid together.
  always @(posedge clk) if (rst_n) assert (dvalid0 == dvalid1);
endmodule
