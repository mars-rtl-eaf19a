// mars_top: MARS, a multi-macro SRAM computing-in-memory CNN accelerator for
// weight-sparse networks.
//
// Top level as in the paper's architecture figure: a controller executing the
// layer instructions of the instruction register file; a ping-pong SRAM
// system of two 512-Kbit feature-map SRAMs behind a ping-pong interface; a
// shunter sharing that SRAM system among four CIM cores; and the four cores,
// each with two 64-Kbit CIM macros (eight macros in all).
//
// Clocking: one system clock (400 MHz in the paper). Each core is clock-
// enabled one system cycle in four by the shunter, i.e. runs at the paper's
// 100 MHz core rate, the four cores staggered by one system cycle.
//
// Use: with the accelerator idle, write the layer instructions (`iw_*`),
// every core's index codes (`il_*`, `il_we` selects the core) and weight-groups
// (`wl_*`), and the input image into the FM SRAM the first instruction reads
// (`h_*`); pulse `start`; wait for `done`; read the result through `h_*`.
// `ev_*` are per-core event strobes for monitoring (group-set computed, CIM
// macro reload started, padding position skipped).
module mars_top
  import mars_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [7:0]          layer,
  // instruction register file load
  input  logic                iw_en,
  input  logic [IRF_AW-1:0]   iw_addr,
  input  instr_t              iw_data,
  // index / weight SRAM load, one write enable per core
  input  logic [NCORES-1:0]   il_we,
  input  logic [IDX_AW-1:0]   il_addr,
  input  logic [15:0]         il_data,
  input  logic [NCORES-1:0]   wl_we,
  input  logic [W_AW-1:0]     wl_addr,
  input  logic [FM_DW-1:0]    wl_data,
  // host access to the FM SRAMs while idle
  input  logic                h_en,
  input  logic                h_we,
  input  logic                h_sel,
  input  logic [FM_AW-1:0]    h_addr,
  input  logic [FM_DW-1:0]    h_wdata,
  output logic [FM_DW-1:0]    h_rdata,
  // monitoring
  output logic [NCORES-1:0]   ev_group,
  output logic [NCORES-1:0]   ev_load,
  output logic [NCORES-1:0]   ev_pad
);
  logic [IRF_AW-1:0]     pc;
  instr_t                instr, cfg;
  logic                  go;
  logic [NCORES-1:0]     core_done, ce, rsp_valid;
  fm_req_t [NCORES-1:0]  core_req;
  fm_req_t               fm_req;
  logic [FM_DW-1:0]      rsp_data, fm_rdata;
  logic [1:0]            s_en, s_we;
  logic [1:0][FM_AW-1:0] s_addr;
  logic [1:0][FM_DW-1:0] s_wdata, s_rdata;

  instr_rf u_irf (
    .clk, .we(iw_en && !busy), .waddr(iw_addr), .wdata(iw_data), .raddr(pc), .rdata(instr)
  );

  controller u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .pc, .instr, .cfg, .go, .core_done, .layer
  );

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    cim_core #(.CORE_ID(c)) u_core (
      .clk, .rst_n, .ce(ce[c]), .go, .cfg, .done(core_done[c]),
      .il_we(il_we[c] && !busy), .il_addr, .il_data,
      .wl_we(wl_we[c] && !busy), .wl_addr, .wl_data,
      .req(core_req[c]), .rsp_valid(rsp_valid[c]), .rsp_data,
      .ev_group(ev_group[c]), .ev_load(ev_load[c]), .ev_pad(ev_pad[c])
    );
  end

  shunter u_shunt (
    .clk, .rst_n, .ce, .core_req, .rsp_valid, .rsp_data, .fm_req, .fm_rdata
  );

  pingpong_if u_pp (
    .clk, .rst_n, .busy, .src_sel(cfg.src_sel), .req(fm_req), .rdata(fm_rdata),
    .h_en, .h_we, .h_sel, .h_addr, .h_wdata, .h_rdata,
    .s_en, .s_we, .s_addr, .s_wdata, .s_rdata
  );

  for (genvar s = 0; s < 2; s++) begin : g_fm
    fm_sram u_fm (
      .clk, .en(s_en[s]), .we(s_we[s]), .addr(s_addr[s]), .wdata(s_wdata[s]), .rdata(s_rdata[s])
    );
  end
endmodule
