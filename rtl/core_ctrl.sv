// core_ctrl: controller of one CIM core.
//
// A layer's work is split over the four cores by output-channel group: core
// c computes the kernel-sets (16 kernels each) c, c+4, c+8, ... and writes
// them to OFM channel group c+4j. Only the nonzero group-sets of a kernel-set
// are stored; each has an index code in the index SRAM, and the weight SRAM
// holds its 16 weight-groups at 16*index_address + kernel.
//
// Load phase: starting at the next unloaded kernel-set, the controller reads
// its first index code (group count), and if the kernel-set still fits in the
// free group-set slots of the CIM macros (64 per macro) copies its
// weight-groups from the weight SRAM into the macros, kernel k going to
// macro k/8, partition k%8, slot = next free slot. It continues until the
// next kernel-set does not fit or none is left. Several sparse kernel-sets
// thus share one macro load, as in the paper's sparse-mapping figure.
// Compute phase: for every loaded kernel-set and every output pixel (in 2x2
// window order when pooling), the stored group-sets g = 0..n-1 of the
// kernel-set stream through a three-stage pipeline clocked by the core clock,
// with P = 1 core cycle per group-set for 4-bit and P = 2 for 8-bit
// activations (C_RUN, cycle counter tc from 0):
//   tc = P*g     read index code g
//   tc = P*g+1   SAS address, IFM read via shunter into the input buffer
//   tc = P*g+2   compute low nibble        tc = P*g+3  high nibble (8-bit)
// so the macros compute in every core cycle, as in the paper, where a core
// reaches the FM SRAM once every four system cycles. The read of group g+1
// lands in the input buffer only after the last pass of group g has used it.
// The pixel ends with C_DRAIN (last accumulation), C_ACT (APW) and C_WR (OFM
// write): P*n + 5 core cycles per pixel and kernel-set.
// Zero group-sets are never stored, so they cost no cycle: that is the
// sparsity skip of the paper. When all loaded kernel-sets are done the
// controller reloads the macros with the next kernel-sets.
//
// Handshake with the top controller (this design's choice): when `go` is seen
// high in IDLE the layer in `cfg` starts; `done` rises at the end and stays
// until `go` falls. All state advances only on `ce`, the core's one-in-four
// clock enable. The load/compute split, the state sequence and the
// group-set-to-macro placement are this design's reading of the paper, which
// gives the function of the core controller but not its insides.
module core_ctrl
  import mars_pkg::*;
#(
  parameter int CORE_ID = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ce,
  input  logic                go,
  input  instr_t              cfg,
  output logic                done,
  // index SRAM / SAS
  output logic                idx_re,
  output logic [IDX_AW-1:0]   idx_raddr,
  input  logic [6:0]          sas_ngroups,
  input  logic                sas_first,
  output logic [7:0]          oy,
  output logic [7:0]          ox,
  // weight SRAM -> CIM macros
  output logic                w_re,
  output logic [W_AW-1:0]     w_raddr,
  output logic [1:0]          m_we,
  output logic [2:0]          m_wpart,
  output logic [5:0]          m_wgrp,
  // CIM compute
  output logic                m_cen,
  output logic [5:0]          m_grp,
  output logic                nib_hi,
  input  logic                m_dvalid,
  // IFM read request (address from SAS)
  output logic                rd_req,
  // accumulator
  output logic                acc_valid,
  output logic                acc_clr,
  output logic                acc_hi,
  // APW and OFM write
  output logic                apw_in_valid,
  output logic                win_first,
  output logic                win_last,
  input  logic                apw_out_valid,
  output logic                wr_req,
  output logic [FM_AW-1:0]    wr_addr,
  // event strobes (one per enabled cycle in which the event happens)
  output logic                ev_group,    // a stored group-set was computed
  output logic                ev_load      // a macro (re)load started
);
  typedef enum logic [3:0] {
    IDLE, L_IDX, L_CHK, L_COPY, C_RUN, C_DRAIN, C_ACT, C_WR, FIN
  } state_t;

  state_t            state;
  logic [6:0]        nks, ks_loaded, ks_done;
  logic [IDX_AW:0]   ip;
  logic [IDX_AW-1:0] chunk_base;
  logic [6:0]        used, n_cur, ks_slot;
  logic [10:0]       wcount, wk;
  logic              wv;
  logic [7:0]        by, bx;
  logic              dy, dx;
  logic              tag_clr, tag_hi;
  logic [7:0]        oh, ow;
  logic [7:0]        step;
  logic              last_in_win, last_pixel;
  logic [FM_AW-1:0]  opix;
  logic [7:0]        ocg;
  logic [7:0]        tc;              // core cycle within the pixel (C_RUN)
  logic [7:0]        tr, tm;          // tc - 1, tc - 2
  logic [6:0]        gi, gr, gm;      // group of the index, request, compute stage
  logic              pr, pm;          // a stage's cycle is its group's first (pr) / high pass (pm)
  logic              req_v, cim_v, run_end;

  always_comb begin
    oh          = cfg.pad ? cfg.h : cfg.h - 8'd2;
    ow          = cfg.pad ? cfg.w : cfg.w - 8'd2;
    step        = cfg.pool ? 8'd2 : 8'd1;
    oy          = by + {7'd0, dy};
    ox          = bx + {7'd0, dx};
    last_in_win = !cfg.pool || (dy && dx);
    last_pixel  = last_in_win && (bx + step >= ow) && (by + step >= oh);
    ocg         = 8'(CORE_ID) + 8'({ks_done, 2'b00});
    opix        = cfg.pool ? FM_AW'(32'(by >> 1) * 32'(ow >> 1) + 32'(bx >> 1))
                           : FM_AW'(32'(by) * 32'(ow) + 32'(bx));
    wr_addr     = FM_AW'(32'(opix) * 32'(cfg.kg) + 32'(ocg));
    // pipeline stages of C_RUN
    tr          = tc - 8'd1;
    tm          = tc - 8'd2;
    gi          = cfg.a8 ? 7'(tc >> 1) : 7'(tc);
    gr          = cfg.a8 ? 7'(tr >> 1) : 7'(tr);
    gm          = cfg.a8 ? 7'(tm >> 1) : 7'(tm);
    pr          = !cfg.a8 || !tr[0];
    pm          = cfg.a8 && tm[0];
    // n_cur is loaded from the index code of group 0 at tc = 1
    req_v       = (tc >= 8'd1) && pr && (tc == 8'd1 || gr < n_cur);
    cim_v       = (tc >= 8'd2) && (gm < n_cur);
    run_end     = (tc >= 8'd2) && (gm + 7'd1 == n_cur) && (pm || !cfg.a8);
  end

  // Outputs decoded from the state.
  always_comb begin
    idx_re       = 1'b0;
    idx_raddr    = '0;
    w_re         = 1'b0;
    w_raddr      = '0;
    m_we         = '0;
    m_wpart      = wk[2:0];
    m_wgrp       = 6'(used + 7'(wk[10:4]));
    m_cen        = 1'b0;
    m_grp        = 6'(ks_slot);
    nib_hi       = 1'b0;
    rd_req       = 1'b0;
    apw_in_valid = 1'b0;
    wr_req       = 1'b0;
    done         = (state == FIN);
    ev_group     = 1'b0;
    ev_load      = 1'b0;
    win_first    = !cfg.pool || (!dy && !dx);
    win_last     = last_in_win;
    unique case (state)
      L_IDX:  begin
                idx_re    = (ks_loaded != nks);
                idx_raddr = ip[IDX_AW-1:0];
                ev_load   = (ks_loaded != nks) && (used == 0);
              end
      L_COPY: begin
                w_re    = (wcount < {n_cur, 4'b0000});
                w_raddr = W_AW'({ip[IDX_AW-1:0], 4'b0000} + wcount);
                m_we[wk[3]] = wv;
              end
      C_RUN:  begin
                // index reads beyond the last group are harmless and unused
                idx_re    = !cfg.a8 || !tc[0];
                idx_raddr = IDX_AW'(chunk_base + ks_slot + gi);
                rd_req    = req_v;
                m_cen     = cim_v;
                m_grp     = 6'(ks_slot + gm);
                nib_hi    = pm;
                ev_group  = cim_v && !pm;
              end
      C_ACT:  apw_in_valid = 1'b1;
      C_WR:   wr_req = apw_out_valid;
      default: ;
    endcase
  end

  assign acc_valid = m_dvalid;
  assign acc_clr   = tag_clr;
  assign acc_hi    = tag_hi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      nks <= '0; ks_loaded <= '0; ks_done <= '0;
      ip <= '0; chunk_base <= '0; used <= '0; n_cur <= '0;
      ks_slot <= '0; wcount <= '0; wk <= '0; wv <= 1'b0;
      by <= '0; bx <= '0; dy <= 1'b0; dx <= 1'b0;
      tag_clr <= 1'b0; tag_hi <= 1'b0;
    end else if (ce) begin
      unique case (state)
        IDLE: if (go) begin
          nks        <= (cfg.kg > 6'(CORE_ID)) ? 7'((cfg.kg - 6'(CORE_ID) + 6'd3) >> 2) : 7'd0;
          ks_loaded  <= '0;
          ks_done    <= '0;
          ip         <= {1'b0, cfg.idx_base};
          chunk_base <= cfg.idx_base;
          used       <= '0;
          state      <= L_IDX;
        end
        L_IDX: begin
          if (ks_loaded != nks)  state <= L_CHK;
          else if (used == 0)    state <= FIN;
          else begin
            ks_slot <= '0;
            by <= '0; bx <= '0; dy <= 1'b0; dx <= 1'b0;
            tc <= '0; state <= C_RUN;
          end
        end
        L_CHK: begin
          if (used + sas_ngroups <= 7'(GROUPS)) begin
            n_cur  <= sas_ngroups;
            wcount <= '0;
            wv     <= 1'b0;
            state  <= L_COPY;
          end else begin
            ks_slot <= '0;
            by <= '0; bx <= '0; dy <= 1'b0; dx <= 1'b0;
            tc <= '0; state <= C_RUN;
          end
        end
        L_COPY: begin
          if (wcount < {n_cur, 4'b0000}) begin
            wv     <= 1'b1;
            wk     <= wcount;
            wcount <= wcount + 11'd1;
          end else begin
            wv <= 1'b0;
            if (!wv) begin
              ip        <= ip + (IDX_AW+1)'(n_cur);
              used      <= used + n_cur;
              ks_loaded <= ks_loaded + 7'd1;
              state     <= L_IDX;
            end
          end
        end
        C_RUN: begin
          if (tc == 8'd1) n_cur <= sas_ngroups;
          tag_clr <= cim_v && (gm == 0) && !pm;
          tag_hi  <= pm;
          if (run_end) state <= C_DRAIN;
          tc <= tc + 8'd1;
        end
        C_DRAIN: state <= C_ACT;
        C_ACT:   state <= C_WR;
        C_WR: begin
          if (!last_pixel) begin
            tc <= '0; state <= C_RUN;
            if (cfg.pool && !dx)      dx <= 1'b1;
            else if (cfg.pool && !dy) begin dx <= 1'b0; dy <= 1'b1; end
            else begin
              dx <= 1'b0; dy <= 1'b0;
              if (bx + step >= ow) begin bx <= '0; by <= by + step; end
              else bx <= bx + step;
            end
          end else begin
            // kernel-set finished
            by <= '0; bx <= '0; dy <= 1'b0; dx <= 1'b0;
            ks_done <= ks_done + 7'd1;
            if (ks_slot + n_cur == used) begin
              used       <= '0;
              chunk_base <= ip[IDX_AW-1:0];
              state      <= L_IDX;
            end else begin
              ks_slot <= ks_slot + n_cur;
              tc <= '0; state <= C_RUN;
            end
          end
        end
        FIN: if (!go) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  // A kernel-set is entered at its first group-set (index bit 15).
  always @(posedge clk)
    if (rst_n && ce && (state == L_CHK || (state == C_RUN && tc == 8'd1)))
      assert (sas_first) else $error("core_ctrl: kernel-set does not start at a first group");
  // The macro may not be written and computed in the same cycle.
  always @(posedge clk) if (rst_n && ce) assert (!(|m_we && m_cen));
endmodule
