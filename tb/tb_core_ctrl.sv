// tb_core_ctrl: the core controller alone, with a modelled index SRAM (random
// sparse kernel-sets, index codes as in the paper's example), a modelled macro
// result valid and APW. For several layer shapes it checks:
//   * each kernel-set is copied into the macros as 16 x n weight-groups, kernel
//     k of the group-set read from weight address 16*i+k landing in macro k/8,
//     partition k%8, at a slot below 64;
//   * the number of macro loads equals the greedy packing of kernel-sets into
//     64 slots;
//   * the number of compute accesses is group-sets x output pixels x passes
//     (1 for 4-bit, 2 for 8-bit activations): zero group-sets cost nothing;
//   * every OFM word (pixel, channel group of this core) is written once, at
//     the right address, with pooling giving a quarter of the pixels;
//   * the pipelined rate: within a kernel-set of n group-sets, two OFM writes
//     are P*n + 5 core cycles apart (P = 1 for 4-bit, 2 for 8-bit activations;
//     four times that with pooling);
//   * the go/done handshake.
module tb_core_ctrl;
  import mars_pkg::*;
  localparam int CID = 1;
  logic clk = 0, rst_n = 0, ce, go = 0, done;
  instr_t cfg = '0;
  logic idx_re; logic [IDX_AW-1:0] idx_raddr; logic [6:0] sas_ngroups; logic sas_first;
  logic [7:0] oy, ox;
  logic w_re; logic [W_AW-1:0] w_raddr; logic [1:0] m_we; logic [2:0] m_wpart; logic [5:0] m_wgrp;
  logic m_cen; logic [5:0] m_grp; logic nib_hi; logic m_dvalid = 0; logic rd_req;
  logic acc_valid, acc_clr, acc_hi, apw_in_valid, win_first, win_last;
  logic apw_out_valid = 0; logic wr_req; logic [FM_AW-1:0] wr_addr; logic ev_group, ev_load;
  core_ctrl #(.CORE_ID(CID)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  logic [15:0] idx_mem [IDX_DEPTH];
  logic [15:0] idx_q;
  int phase = 0;
  assign ce = rst_n && phase == 0;
  assign sas_ngroups = {1'b0, idx_q[14:9]} + 7'd1;
  assign sas_first = idx_q[15];

  int n_cen, n_wr, n_mwe, n_load, last_wraddr;
  int ks_ng [16];                 // group-sets of each kernel-set of this core
  int cyc, last_wr_cyc, last_wr_ks, cur_kg, cur_p, cur_pool, n_rate;
  int wr_count [FM_DEPTH];
  always @(posedge clk) if (rst_n) begin
    phase <= (phase + 1) % 4;
    if (ce) begin
      if (idx_re) idx_q <= idx_mem[idx_raddr];
      m_dvalid <= m_cen;
      apw_out_valid <= apw_in_valid && win_last;
      n_cen  += int'(m_cen);
      n_load += int'(ev_load);
      cyc++;
      if (wr_req) begin
        int j;
        n_wr++; wr_count[wr_addr]++;
        j = (int'(wr_addr) % cur_kg - CID) / 4;
        if (j == last_wr_ks) begin
          n_rate++;
          chk(cyc - last_wr_cyc == (cur_p * ks_ng[j] + 5) * (cur_pool ? 4 : 1),
              $sformatf("write spacing %0d core cycles for n=%0d", cyc - last_wr_cyc, ks_ng[j]));
        end
        last_wr_cyc = cyc; last_wr_ks = j;
      end
      if (|m_we) begin
        n_mwe++;
        chk($countones(m_we) == 1 && m_we[last_wraddr % 16 / 8] && int'(m_wpart) == last_wraddr % 8,
            "weight-group k goes to macro k/8, partition k%8");
      end
      if (w_re) last_wraddr = int'(w_raddr);
    end
  end

  task automatic layer(input int h, input int w, input int cg, input int kg, input bit a8,
                       input bit pad, input bit pool, input int nmin, input int nmax);
    int ng [16], cnt, nks, oh, ow, poh, pow, exp_cen, exp_load, u, exp_mwe;
    cnt = 0; nks = 0; exp_cen = 0; exp_load = 0; u = 0; exp_mwe = 0;
    oh = pad ? h : h - 2; ow = pad ? w : w - 2;
    poh = pool ? oh / 2 : oh; pow = pool ? ow / 2 : ow;
    for (int j = CID; j < kg; j += 4) begin
      ng[nks] = $urandom_range(nmax, nmin);
      ks_ng[nks] = ng[nks];
      for (int g = 0; g < ng[nks]; g++) begin
        idx_mem[cnt] = {g == 0, 6'(ng[nks] - 1), 4'($urandom_range(8)), 5'($urandom_range(cg - 1))};
        cnt++;
      end
      exp_cen += ng[nks] * oh * ow * (a8 ? 2 : 1);
      exp_mwe += 16 * ng[nks];
      if (u == 0 || u + ng[nks] > 64) begin exp_load++; u = 0; end
      u += ng[nks];
      nks++;
    end
    for (int a = 0; a < FM_DEPTH; a++) wr_count[a] = 0;
    n_cen = 0; n_wr = 0; n_mwe = 0; n_load = 0; n_rate = 0;
    cyc = 0; last_wr_ks = -1; cur_kg = kg; cur_p = a8 ? 2 : 1; cur_pool = pool;
    cfg = '0; cfg.h = 8'(h); cfg.w = 8'(w); cfg.cg = 6'(cg); cfg.kg = 6'(kg); cfg.a8 = a8;
    cfg.pad = pad; cfg.pool = pool;
    @(negedge clk); go = 1;
    wait (done);
    @(negedge clk);
    chk(done, "done holds while go is high");
    go = 0;
    wait (!done);
    chk(n_cen == exp_cen, $sformatf("compute accesses %0d, expected %0d", n_cen, exp_cen));
    chk(n_mwe == exp_mwe, $sformatf("macro writes %0d, expected %0d", n_mwe, exp_mwe));
    chk(n_load == exp_load, $sformatf("macro loads %0d, expected %0d", n_load, exp_load));
    chk(nks == 0 || n_rate == nks * (poh * pow - 1), $sformatf("spacing checked %0d times", n_rate));
    chk(n_wr == nks * poh * pow, $sformatf("OFM writes %0d, expected %0d", n_wr, nks * poh * pow));
    for (int j = 0; j < nks; j++)
      for (int p = 0; p < poh * pow; p++)
        chk(wr_count[p * kg + CID + 4 * j] == 1, "OFM word written once at pixel*KG + channel group");
  endtask

  initial begin
    void'($urandom(5));
    repeat (3) @(negedge clk);
    rst_n = 1;
    layer(6, 6, 2, 8, 1, 1, 0, 1, 18);
    layer(8, 8, 3, 13, 0, 0, 1, 20, 27);
    layer(5, 7, 1, 2, 0, 1, 0, 9, 9);
    layer(4, 4, 4, 1, 1, 1, 1, 1, 4);    // no kernel-set for this core
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
