// tb_mars_top: end-to-end test of MARS at its default sizes.
//
// Runs a two-layer sparse network through the whole accelerator and compares
// both output feature maps with a golden model computed here from the same
// random data:
//   layer 0: 8x8 input, 32 channels (8-bit), 80 kernels, zero padding,
//            8-bit activations (two CIM passes per group-set), IFM in SRAM1;
//   layer 1: its 8x8x80 output as input, 144 kernels, no padding, 4-bit
//            activations (low nibbles), 2x2 max pooling, IFM in SRAM2
//            (ping-pong switch), output back into SRAM1.
// Every kernel-set (16 kernels) keeps a random subset of its group-sets
// (3x3 position x 16-channel group); only those are loaded, with index codes
// built as the paper's index-code table describes. Layer 1 gives core 0 more
// group-sets than its CIM macros hold, forcing a reload mid-layer.
// Mechanism counters: group-sets computed (must equal the number of stored
// group-sets times output pixels, i.e. zero groups are skipped), CIM reloads,
// padding positions, both activation widths, pooling, ping-pong direction,
// and all four cores served by the shunter within one 4-cycle round.
module tb_mars_top;
  import mars_pkg::*;

  localparam int NL = 2;
  localparam int MAXKS = 9, MAXG = 45;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [7:0] layer;
  logic iw_en = 0; logic [IRF_AW-1:0] iw_addr = '0; instr_t iw_data = '0;
  logic [NCORES-1:0] il_we = '0; logic [IDX_AW-1:0] il_addr = '0; logic [15:0] il_data = '0;
  logic [NCORES-1:0] wl_we = '0; logic [W_AW-1:0] wl_addr = '0; logic [FM_DW-1:0] wl_data = '0;
  logic h_en = 0, h_we = 0, h_sel = 0; logic [FM_AW-1:0] h_addr = '0;
  logic [FM_DW-1:0] h_wdata = '0, h_rdata;
  logic [NCORES-1:0] ev_group, ev_load, ev_pad;

  mars_top dut (.*);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // layer shapes
  int H[NL]  = '{8, 8};
  int W[NL]  = '{8, 8};
  int CG[NL] = '{2, 5};
  int KG[NL] = '{5, 9};
  bit A8[NL] = '{1, 0};
  bit PAD[NL] = '{1, 0};
  bit POOL[NL] = '{0, 1};
  int SH[NL] = '{11, 9};
  int IBASE[NL] = '{0, 24};

  // sparse weights: per layer, kernel-set (ocg), group: position, channel group, weights
  int ng   [NL][MAXKS];
  int gpos [NL][MAXKS][MAXG];
  int gch  [NL][MAXKS][MAXG];
  byte wt  [NL][MAXKS][MAXG][16][16];   // [.. group][kernel][channel in group]
  // feature maps: fm[l] is the input of layer l, fm[NL] the final output
  int fm [NL+1][8][8][144];

  int exp_groups = 0, got_groups = 0, got_loads = 0, got_pads = 0;
  int exp_loads[NCORES];
  int rounds_all4 = 0;
  bit pp_seen = 0;
  logic [NCORES-1:0] served_win;
  int win_cnt = 0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCORES; c++) begin
      got_groups += int'(ev_group[c] && dut.ce[c]);
      got_loads  += int'(ev_load[c]  && dut.ce[c]);
      got_pads   += int'(ev_pad[c]);
    end
    // shunter: are all four cores served within one 4-cycle round?
    if (win_cnt == 0) served_win = '0;
    if (dut.fm_req.rd) served_win[dut.u_shunt.slot] = 1'b1;
    win_cnt = (win_cnt + 1) % 4;
    if (win_cnt == 0 && &served_win) rounds_all4++;
    if (busy && dut.cfg.src_sel && dut.fm_req.wr) pp_seen = 1;
  end

  function automatic int act(input longint s, input bit a8, input int sh);
    longint q;
    if (s <= 0) return 0;
    q = (s + (longint'(1) << (sh - 1))) >>> sh;
    if (a8) return (q > 255) ? 255 : int'(q);
    return (q > 15) ? 15 : int'(q);
  endfunction

  // golden convolution of layer l
  task automatic golden(input int l);
    int oh, ow, p;
    longint s;
    int a[8][8][144];
    oh = PAD[l] ? H[l] : H[l] - 2;
    ow = PAD[l] ? W[l] : W[l] - 2;
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 0; ox < ow; ox++)
        for (int j = 0; j < KG[l]; j++)
          for (int k = 0; k < 16; k++) begin
            s = 0;
            for (int g = 0; g < ng[l][j]; g++) begin
              int iy, ix;
              iy = oy + gpos[l][j][g] / 3 - (PAD[l] ? 1 : 0);
              ix = ox + gpos[l][j][g] % 3 - (PAD[l] ? 1 : 0);
              if (iy >= 0 && ix >= 0 && iy < H[l] && ix < W[l])
                for (int i = 0; i < 16; i++) begin
                  int x;
                  x = fm[l][iy][ix][gch[l][j][g]*16 + i];
                  if (!A8[l]) x = x & 15;
                  s += longint'(wt[l][j][g][k][i]) * x;
                end
            end
            a[oy][ox][j*16+k] = act(s, A8[l], SH[l]);
          end
    for (int oy = 0; oy < 8; oy++) for (int ox = 0; ox < 8; ox++)
      for (int c = 0; c < 144; c++) fm[l+1][oy][ox][c] = 0;
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 0; ox < ow; ox++)
        for (int c = 0; c < KG[l]*16; c++)
          if (!POOL[l]) fm[l+1][oy][ox][c] = a[oy][ox][c];
          else if (oy % 2 == 0 && ox % 2 == 0) begin
            p = a[oy][ox][c];
            if (a[oy][ox+1][c] > p) p = a[oy][ox+1][c];
            if (a[oy+1][ox][c] > p) p = a[oy+1][ox][c];
            if (a[oy+1][ox+1][c] > p) p = a[oy+1][ox+1][c];
            fm[l+1][oy/2][ox/2][c] = p;
          end
  endtask

  task automatic tick(); @(negedge clk); endtask

  initial begin
    int cnt[NCORES];
    void'($urandom(7));
    // random input image, 8 bit
    for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) for (int c = 0; c < 144; c++)
      fm[0][y][x][c] = (c < CG[0]*16) ? int'($urandom_range(255)) : 0;
    // random sparse kernels
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < KG[l]; j++) begin
        int npos, used[MAXG];
        npos = 9 * CG[l];
        ng[l][j] = (l == 0) ? int'($urandom_range(12, 3)) : int'($urandom_range(34, 25));
        for (int q = 0; q < npos; q++) used[q] = 0;
        for (int g = 0; g < ng[l][j]; g++) begin
          int q;
          do q = int'($urandom_range(npos - 1)); while (used[q]);
          used[q] = 1;
          gpos[l][j][g] = q % 9;
          gch[l][j][g]  = q / 9;
          for (int k = 0; k < 16; k++) for (int i = 0; i < 16; i++)
            wt[l][j][g][k][i] = byte'(int'($urandom_range(254)) - 127);
        end
      end

    repeat (4) tick();
    rst_n = 1;
    tick();

    // instructions
    for (int l = 0; l < NL; l++) begin
      instr_t ins;
      ins = '0;
      ins.last = (l == NL - 1); ins.src_sel = l[0]; ins.a8 = A8[l]; ins.pool = POOL[l];
      ins.pad = PAD[l]; ins.h = 8'(H[l]); ins.w = 8'(W[l]); ins.cg = 6'(CG[l]); ins.kg = 6'(KG[l]);
      ins.shift = 5'(SH[l]); ins.idx_base = IDX_AW'(IBASE[l]);
      iw_en = 1; iw_addr = IRF_AW'(l); iw_data = ins; tick();
    end
    iw_en = 0;

    // index codes and weights: kernel-set j goes to core j%4
    for (int c = 0; c < NCORES; c++) exp_loads[c] = 0;
    for (int l = 0; l < NL; l++) begin
      for (int c = 0; c < NCORES; c++) cnt[c] = IBASE[l];
      for (int j = 0; j < KG[l]; j++) begin
        int c;
        c = j % 4;
        for (int g = 0; g < ng[l][j]; g++) begin
          idx_code_t ic;
          ic.first = (g == 0); ic.total_m1 = 6'(ng[l][j] - 1);
          ic.pos = 4'(gpos[l][j][g]); ic.ch = 5'(gch[l][j][g]);
          il_we = '0; il_we[c] = 1; il_addr = IDX_AW'(cnt[c]); il_data = ic; tick();
          il_we = '0;
          for (int k = 0; k < 16; k++) begin
            logic [127:0] word;
            for (int i = 0; i < 16; i++) word[i*8 +: 8] = wt[l][j][g][k][i];
            wl_we = '0; wl_we[c] = 1; wl_addr = W_AW'(cnt[c] * 16 + k); wl_data = word; tick();
          end
          wl_we = '0;
          cnt[c]++;
        end
      end
      // expected macro loads per core (greedy packing into 64 slots)
      for (int c = 0; c < NCORES; c++) begin
        int u;
        u = 0;
        for (int j = c; j < KG[l]; j += 4) begin
          if (u == 0 || u + ng[l][j] > 64) begin exp_loads[c]++; u = 0; end
          u += ng[l][j];
        end
      end
      // expected group-set computations
      for (int j = 0; j < KG[l]; j++) begin
        int oh, ow;
        oh = PAD[l] ? H[l] : H[l] - 2;
        ow = PAD[l] ? W[l] : W[l] - 2;
        exp_groups += ng[l][j] * oh * ow;
      end
    end

    // input image into SRAM1
    for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) for (int cg = 0; cg < CG[0]; cg++) begin
      logic [127:0] word;
      for (int i = 0; i < 16; i++) word[i*8 +: 8] = 8'(fm[0][y][x][cg*16+i]);
      h_en = 1; h_we = 1; h_sel = 0; h_addr = FM_AW'((y*8 + x)*CG[0] + cg); h_wdata = word; tick();
    end
    h_en = 0; h_we = 0;

    golden(0);
    golden(1);

    start = 1; tick(); start = 0;
    wait (done);
    tick();
    check(layer == 8'(NL), "layer count");

    // layer 0 output in SRAM2, layer 1 output in SRAM1
    for (int l = 0; l < NL; l++) begin
      int oh, ow;
      oh = PAD[l] ? H[l] : H[l] - 2;
      ow = PAD[l] ? W[l] : W[l] - 2;
      if (POOL[l]) begin oh /= 2; ow /= 2; end
      for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) for (int j = 0; j < KG[l]; j++) begin
        h_en = 1; h_we = 0; h_sel = (l == 0); h_addr = FM_AW'((y*ow + x)*KG[l] + j); tick();
        h_en = 0; tick();
        for (int k = 0; k < 16; k++)
          check(h_rdata[k*8 +: 8] == 8'(fm[l+1][y][x][j*16+k]),
                $sformatf("layer %0d y%0d x%0d ch%0d got %0d exp %0d", l, y, x, j*16+k,
                          h_rdata[k*8 +: 8], fm[l+1][y][x][j*16+k]));
      end
    end

    // the data must be meaningful: outputs neither all zero nor all saturated
    begin
      int nz, sat, tot;
      nz = 0; sat = 0; tot = 0;
      for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) for (int c = 0; c < KG[0]*16; c++) begin
        tot++; nz += int'(fm[1][y][x][c] != 0); sat += int'(fm[1][y][x][c] == 255);
      end
      $display("layer 0 outputs: %0d of %0d nonzero, %0d saturated", nz, tot, sat);
      check(nz > tot / 4 && sat < tot / 4, "layer 0 output spread");
    end

    // mechanisms
    begin
      int el;
      el = 0;
      for (int c = 0; c < NCORES; c++) el += exp_loads[c];
      $display("group-sets computed %0d (expected %0d), macro loads %0d (expected %0d), pads %0d, all-4 rounds %0d",
               got_groups, exp_groups, got_loads, el, got_pads, rounds_all4);
      check(got_groups == exp_groups, "zero group-sets skipped: computed group-sets");
      check(got_loads == el, "CIM macro loads");
      check(got_loads > NCORES * NL, "a CIM reload within a layer happened");
      check(got_pads > 0, "padding positions skipped");
      check(pp_seen, "ping-pong direction switched");
      check(rounds_all4 > 0, "shunter served four cores in one round");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
