// tb_vgg16_layers: the seven VGG16 CIFAR-10 convolution layer shapes of the
// paper's memory-compression table, on the full-size accelerator, each with
// the number of stored group-sets that its index size gives (16 bits per
// code; 8-bit weights). The spatial sizes are those of VGG16 on 32x32 images:
//   3x3x64x64    32x32  137 of   144 group-sets  8-bit act.  (fills an FM SRAM)
//   3x3x64x128   16x16  144 of   288             8-bit
//   3x3x128x128  16x16  250 of   576             8-bit, 2x2 max pooling
//   3x3x128x256   8x8   442 of  1152             8-bit (111 codes per core)
//   3x3x256x256   8x8   157 of  2304             4-bit
//   3x3x256x512   4x4   101 of  4608             4-bit, pooling
//   3x3x512x512   4x4   120 of  9216             4-bit, pooling
// All layers use zero padding. The group-sets are spread evenly over the
// kernel-sets, at random positions and channel groups.
// Each layer is loaded (instruction, index codes, weights, input map), run and
// compared word by word with a golden model. The number of computed
// group-sets must equal stored group-sets x output pixels, and the system
// cycles of each layer are reported together with the resulting rate of
// useful (nonzero) multiply-accumulates per system cycle.
module tb_vgg16_layers;
  import mars_pkg::*;

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

  int ifm [32][32][512];
  int acts [32][32][512];
  int ng [32];
  int gpos [32][64], gch [32][64];
  byte wt [32][64][16][16];
  int got_groups = 0;
  longint cyc = 0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCORES; c++) got_groups += int'(ev_group[c] && dut.ce[c]);
    if (busy) cyc++;
  end

  task automatic tick(); @(negedge clk); endtask

  function automatic int act(input longint s, input bit a8, input int sh);
    longint q;
    if (s <= 0) return 0;
    q = (s + (longint'(1) << (sh - 1))) >>> sh;
    if (a8) return q > 255 ? 255 : int'(q);
    return q > 15 ? 15 : int'(q);
  endfunction

  task automatic run_layer(input string name, input int hw, input int cg, input int kg, input bit a8,
                           input bit pool, input int sh, input int total);
    int cnt[NCORES], oh, ow, exp_groups, nz;
    instr_t ins;
    longint macs;
    // random input map and sparse kernel-sets (total group-sets spread evenly)
    for (int y = 0; y < hw; y++) for (int x = 0; x < hw; x++) for (int c = 0; c < cg*16; c++)
      ifm[y][x][c] = a8 ? int'($urandom_range(255)) : int'($urandom_range(15));
    for (int j = 0; j < kg; j++) begin
      int npos;
      int used [];
      npos = 9 * cg;
      used = new[npos];
      ng[j] = total / kg + ((j < total % kg) ? 1 : 0);
      for (int g = 0; g < ng[j]; g++) begin
        int q;
        do q = int'($urandom_range(npos - 1)); while (used[q] != 0);
        used[q] = 1;
        gpos[j][g] = q % 9; gch[j][g] = q / 9;
        for (int k = 0; k < 16; k++) for (int i = 0; i < 16; i++)
          wt[j][g][k][i] = byte'(int'($urandom_range(254)) - 127);
      end
    end
    // load
    ins = '0; ins.last = 1; ins.src_sel = 0; ins.a8 = a8; ins.pool = pool; ins.pad = 1;
    ins.h = 8'(hw); ins.w = 8'(hw); ins.cg = 6'(cg); ins.kg = 6'(kg); ins.shift = 5'(sh); ins.idx_base = '0;
    iw_en = 1; iw_addr = '0; iw_data = ins; tick(); iw_en = 0;
    for (int c = 0; c < NCORES; c++) cnt[c] = 0;
    for (int j = 0; j < kg; j++) begin
      int c;
      c = j % 4;
      for (int g = 0; g < ng[j]; g++) begin
        il_we = '0; il_we[c] = 1; il_addr = IDX_AW'(cnt[c]);
        il_data = {g == 0, 6'(ng[j] - 1), 4'(gpos[j][g]), 5'(gch[j][g])}; tick();
        il_we = '0;
        for (int k = 0; k < 16; k++) begin
          logic [127:0] word;
          for (int i = 0; i < 16; i++) word[i*8 +: 8] = wt[j][g][k][i];
          wl_we = '0; wl_we[c] = 1; wl_addr = W_AW'(cnt[c] * 16 + k); wl_data = word; tick();
        end
        wl_we = '0;
        cnt[c]++;
      end
    end
    for (int y = 0; y < hw; y++) for (int x = 0; x < hw; x++) for (int g = 0; g < cg; g++) begin
      logic [127:0] word;
      for (int i = 0; i < 16; i++) word[i*8 +: 8] = 8'(ifm[y][x][g*16+i]);
      h_en = 1; h_we = 1; h_sel = 0; h_addr = FM_AW'((y*hw + x)*cg + g); h_wdata = word; tick();
    end
    h_en = 0; h_we = 0;
    // golden
    oh = hw; ow = hw; exp_groups = 0; macs = 0;
    for (int j = 0; j < kg; j++) exp_groups += ng[j] * oh * ow;
    for (int oy = 0; oy < oh; oy++) for (int ox = 0; ox < ow; ox++)
      for (int j = 0; j < kg; j++) for (int k = 0; k < 16; k++) begin
        longint s = 0;
        for (int g = 0; g < ng[j]; g++) begin
          int iy, ix;
          iy = oy + gpos[j][g] / 3 - 1; ix = ox + gpos[j][g] % 3 - 1;
          if (iy >= 0 && ix >= 0 && iy < hw && ix < hw)
            for (int i = 0; i < 16; i++) s += longint'(wt[j][g][k][i]) * ifm[iy][ix][gch[j][g]*16+i];
        end
        acts[oy][ox][j*16+k] = act(s, a8, sh);
      end
    macs = longint'(exp_groups) * 256;
    // run
    got_groups = 0; cyc = 0;
    start = 1; tick(); start = 0;
    wait (done); tick();
    // compare
    nz = 0;
    begin
      int poh, pow;
      poh = pool ? oh / 2 : oh; pow = pool ? ow / 2 : ow;
      for (int y = 0; y < poh; y++) for (int x = 0; x < pow; x++) for (int j = 0; j < kg; j++) begin
        h_en = 1; h_we = 0; h_sel = 1; h_addr = FM_AW'((y*pow + x)*kg + j); tick();
        h_en = 0; tick();
        for (int k = 0; k < 16; k++) begin
          int e;
          if (!pool) e = acts[y][x][j*16+k];
          else begin
            e = acts[2*y][2*x][j*16+k];
            if (acts[2*y][2*x+1][j*16+k] > e) e = acts[2*y][2*x+1][j*16+k];
            if (acts[2*y+1][2*x][j*16+k] > e) e = acts[2*y+1][2*x][j*16+k];
            if (acts[2*y+1][2*x+1][j*16+k] > e) e = acts[2*y+1][2*x+1][j*16+k];
          end
          nz += int'(e != 0);
          check(int'(h_rdata[k*8 +: 8]) == e, $sformatf("%s y%0d x%0d ch%0d got %0d exp %0d", name, y, x, j*16+k, h_rdata[k*8 +: 8], e));
        end
      end
      check(nz > poh * pow * kg * 4, "outputs not mostly zero");
    end
    check(got_groups == exp_groups, $sformatf("%s: group-sets computed %0d, expected %0d", name, got_groups, exp_groups));
    $display("%s: %0d stored group-sets, %0d system cycles, %0d nonzero MACs, %0.2f MACs per system cycle",
             name, total, cyc, macs, real'(macs) / real'(cyc));
  endtask

  initial begin
    void'($urandom(21));
    repeat (4) tick();
    rst_n = 1;
    tick();
    run_layer("3x3x64x64 @32x32 w8a8", 32, 4, 4, 1, 0, 12, 137);
    run_layer("3x3x64x128 @16x16 w8a8", 16, 4, 8, 1, 0, 12, 144);
    run_layer("3x3x128x128 @16x16 w8a8 pool", 16, 8, 8, 1, 1, 12, 250);
    run_layer("3x3x128x256 @8x8 w8a8", 8, 8, 16, 1, 0, 12, 442);
    run_layer("3x3x256x256 @8x8 w8a4", 8, 16, 16, 0, 0, 10, 157);
    run_layer("3x3x256x512 @4x4 w8a4 pool", 4, 16, 32, 0, 1, 9, 101);
    run_layer("3x3x512x512 @4x4 w8a4 pool", 4, 32, 32, 0, 1, 8, 120);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
