// tb_cim_core: one CIM core (core 0) against a golden model.
// A feature-map model answers the core's requests as the shunter would (the
// core is enabled one cycle in four, read data come back one cycle after the
// request). Two layers are run on a 6x6 input with 48 channels:
//   run 0: 8-bit activations, zero padding, 2x2 max pooling;
//   run 1: 4-bit activations, no padding, no pooling.
// With 144 output channels the core computes kernel-sets 0, 4 and 8, each
// keeping 22-27 of its 27 group-sets, so they do not fit in one macro load and
// the core must reload its CIM macros. Every OFM word the core writes is
// compared with the golden output, and the number of computed group-sets and
// of macro loads is checked.
module tb_cim_core;
  import mars_pkg::*;
  logic clk = 0, rst_n = 0, ce, go = 0, done;
  instr_t cfg = '0;
  logic il_we = 0; logic [IDX_AW-1:0] il_addr = '0; logic [15:0] il_data = '0;
  logic wl_we = 0; logic [W_AW-1:0] wl_addr = '0; logic [FM_DW-1:0] wl_data = '0;
  fm_req_t req; logic rsp_valid = 0; logic [FM_DW-1:0] rsp_data = '0;
  logic ev_group, ev_load, ev_pad;
  cim_core #(.CORE_ID(0)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  localparam int HH = 6, WW = 6, CGN = 3, KGN = 9;
  int ng [3], gpos [3][27], gch [3][27];
  byte wt [3][27][16][16];
  int ifm [HH][WW][48];
  logic [127:0] ofm [256];
  bit ofm_wr [256];
  int groups = 0, loads = 0, phase = 0;

  // shunter / FM model and clock enable
  always @(posedge clk) if (rst_n) begin
    phase <= (phase + 1) % 4;
    rsp_valid <= 1'b0;
    if (req.rd) begin
      int a, y, x, c;
      a = int'(req.raddr); c = a % CGN; y = (a / CGN) / WW; x = (a / CGN) % WW;
      for (int i = 0; i < 16; i++) rsp_data[i*8 +: 8] <= 8'(ifm[y][x][c*16+i]);
      rsp_valid <= 1'b1;
    end
    if (req.wr) begin ofm[req.waddr] <= req.wdata; ofm_wr[req.waddr] <= 1'b1; end
    groups += int'(ev_group && ce);
    loads  += int'(ev_load && ce);
  end
  assign ce = rst_n && (phase == 0);

  function automatic int act(input longint s, input bit a8, input int sh);
    longint q;
    if (s <= 0) return 0;
    q = (s + (longint'(1) << (sh - 1))) >>> sh;
    if (a8) return q > 255 ? 255 : int'(q);
    return q > 15 ? 15 : int'(q);
  endfunction

  task automatic run(input bit a8, input bit pad, input bit pool, input int sh);
    int oh, ow, a[6][6][48], exp_groups, exp_loads, u;
    oh = pad ? HH : HH - 2; ow = pad ? WW : WW - 2;
    for (int j = 0; j < 3; j++)
      for (int oy = 0; oy < oh; oy++) for (int ox = 0; ox < ow; ox++) for (int k = 0; k < 16; k++) begin
        longint s = 0;
        for (int g = 0; g < ng[j]; g++) begin
          int iy, ix;
          iy = oy + gpos[j][g] / 3 - int'(pad); ix = ox + gpos[j][g] % 3 - int'(pad);
          if (iy >= 0 && ix >= 0 && iy < HH && ix < WW)
            for (int i = 0; i < 16; i++)
              s += longint'(wt[j][g][k][i]) * (a8 ? ifm[iy][ix][gch[j][g]*16+i] : (ifm[iy][ix][gch[j][g]*16+i] & 15));
        end
        a[oy][ox][j*16+k] = act(s, a8, sh);
      end
    for (int i = 0; i < 256; i++) ofm_wr[i] = 0;
    groups = 0; loads = 0;
    cfg = '0; cfg.a8 = a8; cfg.pad = pad; cfg.pool = pool; cfg.h = HH; cfg.w = WW;
    cfg.cg = CGN; cfg.kg = KGN; cfg.shift = 5'(sh); cfg.idx_base = '0;
    @(negedge clk); go = 1;
    wait (done);
    @(negedge clk); go = 0;
    wait (!done);
    // compare
    begin
      int poh, pow;
      poh = pool ? oh / 2 : oh; pow = pool ? ow / 2 : ow;
      for (int j = 0; j < 3; j++)
        for (int y = 0; y < poh; y++) for (int x = 0; x < pow; x++) begin
          int addr;
          addr = (y * pow + x) * KGN + 4 * j;
          checks++; if (!ofm_wr[addr]) failures++;
          for (int k = 0; k < 16; k++) begin
            int e;
            if (!pool) e = a[y][x][j*16+k];
            else begin
              e = a[2*y][2*x][j*16+k];
              if (a[2*y][2*x+1][j*16+k] > e) e = a[2*y][2*x+1][j*16+k];
              if (a[2*y+1][2*x][j*16+k] > e) e = a[2*y+1][2*x][j*16+k];
              if (a[2*y+1][2*x+1][j*16+k] > e) e = a[2*y+1][2*x+1][j*16+k];
            end
            checks++;
            if (int'(ofm[addr][k*8 +: 8]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL j%0d y%0d x%0d k%0d got %0d exp %0d", j, y, x, k, ofm[addr][k*8 +: 8], e);
            end
          end
        end
      exp_groups = 0;
      for (int j = 0; j < 3; j++) exp_groups += ng[j] * oh * ow;
      exp_loads = 0; u = 0;
      for (int j = 0; j < 3; j++) begin
        if (u == 0 || u + ng[j] > 64) begin exp_loads++; u = 0; end
        u += ng[j];
      end
      $display("run a8=%0d: group-sets %0d (exp %0d), loads %0d (exp %0d)", a8, groups, exp_groups, loads, exp_loads);
      checks++; if (groups != exp_groups) failures++;
      checks++; if (loads != exp_loads || loads < 2) failures++;
    end
  endtask

  initial begin
    int cnt;
    void'($urandom(11));
    for (int y = 0; y < HH; y++) for (int x = 0; x < WW; x++) for (int c = 0; c < 48; c++)
      ifm[y][x][c] = $urandom_range(255);
    cnt = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 3; j++) begin
      int used[27];
      ng[j] = $urandom_range(27, 22);
      for (int q = 0; q < 27; q++) used[q] = 0;
      for (int g = 0; g < ng[j]; g++) begin
        int q;
        do q = $urandom_range(26); while (used[q]);
        used[q] = 1; gpos[j][g] = q % 9; gch[j][g] = q / 9;
        @(negedge clk);
        il_we = 1; il_addr = IDX_AW'(cnt); il_data = {g == 0, 6'(ng[j] - 1), 4'(gpos[j][g]), 5'(gch[j][g])};
        for (int k = 0; k < 16; k++) begin
          logic [127:0] word;
          for (int i = 0; i < 16; i++) begin
            wt[j][g][k][i] = byte'($urandom_range(254) - 127);
            word[i*8 +: 8] = wt[j][g][k][i];
          end
          @(negedge clk); il_we = 0;
          wl_we = 1; wl_addr = W_AW'(cnt * 16 + k); wl_data = word;
        end
        @(negedge clk); wl_we = 0;
        cnt++;
      end
    end
    run(1, 1, 1, 11);
    run(0, 0, 0, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
