// tb_sfc_accel - end-to-end test of the SFC-6(7x7,3x3) accelerator at its
// default parameters (4x4 lanes, 128-group filter buffer).
//
// Three runs, each a filter load followed by a stream of output tiles:
//  1. exact run: 3 groups (12 input channels), all scale exponents 0 and
//     small operands so nothing clips; every 7x7 output of every output
//     channel must be exactly 36 times the direct 3x3 convolution summed
//     over the 12 input channels.
//  2. quantized run: 2 groups, full-range int8 operands and random
//     per-frequency exponents; outputs must match a bit-exact software
//     model of requantization, shifted products and 32-bit accumulation,
//     and clipping must occur on both activations and filters.
//  3. full run: 128 groups (512 input channels, the largest layer of
//     VGG-16) for one output tile position, exact as in run 1.
// The filter load of runs 2 and 3 is requested while tiles are still being
// offered, so the load/compute mode switch and input stalls happen. Tiles
// are offered back to back: the test checks one tile per cycle and a
// 5-cycle latency from the 'last' tile to y_valid. Counts of stalls, mode
// switches, clipping events and multi-group accumulations must be nonzero.
module tb_sfc_accel;
  import sfc_pkg::*;
  import sfc_ref_pkg::*;

  localparam int ICP = 4, OCP = 4, GROUPS = 128, GRP_W = 7;
  localparam int MAXPOS = 8;

  logic clk = 0, rst_n = 0;
  logic [GRP_W:0] cfg_groups;
  logic [SH_W-1:0] cfg_shx [TDOM][TDOM];
  logic tile_valid = 0, tile_ready;
  logic signed [DATA_W-1:0] tile_x [ICP][TILE_IN][TILE_IN];
  logic wl_valid = 0, wl_ready;
  logic [1:0] wl_oc, wl_ic;
  logic [GRP_W-1:0] wl_grp;
  logic signed [DATA_W-1:0] wl_f [KSZ][KSZ];
  logic [SH_W-1:0] wl_shw [TDOM][TDOM];
  logic y_valid;
  logic signed [Y_W-1:0] y [OCP][TILE_OUT][TILE_OUT];
  logic stall, busy, sat_x, sat_w;

  sfc_accel dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_stall = 0, n_switch = 0, n_satx = 0, n_saty = 0, n_multi = 0, n_out = 0;

  // test data of the current run
  longint fw   [OCP][ICP][GROUPS][KSZ][KSZ];
  int     shw  [OCP][TDOM][TDOM];
  int     shx  [TDOM][TDOM];
  longint xs   [MAXPOS][GROUPS][ICP][TILE_IN][TILE_IN];
  longint expy [MAXPOS][OCP][TILE_OUT][TILE_OUT];
  int     ngrp, npos, xmax, fmax, shmax;
  bit     exact;
  int     last_cyc [$];
  int     pos_out;
  int     prev_y;
  bit     load_req = 0, load_done = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%0t: %s", $time, what);
    end
  endfunction

  // ---------- expected outputs ----------
  function automatic void make_expected();
    for (int p = 0; p < npos; p++)
      for (int o = 0; o < OCP; o++) begin
        tt_t m;
        tout_t yd, yr;
        for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) m[i][j] = 0;
        for (int r = 0; r < TILE_OUT; r++) for (int c = 0; c < TILE_OUT; c++) yd[r][c] = 0;
        for (int g = 0; g < ngrp; g++)
          for (int c = 0; c < ICP; c++) begin
            tin_t x; tk_t f; tt_t mx, mw;
            x = xs[p][g][c];
            f = fw[o][c][g];
            mx = ref_bt_x_b(x);
            mw = ref_g_f_gt(f);
            for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++)
              m[i][j] = wrap32(m[i][j] + wrap32((quant(mx[i][j], shx[i][j]) * quant(mw[i][j], shw[o][i][j]))
                                                <<< (shx[i][j] + shw[o][i][j])));
            if (exact) begin
              yr = direct_conv(x, f);
              for (int r = 0; r < TILE_OUT; r++) for (int cc = 0; cc < TILE_OUT; cc++) yd[r][cc] += 36 * yr[r][cc];
            end
          end
        yr = ref_at_m_a(m);
        for (int r = 0; r < TILE_OUT; r++) for (int c = 0; c < TILE_OUT; c++) begin
          expy[p][o][r][c] = yr[r][c];
          // in an exact run the datapath model must agree with direct convolution
          if (exact) chk(yr[r][c] == yd[r][c], "model vs direct convolution");
        end
      end
  endfunction

  // ---------- output checker ----------
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (sat_x) n_satx++;
    if (sat_w) n_saty++;
    if (y_valid) begin
      int lc;
      n_out++;
      lc = (last_cyc.size() > 0) ? last_cyc.pop_front() : -100;
      // y_valid is seen 5 edges after the edge that accepted the 'last' tile
      // (lc is read by the streamer just after that edge)
      chk(cyc - lc == 5, $sformatf("latency %0d", cyc - lc));
      // back-to-back tiles: one output tile every ngrp cycles
      if (pos_out > 0) chk(cyc - prev_y == ngrp, $sformatf("output spacing %0d", cyc - prev_y));
      prev_y = cyc;
      for (int o = 0; o < OCP; o++)
        for (int r = 0; r < TILE_OUT; r++)
          for (int c = 0; c < TILE_OUT; c++)
            chk(longint'(y[o][r][c]) == expy[pos_out][o][r][c],
                $sformatf("pos %0d oc %0d y[%0d][%0d]=%0d exp %0d", pos_out, o, r, c,
                          y[o][r][c], expy[pos_out][o][r][c]));
      pos_out++;
    end
  end

  // ---------- filter loader ----------
  task automatic load_filters();
    for (int g = 0; g < ngrp; g++)
      for (int o = 0; o < OCP; o++)
        for (int c = 0; c < ICP; c++) begin
          wl_valid <= 1;
          wl_oc <= 2'(o); wl_ic <= 2'(c); wl_grp <= GRP_W'(g);
          for (int r = 0; r < KSZ; r++) for (int k = 0; k < KSZ; k++) wl_f[r][k] <= DATA_W'(fw[o][c][g][r][k]);
          for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) wl_shw[i][j] <= SH_W'(shw[o][i][j]);
          @(posedge clk);
          while (!wl_ready) @(posedge clk);
        end
    wl_valid <= 0;
  endtask

  // ---------- tile streamer: back to back, group-major ----------
  task automatic stream_tiles();
    for (int p = 0; p < npos; p++)
      for (int g = 0; g < ngrp; g++) begin
        tile_valid <= 1;
        for (int c = 0; c < ICP; c++)
          for (int r = 0; r < TILE_IN; r++) for (int k = 0; k < TILE_IN; k++)
            tile_x[c][r][k] <= DATA_W'(xs[p][g][c][r][k]);
        @(posedge clk);
        while (!tile_ready) @(posedge clk);
        if (g == ngrp - 1) last_cyc.push_back(cyc);
      end
    tile_valid <= 0;
  endtask

  function automatic void gen_run(int groups, int positions, int xm, int fm, int sm, bit ex);
    ngrp = groups; npos = positions; xmax = xm; fmax = fm; shmax = sm; exact = ex;
    for (int o = 0; o < OCP; o++) for (int c = 0; c < ICP; c++) for (int g = 0; g < ngrp; g++)
      for (int r = 0; r < KSZ; r++) for (int k = 0; k < KSZ; k++)
        fw[o][c][g][r][k] = (fm >= 128) ? rnd8() : longint'($urandom % (2 * fm + 1)) - fm;
    for (int p = 0; p < npos; p++) for (int g = 0; g < ngrp; g++) for (int c = 0; c < ICP; c++)
      for (int r = 0; r < TILE_IN; r++) for (int k = 0; k < TILE_IN; k++)
        xs[p][g][c][r][k] = (xm >= 128) ? rnd8() : longint'($urandom % (2 * xm + 1)) - xm;
    for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) begin
      shx[i][j] = (sm == 0) ? 0 : $urandom % (sm + 1);
      for (int o = 0; o < OCP; o++) shw[o][i][j] = (sm == 0) ? 0 : $urandom % (sm + 1);
    end
    make_expected();
  endfunction

  // one run: load filters (while the previous run's stream may still be offered), then stream
  task automatic run(int groups, int positions, int xm, int fm, int sm, bit ex, bit overlap);
    int outs0;
    gen_run(groups, positions, xm, fm, sm, ex);
    cfg_groups <= (GRP_W+1)'(groups);
    for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) cfg_shx[i][j] <= SH_W'(shx[i][j]);
    pos_out = 0;
    outs0 = n_out;
    if (overlap) begin
      // offer a tile of this run before the filters go in: the controller must
      // hold it (stall) and take the filter load first
      tile_valid <= 1;
      for (int c = 0; c < ICP; c++)
        for (int r = 0; r < TILE_IN; r++) for (int k = 0; k < TILE_IN; k++)
          tile_x[c][r][k] <= DATA_W'(xs[0][0][c][r][k]);
    end
    load_filters();
    n_switch++;
    stream_tiles();
    repeat (10) @(posedge clk);
    chk(n_out - outs0 == npos, $sformatf("outputs %0d of %0d", n_out - outs0, npos));
    if (ngrp > 1) n_multi++;
  endtask

  initial begin
    int t0;
    cfg_groups = 1;
    for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) cfg_shx[i][j] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // run 1: exact, 3 groups, 8 positions; check the stream rate too
    t0 = cyc;
    run(3, MAXPOS, 3, 14, 0, 1, 0);
    // run 2: quantized, full-range operands, random exponents
    run(2, MAXPOS, 128, 128, 7, 0, 1);
    // run 3: all 128 groups, exact
    run(GROUPS, 1, 3, 14, 0, 1, 1);
    chk(n_stall > 0, "no stall seen");
    chk(n_switch == 3, "mode switches");
    chk(n_satx > 0 && n_saty > 0, "no clipping seen");
    chk(n_multi > 0, "no multi-group accumulation");
    $display("outputs=%0d stalls=%0d loads=%0d sat_x=%0d sat_w=%0d", n_out, n_stall, n_switch, n_satx, n_saty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
