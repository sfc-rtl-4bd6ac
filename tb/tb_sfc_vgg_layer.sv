// tb_sfc_vgg_layer - one VGG-16-style layer slice through the accelerator.
//
// A 14x14 feature map with 512 input channels (the shape of VGG-16's last
// 3x3 layers) is convolved with 4 filters of 3x3x512, stride 1, zero
// padding 1. The testbench does the host's part: it pads the map, cuts it
// into overlapping 9x9 input tiles (7x7 output tiles, so 2x2 tile
// positions), loads the 4x512 filters as 128 groups of 4x4 lanes, and
// streams each position's 128 groups back to back. The whole 14x14x4
// output is reassembled and compared with a direct convolution of the map
// (times 36, the transform's fixed scale). Operands are kept small and all
// scale exponents 0 so the int8 transform domain is exact.
module tb_sfc_vgg_layer;
  import sfc_pkg::*;

  localparam int ICP = 4, OCP = 4, GRP_W = 7;
  localparam int CIN = 512, HW = 14, NG = CIN / ICP, NT = HW / TILE_OUT;

  logic clk = 0, rst_n = 0;
  logic [GRP_W:0] cfg_groups = (GRP_W+1)'(NG);
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
  int fmap [CIN][HW+2][HW+2];       // zero-padded input
  int filt [OCP][CIN][KSZ][KSZ];
  longint yhw [OCP][HW][HW];
  int npos_out = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect output tiles in stream order: positions row-major
  always @(posedge clk) if (rst_n && y_valid) begin
    int tr, tc;
    tr = npos_out / NT;
    tc = npos_out % NT;
    for (int o = 0; o < OCP; o++)
      for (int r = 0; r < TILE_OUT; r++)
        for (int c = 0; c < TILE_OUT; c++)
          yhw[o][tr*TILE_OUT+r][tc*TILE_OUT+c] = longint'(y[o][r][c]);
    npos_out++;
  end

  initial begin
    for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) begin
      cfg_shx[i][j] = 0;
      wl_shw[i][j]  = 0;
    end
    for (int c = 0; c < CIN; c++)
      for (int r = 0; r < HW + 2; r++)
        for (int k = 0; k < HW + 2; k++)
          fmap[c][r][k] = (r == 0 || k == 0 || r == HW + 1 || k == HW + 1) ? 0 : int'($urandom % 7) - 3;
    for (int o = 0; o < OCP; o++) for (int c = 0; c < CIN; c++)
      for (int r = 0; r < KSZ; r++) for (int k = 0; k < KSZ; k++)
        filt[o][c][r][k] = int'($urandom % 29) - 14;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // filters: group g holds input channels 4g..4g+3
    for (int g = 0; g < NG; g++)
      for (int o = 0; o < OCP; o++)
        for (int c = 0; c < ICP; c++) begin
          wl_valid <= 1;
          wl_oc <= 2'(o); wl_ic <= 2'(c); wl_grp <= GRP_W'(g);
          for (int r = 0; r < KSZ; r++) for (int k = 0; k < KSZ; k++)
            wl_f[r][k] <= DATA_W'(filt[o][g*ICP+c][r][k]);
          @(posedge clk);
          while (!wl_ready) @(posedge clk);
        end
    wl_valid <= 0;
    // tiles
    for (int tr = 0; tr < NT; tr++)
      for (int tc = 0; tc < NT; tc++)
        for (int g = 0; g < NG; g++) begin
          tile_valid <= 1;
          for (int c = 0; c < ICP; c++)
            for (int r = 0; r < TILE_IN; r++)
              for (int k = 0; k < TILE_IN; k++)
                tile_x[c][r][k] <= DATA_W'(fmap[g*ICP+c][tr*TILE_OUT+r][tc*TILE_OUT+k]);
          @(posedge clk);
          while (!tile_ready) @(posedge clk);
        end
    tile_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (npos_out != NT * NT) begin failures++; $display("got %0d output tiles", npos_out); end
    for (int o = 0; o < OCP; o++)
      for (int r = 0; r < HW; r++)
        for (int c = 0; c < HW; c++) begin
          longint ref_v;
          ref_v = 0;
          for (int ci = 0; ci < CIN; ci++)
            for (int k = 0; k < KSZ; k++)
              for (int l = 0; l < KSZ; l++)
                ref_v += longint'(fmap[ci][r+k][c+l]) * longint'(filt[o][ci][k][l]);
          checks++;
          if (yhw[o][r][c] != 36 * ref_v) begin
            failures++;
            if (failures < 10) $display("oc %0d y[%0d][%0d]=%0d exp %0d", o, r, c, yhw[o][r][c], 36 * ref_v);
          end
        end
    checks++;
    if (sat_x || sat_w) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
