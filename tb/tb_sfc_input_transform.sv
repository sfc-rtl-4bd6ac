// tb_sfc_input_transform - self-checking test of the 2-D input transform.
//
// Random int8 tiles (plus all-max and all-min tiles) are streamed one per
// cycle. Each result is checked against the matrix product B^T X B, and
// also end to end: multiplied with a random filter's G F G^T and taken back
// with A^T . A it must equal 36 times the direct 3x3 correlation. The
// 1-cycle latency and one-tile-per-cycle rate are checked too.
module tb_sfc_input_transform;
  import sfc_pkg::*;
  import sfc_ref_pkg::*;

  localparam int NT = 40;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [DATA_W-1:0] x [TILE_IN][TILE_IN];
  logic out_valid;
  logic signed [XT_W-1:0] xt [TDOM][TDOM];
  int checks = 0, failures = 0;
  tin_t xs [NT];
  int nout = 0;
  int cyc = 0;
  int sent_cyc [NT];

  sfc_input_transform dut (.clk, .rst_n, .in_valid, .x, .out_valid, .xt);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    tt_t mx, mw, m;
    tk_t f;
    tout_t y, yr;
    mx = ref_bt_x_b(xs[nout]);
    for (int k = 0; k < KSZ; k++) for (int l = 0; l < KSZ; l++) f[k][l] = rnd8();
    mw = ref_g_f_gt(f);
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        checks++;
        if (longint'(xt[i][j]) != mx[i][j]) begin
          failures++;
          if (failures < 10) $display("tile %0d xt[%0d][%0d]=%0d exp %0d", nout, i, j, xt[i][j], mx[i][j]);
        end
        m[i][j] = longint'(xt[i][j]) * mw[i][j];
      end
    y  = ref_at_m_a(m);
    yr = direct_conv(xs[nout], f);
    for (int r = 0; r < TILE_OUT; r++)
      for (int c = 0; c < TILE_OUT; c++) begin
        checks++;
        if (y[r][c] != 36 * yr[r][c]) failures++;
      end
    // latency: the result registered on the edge that samples the tile is
    // seen by this checker one edge later, so the distance is 1 + 1
    checks++;
    if (cyc - sent_cyc[nout] != 2) begin
      failures++;
      $display("tile %0d latency %0d", nout, cyc - sent_cyc[nout]);
    end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      for (int r = 0; r < TILE_IN; r++)
        for (int c = 0; c < TILE_IN; c++)
          xs[t][r][c] = (t == 0) ? 127 : (t == 1) ? -128 : rnd8();
      for (int r = 0; r < TILE_IN; r++)
        for (int c = 0; c < TILE_IN; c++) x[r][c] <= DATA_W'(xs[t][r][c]);
      in_valid <= 1;
      sent_cyc[t] = cyc;
      @(posedge clk);
      // a gap now and then
      if (t % 7 == 3) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (nout != NT) begin failures++; $display("got %0d tiles", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
