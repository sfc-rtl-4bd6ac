// tb_sfc_filter_transform - self-checking test of the 2-D filter transform.
//
// Random int8 3x3 filters (plus all-max and all-min) are sent one per
// cycle. Each 12x12 result is checked against the product G F G^T and end
// to end: combined with a random tile's B^T X B and taken back with A^T . A
// it must give 36 times the direct correlation. Latency (1 cycle) is
// checked for every filter.
module tb_sfc_filter_transform;
  import sfc_pkg::*;
  import sfc_ref_pkg::*;

  localparam int NT = 40;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [DATA_W-1:0] f [KSZ][KSZ];
  logic out_valid;
  logic signed [WT_W-1:0] wt [TDOM][TDOM];
  int checks = 0, failures = 0;
  tk_t fs [NT];
  int sent_cyc [NT];
  int nout = 0, cyc = 0;

  sfc_filter_transform dut (.clk, .rst_n, .in_valid, .f, .out_valid, .wt);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    tt_t mx, mw, m;
    tin_t x;
    tout_t y, yr;
    mw = ref_g_f_gt(fs[nout]);
    for (int r = 0; r < TILE_IN; r++) for (int c = 0; c < TILE_IN; c++) x[r][c] = rnd8();
    mx = ref_bt_x_b(x);
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        checks++;
        if (longint'(wt[i][j]) != mw[i][j]) begin
          failures++;
          if (failures < 10) $display("filter %0d wt[%0d][%0d]=%0d exp %0d", nout, i, j, wt[i][j], mw[i][j]);
        end
        m[i][j] = longint'(wt[i][j]) * mx[i][j];
      end
    y  = ref_at_m_a(m);
    yr = direct_conv(x, fs[nout]);
    for (int r = 0; r < TILE_OUT; r++)
      for (int c = 0; c < TILE_OUT; c++) begin
        checks++;
        if (y[r][c] != 36 * yr[r][c]) failures++;
      end
    // registered on the edge after presentation, seen here one edge later
    checks++;
    if (cyc - sent_cyc[nout] != 2) begin failures++; $display("latency %0d", cyc - sent_cyc[nout]); end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      for (int r = 0; r < KSZ; r++)
        for (int c = 0; c < KSZ; c++)
          fs[t][r][c] = (t == 0) ? 127 : (t == 1) ? -128 : rnd8();
      for (int r = 0; r < KSZ; r++)
        for (int c = 0; c < KSZ; c++) f[r][c] <= DATA_W'(fs[t][r][c]);
      in_valid <= 1;
      sent_cyc[t] = cyc;
      @(posedge clk);
      if (t % 5 == 2) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (nout != NT) begin failures++; $display("got %0d filters", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
