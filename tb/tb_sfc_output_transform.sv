// tb_sfc_output_transform - self-checking test of the 2-D output transform.
//
// For random int8 tiles X and filters F, the testbench forms the
// transform-domain product M = (G F G^T) .* (B^T X B), summed over a few
// random channels, and feeds M to the block. The 7x7 result must equal 36
// times the sum of the direct 3x3 correlations. Large accumulator values
// (a random M with full 32-bit-range entries scaled down so nothing wraps)
// are checked against the matrix product A^T M A. Latency is 1 cycle.
module tb_sfc_output_transform;
  import sfc_pkg::*;
  import sfc_ref_pkg::*;

  localparam int NT = 30;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [ACC_W-1:0] m [TDOM][TDOM];
  logic out_valid;
  logic signed [Y_W-1:0] y [TILE_OUT][TILE_OUT];
  int checks = 0, failures = 0;
  tout_t exp_y [NT];
  int sent_cyc [NT];
  int nout = 0, cyc = 0;

  sfc_output_transform dut (.clk, .rst_n, .in_valid, .m, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int r = 0; r < TILE_OUT; r++)
      for (int c = 0; c < TILE_OUT; c++) begin
        checks++;
        if (longint'(y[r][c]) != exp_y[nout][r][c]) begin
          failures++;
          if (failures < 10) $display("tile %0d y[%0d][%0d]=%0d exp %0d", nout, r, c, y[r][c], exp_y[nout][r][c]);
        end
      end
    checks++;
    if (cyc - sent_cyc[nout] != 2) begin failures++; $display("latency %0d", cyc - sent_cyc[nout]); end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      tt_t mm;
      tout_t yr;
      if (t < NT - 5) begin
        // sum over 1..4 channels of the transform-domain product
        for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) mm[i][j] = 0;
        for (int r = 0; r < TILE_OUT; r++) for (int c = 0; c < TILE_OUT; c++) exp_y[t][r][c] = 0;
        for (int ch = 0; ch <= t % 4; ch++) begin
          tin_t x; tk_t f; tt_t mx, mw;
          for (int r = 0; r < TILE_IN; r++) for (int c = 0; c < TILE_IN; c++) x[r][c] = rnd8();
          for (int r = 0; r < KSZ; r++) for (int c = 0; c < KSZ; c++) f[r][c] = rnd8();
          mx = ref_bt_x_b(x);
          mw = ref_g_f_gt(f);
          for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) mm[i][j] += mx[i][j] * mw[i][j];
          yr = direct_conv(x, f);
          for (int r = 0; r < TILE_OUT; r++) for (int c = 0; c < TILE_OUT; c++) exp_y[t][r][c] += 36 * yr[r][c];
        end
      end else begin
        // large values: full 32-bit-range accumulators
        for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++)
          mm[i][j] = longint'($signed($urandom));
        if (t == NT - 1) for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++)
          mm[i][j] = (A6[i][0] * A6[j][0] >= 0) ? 64'sd2147483647 : -64'sd2147483648;
        exp_y[t] = ref_at_m_a(mm);
      end
      for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) m[i][j] <= ACC_W'(mm[i][j]);
      in_valid <= 1;
      sent_cyc[t] = cyc;
      @(posedge clk);
      if (t % 6 == 1) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (nout != NT) begin failures++; $display("got %0d tiles", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
