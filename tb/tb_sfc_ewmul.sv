// tb_sfc_ewmul - self-checking test of the element-wise multiply stage.
//
// Random int8 activations and filters for ICP input channels and random
// per-frequency exponents are applied; every output must equal
// sum_c x*w shifted left by (shx + shw), truncated to 32 bits, worked out
// with 64-bit integers in the testbench. The extreme operands -128*-128
// are included. Latency 1 cycle.
module tb_sfc_ewmul;
  import sfc_pkg::*;

  localparam int ICP = 4, NT = 60;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [Q_W-1:0] xq [ICP][TDOM][TDOM];
  logic signed [Q_W-1:0] wq [ICP][TDOM][TDOM];
  logic [SH_W-1:0] shx [TDOM][TDOM];
  logic [SH_W-1:0] shw [TDOM][TDOM];
  logic out_valid;
  logic signed [ACC_W-1:0] p [TDOM][TDOM];
  int checks = 0, failures = 0;
  longint ep [NT][TDOM][TDOM];
  int sent_cyc [NT];
  int nout = 0, cyc = 0;

  sfc_ewmul dut (.clk, .rst_n, .in_valid, .xq, .wq, .shx, .shw, .out_valid, .p);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        checks++;
        if (longint'(p[i][j]) != ep[nout][i][j]) begin
          failures++;
          if (failures < 10) $display("tile %0d p[%0d][%0d]=%0d exp %0d", nout, i, j, p[i][j], ep[nout][i][j]);
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
      for (int i = 0; i < TDOM; i++)
        for (int j = 0; j < TDOM; j++) begin
          longint s, a, b, sum;
          int sx, sw;
          sx = (t == 0) ? 7 : $urandom % 8;
          sw = (t == 0) ? 7 : $urandom % 8;
          sum = 0;
          for (int c = 0; c < ICP; c++) begin
            a = (t == 0) ? -128 : longint'($signed(8'($urandom)));
            b = (t == 0) ? -128 : longint'($signed(8'($urandom)));
            sum += a * b;
            xq[c][i][j] <= Q_W'(a);
            wq[c][i][j] <= Q_W'(b);
          end
          s = sum <<< (sx + sw);
          ep[t][i][j] = longint'($signed(s[ACC_W-1:0]));
          shx[i][j] <= SH_W'(sx);
          shw[i][j] <= SH_W'(sw);
        end
      in_valid <= 1;
      sent_cyc[t] = cyc;
      @(posedge clk);
      if (t % 7 == 5) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (nout != NT) begin failures++; $display("got %0d tiles", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
