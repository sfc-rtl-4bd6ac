// tb_sfc_freq_quant - self-checking test of the per-frequency requantizer.
//
// Random 14-bit transform-domain values with a random exponent per
// frequency are requantized; each result is compared with
// clamp(floor((v + 2^(s-1)) / 2^s), -128, 127) (no rounding term for s=0)
// computed with integer division in the testbench. The sat flag must be
// set exactly for tiles where some value was clipped. Latency 1 cycle.
module tb_sfc_freq_quant;
  import sfc_pkg::*;

  localparam int NT = 200;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [XT_W-1:0] v  [TDOM][TDOM];
  logic [SH_W-1:0]        sh [TDOM][TDOM];
  logic out_valid, sat;
  logic signed [Q_W-1:0]  q  [TDOM][TDOM];
  int checks = 0, failures = 0;
  longint ev [NT][TDOM][TDOM];
  bit     esat [NT];
  int sent_cyc [NT];
  int nout = 0, cyc = 0, nsat = 0, nround = 0;

  sfc_freq_quant dut (.clk, .rst_n, .in_valid, .v, .sh, .out_valid, .q, .sat);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint floordiv(longint a, longint b);
    if (a >= 0) return a / b;
    return -((-a + b - 1) / b);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        checks++;
        if (longint'(q[i][j]) != ev[nout][i][j]) begin
          failures++;
          if (failures < 10) $display("tile %0d q[%0d][%0d]=%0d exp %0d", nout, i, j, q[i][j], ev[nout][i][j]);
        end
      end
    checks++;
    if (sat != esat[nout]) begin failures++; $display("tile %0d sat %0b exp %0b", nout, sat, esat[nout]); end
    checks++;
    if (cyc - sent_cyc[nout] != 2) begin failures++; $display("latency %0d", cyc - sent_cyc[nout]); end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      esat[t] = 0;
      for (int i = 0; i < TDOM; i++)
        for (int j = 0; j < TDOM; j++) begin
          longint vv, s, r;
          // small values and exponents in even tiles so most do not clip
          vv = (t % 2 == 0) ? longint'($signed(8'($urandom))) : longint'($signed(XT_W'($urandom)));
          s  = (t % 2 == 0) ? ($urandom % 2) : ($urandom % 8);
          if (t == 2) begin vv = -3; s = 1; end  // -1.5 rounds up to -1
          r = (s > 0) ? floordiv(vv + (64'sd1 <<< (s - 1)), 64'sd1 <<< s) : vv;
          if (s > 0 && (vv % (64'sd1 <<< s)) != 0) nround++;
          if (r > 127)  begin r = 127;  esat[t] = 1; end
          if (r < -128) begin r = -128; esat[t] = 1; end
          ev[t][i][j] = r;
          v[i][j]  <= XT_W'(vv);
          sh[i][j] <= SH_W'(s);
        end
      if (esat[t]) nsat++;
      in_valid <= 1;
      sent_cyc[t] = cyc;
      @(posedge clk);
      if (t % 9 == 4) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (nout != NT) begin failures++; $display("got %0d tiles", nout); end
    // both clipping and non-clipping tiles and rounded values must have occurred
    checks++;
    if (nsat == 0 || nsat == NT || nround == 0) begin failures++; $display("coverage sat=%0d round=%0d", nsat, nround); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
