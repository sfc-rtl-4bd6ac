// tb_sfc_accumulator - self-checking test of the group accumulator.
//
// Streams random 32-bit partial products for OCP output channels in output
// tiles of 1 to 9 groups (first/last tags), with idle cycles between some
// tiles, and checks that exactly one result appears one cycle after each
// 'last' and that it equals the wrapped 32-bit sum of that tile's groups.
module tb_sfc_accumulator;
  import sfc_pkg::*;

  localparam int OCP = 4, NTILE = 40;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0;
  logic signed [ACC_W-1:0] p [OCP][TDOM][TDOM];
  logic out_valid;
  logic signed [ACC_W-1:0] acc [OCP][TDOM][TDOM];
  int checks = 0, failures = 0;
  logic signed [ACC_W-1:0] eacc [NTILE][OCP][TDOM][TDOM];
  int last_cyc [NTILE];
  int nout = 0, cyc = 0;

  sfc_accumulator dut (.clk, .rst_n, .in_valid, .first, .last, .p, .out_valid, .acc);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int o = 0; o < OCP; o++)
      for (int i = 0; i < TDOM; i++)
        for (int j = 0; j < TDOM; j++) begin
          checks++;
          if (acc[o][i][j] != eacc[nout][o][i][j]) begin
            failures++;
            if (failures < 10) $display("tile %0d acc[%0d][%0d][%0d]=%0d exp %0d", nout, o, i, j,
                                        acc[o][i][j], eacc[nout][o][i][j]);
          end
        end
    checks++;
    if (cyc - last_cyc[nout] != 2) begin failures++; $display("latency %0d", cyc - last_cyc[nout]); end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < NTILE; t++) begin
      int ng;
      ng = 1 + (t % 9);
      for (int g = 0; g < ng; g++) begin
        for (int o = 0; o < OCP; o++)
          for (int i = 0; i < TDOM; i++)
            for (int j = 0; j < TDOM; j++) begin
              logic signed [ACC_W-1:0] v;
              v = ACC_W'($urandom);
              p[o][i][j] <= v;
              eacc[t][o][i][j] = (g == 0) ? v : eacc[t][o][i][j] + v;
            end
        in_valid <= 1;
        first <= (g == 0);
        last  <= (g == ng - 1);
        if (g == ng - 1) last_cyc[t] = cyc;
        @(posedge clk);
        if (g == 1 && t % 3 == 0) begin in_valid <= 0; @(posedge clk); end
      end
      if (t % 4 == 1) begin in_valid <= 0; repeat (2) @(posedge clk); end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (nout != NTILE) begin failures++; $display("got %0d tiles", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
