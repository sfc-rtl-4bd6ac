// tb_sfc_weight_buffer - self-checking test of the transform-domain filter store.
//
// Writes random 12x12 int8 filters to every (output lane, input lane, group)
// entry in random order, some twice, keeping a software copy, then reads every
// group back and compares all OCP x ICP filters one cycle after the read.
// The per-output-lane scale exponents must follow the last write to that
// lane and reset to zero.
module tb_sfc_weight_buffer;
  import sfc_pkg::*;

  localparam int ICP = 4, OCP = 4, GROUPS = 128, GRP_W = 7;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [1:0] wr_oc, wr_ic;
  logic [GRP_W-1:0] wr_grp, rd_grp;
  logic signed [Q_W-1:0] wr_w [TDOM][TDOM];
  logic [SH_W-1:0] wr_sh [TDOM][TDOM];
  logic signed [Q_W-1:0] rd_w [OCP][ICP][TDOM][TDOM];
  logic [SH_W-1:0] w_sh [OCP][TDOM][TDOM];
  int checks = 0, failures = 0;
  byte model [OCP][ICP][GROUPS][TDOM][TDOM];
  logic [SH_W-1:0] msh [OCP][TDOM][TDOM];

  sfc_weight_buffer dut (.clk, .rst_n, .wr_en, .wr_oc, .wr_ic, .wr_grp, .wr_w, .wr_sh,
                         .rd_en, .rd_grp, .rd_w, .w_sh);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_one(int o, int c, int g);
    @(negedge clk);
    wr_en = 1; wr_oc = 2'(o); wr_ic = 2'(c); wr_grp = GRP_W'(g);
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        model[o][c][g][i][j] = byte'($urandom);
        wr_w[i][j]  = model[o][c][g][i][j];
        msh[o][i][j] = SH_W'($urandom);
        wr_sh[i][j] = msh[o][i][j];
      end
    @(posedge clk);
    #1 wr_en = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    // scales reset to zero
    for (int o = 0; o < OCP; o++) for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) begin
      checks++;
      if (w_sh[o][i][j] != 0) failures++;
    end
    rst_n = 1;
    for (int g = 0; g < GROUPS; g++)
      for (int o = 0; o < OCP; o++)
        for (int c = 0; c < ICP; c++)
          write_one(o, c, (g * 37 + o + c) % GROUPS);
    for (int k = 0; k < 100; k++) write_one($urandom % OCP, $urandom % ICP, $urandom % GROUPS);
    for (int o = 0; o < OCP; o++) for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) begin
      checks++;
      if (w_sh[o][i][j] != msh[o][i][j]) failures++;
    end
    // read back, one group per cycle
    for (int g = 0; g < GROUPS; g++) begin
      int gg;
      gg = (g * 5) % GROUPS;
      @(negedge clk);
      rd_en = 1; rd_grp = GRP_W'(gg);
      @(posedge clk);
      #1 rd_en = 0;
      for (int o = 0; o < OCP; o++) for (int c = 0; c < ICP; c++)
        for (int i = 0; i < TDOM; i++) for (int j = 0; j < TDOM; j++) begin
          checks++;
          if (rd_w[o][c][i][j] != model[o][c][gg][i][j]) begin
            failures++;
            if (failures < 10) $display("grp %0d lane %0d,%0d [%0d][%0d]=%0d exp %0d", gg, o, c, i, j,
                                        rd_w[o][c][i][j], model[o][c][gg][i][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
