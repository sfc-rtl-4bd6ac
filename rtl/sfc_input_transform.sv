// sfc_input_transform - 2-D input transform Xt = B^T X B of SFC-6(7x7,3x3).
//
// Takes one 9x9 tile of signed activations and produces the 12x12
// transform-domain tile. Every coefficient of B^T is -1, 0 or +1, so the
// transform is built from additions and subtractions only: first the
// columns (12x9 intermediate), then the rows. The B^T matrix is the one the
// algorithm defines; the row-then-column order and the single output
// register are this design's choices.
//
// Interface: in_valid/x in, out_valid/xt out. Timing: one tile per cycle,
// latency 1 cycle (registered output). xt is IN_W+6 bits wide, enough for
// the worst case 36*|x|max.
module sfc_input_transform
  import sfc_pkg::*;
#(
  parameter int IN_W  = DATA_W,
  parameter int OUT_W = IN_W + 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x  [TILE_IN][TILE_IN],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] xt [TDOM][TDOM]
);

  logic signed [OUT_W-1:0] col [TDOM][TILE_IN];  // B^T X
  logic signed [OUT_W-1:0] res [TDOM][TDOM];     // (B^T X) B

  always_comb begin
    for (int i = 0; i < TDOM; i++)
      for (int c = 0; c < TILE_IN; c++) begin
        col[i][c] = '0;
        for (int r = 0; r < TILE_IN; r++)
          if (BT[i][r] == 1)       col[i][c] = col[i][c] + OUT_W'(x[r][c]);
          else if (BT[i][r] == -1) col[i][c] = col[i][c] - OUT_W'(x[r][c]);
      end
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        res[i][j] = '0;
        for (int c = 0; c < TILE_IN; c++)
          if (BT[j][c] == 1)       res[i][j] = res[i][j] + col[i][c];
          else if (BT[j][c] == -1) res[i][j] = res[i][j] - col[i][c];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) xt <= res;
  end

endmodule
