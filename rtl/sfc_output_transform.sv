// sfc_output_transform - 2-D output transform Y = A^T M A of SFC-6(7x7,3x3).
//
// Takes the 12x12 accumulated transform-domain tile M and produces the 7x7
// output tile. The integer matrix used is 6*A, whose entries are 0, +-1, +-2
// and 6 (rows 8..11 are the correction terms that repair the wrapped outputs
// of the cyclic convolution), so the transform needs only additions and
// constant shifts. The result is 36 times the convolution; the algorithm
// folds the 1/36 into the (floating) dequantization scale, so it is not
// divided out here. Columns are done first (7x12), then rows.
//
// Interface: in_valid/m in, out_valid/y out. Timing: one tile per cycle,
// latency 1 cycle. y is IN_W+8 bits wide (column sums of 6*A are <= 16).
module sfc_output_transform
  import sfc_pkg::*;
#(
  parameter int IN_W  = ACC_W,
  parameter int OUT_W = IN_W + 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  m  [TDOM][TDOM],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y  [TILE_OUT][TILE_OUT]
);

  logic signed [OUT_W-1:0] col [TILE_OUT][TDOM];      // A^T M
  logic signed [OUT_W-1:0] res [TILE_OUT][TILE_OUT];  // (A^T M) A

  // coefficient times operand for the coefficient set {0, +-1, +-2, 6}
  function automatic logic signed [OUT_W-1:0] cmul(int c, logic signed [OUT_W-1:0] v);
    case (c)
      1:       return v;
      -1:      return -v;
      2:       return v <<< 1;
      -2:      return -(v <<< 1);
      6:       return (v <<< 2) + (v <<< 1);
      default: return '0;
    endcase
  endfunction

  always_comb begin
    for (int i = 0; i < TILE_OUT; i++)
      for (int c = 0; c < TDOM; c++) begin
        col[i][c] = '0;
        for (int r = 0; r < TDOM; r++)
          col[i][c] = col[i][c] + cmul(A6[r][i], OUT_W'(m[r][c]));
      end
    for (int i = 0; i < TILE_OUT; i++)
      for (int j = 0; j < TILE_OUT; j++) begin
        res[i][j] = '0;
        for (int c = 0; c < TDOM; c++)
          res[i][j] = res[i][j] + cmul(A6[c][j], col[i][c]);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) y <= res;
  end

endmodule
