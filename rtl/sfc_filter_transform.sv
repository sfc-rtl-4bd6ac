// sfc_filter_transform - 2-D filter transform Wt = G F G^T of SFC-6(7x7,3x3).
//
// Takes one 3x3 signed filter and produces its 12x12 transform-domain form.
// G holds only -1, 0 and +1, so the transform is additions only: columns
// first (12x3 intermediate), then rows. G is the algorithm's matrix; the
// register at the output is this design's choice. In the accelerator the
// filter transform is done once, when a filter is loaded, not per tile.
//
// Interface: in_valid/f in, out_valid/wt out. Timing: latency 1 cycle,
// one filter per cycle. wt is IN_W+4 bits wide (worst case 9*|f|max).
module sfc_filter_transform
  import sfc_pkg::*;
#(
  parameter int IN_W  = DATA_W,
  parameter int OUT_W = IN_W + 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  f  [KSZ][KSZ],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] wt [TDOM][TDOM]
);

  logic signed [OUT_W-1:0] col [TDOM][KSZ];   // G F
  logic signed [OUT_W-1:0] res [TDOM][TDOM];  // (G F) G^T

  always_comb begin
    for (int i = 0; i < TDOM; i++)
      for (int c = 0; c < KSZ; c++) begin
        col[i][c] = '0;
        for (int r = 0; r < KSZ; r++)
          if (G[i][r] == 1)       col[i][c] = col[i][c] + OUT_W'(f[r][c]);
          else if (G[i][r] == -1) col[i][c] = col[i][c] - OUT_W'(f[r][c]);
      end
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        res[i][j] = '0;
        for (int c = 0; c < KSZ; c++)
          if (G[j][c] == 1)       res[i][j] = res[i][j] + col[i][c];
          else if (G[j][c] == -1) res[i][j] = res[i][j] - col[i][c];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) wt <= res;
  end

endmodule
