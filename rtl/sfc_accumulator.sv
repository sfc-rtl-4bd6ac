// sfc_accumulator - transform-domain accumulation over input-channel groups.
//
// Because the output transform is linear, the per-group partial products of
// all input-channel groups are summed in the transform domain and the
// output transform is applied once per output tile. For each of the OCP
// output channels it holds 12x12 accumulators: a tile tagged 'first'
// overwrites them, any other tile adds to them, and one cycle after a tile
// tagged 'last' the sums are presented with out_valid. Accumulating before
// the output transform follows the algorithm's sum over input channels;
// the first/last tagging is this design's choice.
//
// Interface: in_valid, first, last, p in; out_valid, acc out.
// Timing: one tile per cycle, latency 1 cycle; acc is valid while
// out_valid is high and stays until the next tile arrives.
module sfc_accumulator
  import sfc_pkg::*;
#(
  parameter int OCP = 4,
  parameter int W   = ACC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                first,
  input  logic                last,
  input  logic signed [W-1:0] p   [OCP][TDOM][TDOM],
  output logic                out_valid,
  output logic signed [W-1:0] acc [OCP][TDOM][TDOM]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid & last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < OCP; o++)
        for (int i = 0; i < TDOM; i++)
          for (int j = 0; j < TDOM; j++)
            acc[o][i][j] <= '0;
    end else if (in_valid) begin
      for (int o = 0; o < OCP; o++)
        for (int i = 0; i < TDOM; i++)
          for (int j = 0; j < TDOM; j++)
            acc[o][i][j] <= first ? p[o][i][j] : acc[o][i][j] + p[o][i][j];
    end
  end

endmodule
