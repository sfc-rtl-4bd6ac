// sfc_freq_quant - frequency-wise requantization of a transform-domain tile.
//
// Each of the 12x12 frequencies has its own scale. Here a scale is a power
// of two, 2^sh with sh in 0..2^SH_W-1, so requantization is an arithmetic
// right shift with round-half-up, followed by saturation to a signed
// OUT_W-bit integer (int8 by default). Per-frequency scaling groups follow
// the algorithm's quantization scheme (activation scales of size TxT,
// filter scales of size OCxTxT); restricting scales to powers of two is
// this design's choice, so that the matching dequantization in the
// multiplier array is a left shift.
//
// Interface: in_valid, v (IN_W-bit values), sh (per-frequency exponent) in;
// out_valid, q, sat (some value of this tile was clipped) out.
// Timing: one tile per cycle, latency 1 cycle.
module sfc_freq_quant
  import sfc_pkg::*;
#(
  parameter int IN_W  = XT_W,
  parameter int OUT_W = Q_W,
  parameter int SHW   = SH_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  v   [TDOM][TDOM],
  input  logic        [SHW-1:0]   sh  [TDOM][TDOM],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] q   [TDOM][TDOM],
  output logic                    sat
);

  localparam logic signed [IN_W:0] QMAX = (IN_W+1)'((1 <<< (OUT_W-1)) - 1);
  localparam logic signed [IN_W:0] QMIN = -(IN_W+1)'(1 <<< (OUT_W-1));

  logic signed [OUT_W-1:0] qn [TDOM][TDOM];
  logic                    satn;

  always_comb begin
    logic signed [IN_W:0] r;
    satn = 1'b0;
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        r = (IN_W+1)'(v[i][j]);
        if (sh[i][j] != '0)
          r = (r + ((IN_W+1)'(1) <<< (sh[i][j] - 1'b1))) >>> sh[i][j];
        if (r > QMAX) begin
          qn[i][j] = QMAX[OUT_W-1:0];
          satn     = 1'b1;
        end else if (r < QMIN) begin
          qn[i][j] = QMIN[OUT_W-1:0];
          satn     = 1'b1;
        end else begin
          qn[i][j] = r[OUT_W-1:0];
        end
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      sat       <= in_valid & satn;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) q <= qn;
  end

endmodule
