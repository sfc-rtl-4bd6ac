// sfc_ewmul - element-wise multiply stage for one output channel.
//
// For each of the 12x12 frequencies it multiplies the int8 transformed
// activation of each of the ICP input channels with the matching int8
// transformed filter (ICP x 144 multipliers), rescales each product back
// to a common scale by shifting it left by the sum of the activation and
// filter scale exponents of that frequency, and sums over the ICP input
// channels. The element-wise product and the sum over input channels are
// the algorithm's; the shift-based dequantization follows from the
// power-of-two scales chosen in sfc_freq_quant.
// The accelerator has OCP instances of this module.
//
// Interface: in_valid, xq, wq, shx, shw in; out_valid, p out.
// Timing: one tile per cycle, latency 1 cycle.
module sfc_ewmul
  import sfc_pkg::*;
#(
  parameter int ICP  = 4,
  parameter int PW   = ACC_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [Q_W-1:0] xq  [ICP][TDOM][TDOM],
  input  logic signed [Q_W-1:0] wq  [ICP][TDOM][TDOM],
  input  logic [SH_W-1:0]       shx [TDOM][TDOM],
  input  logic [SH_W-1:0]       shw [TDOM][TDOM],
  output logic                  out_valid,
  output logic signed [PW-1:0]  p   [TDOM][TDOM]
);

  logic signed [PW-1:0] pn [TDOM][TDOM];

  always_comb begin
    logic signed [2*Q_W-1:0] prod;
    logic signed [PW-1:0]    sum;
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        sum = '0;
        for (int c = 0; c < ICP; c++) begin
          prod = xq[c][i][j] * wq[c][i][j];
          sum  = sum + PW'(prod);
        end
        pn[i][j] = sum <<< ({1'b0, shx[i][j]} + {1'b0, shw[i][j]});
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) p <= pn;
  end

endmodule
