// sfc_weight_buffer - on-chip store of quantized transform-domain filters.
//
// Filters are kept already transformed (G F G^T) and quantized to int8, so
// no filter transform is needed per tile. The buffer has one memory per
// (output channel, input channel) lane of the OCP x ICP array; each memory
// holds one 12x12 int8 filter per input-channel group (GROUPS entries), so
// a layer with up to 4*GROUPS input channels can be accumulated without
// reloading. A read returns all OCP x ICP filters of one group.
// The buffer also keeps, per output-channel lane, the 12x12 per-frequency
// weight scale exponents (the filter scale is per output channel and per
// frequency, shared by all input channels); a filter write updates the
// scales of its output-channel lane.
// Storing filters in the transform domain follows the algorithm's remark
// that data can be kept in that domain; the organisation, GROUPS and the
// write port are this design's choices.
//
// Interface: write port (wr_en, wr_oc, wr_ic, wr_grp, wr_w, wr_sh), one
// filter per cycle; read port (rd_en, rd_grp) with registered data
// rd_w one cycle later; w_sh always shows the current scales.
module sfc_weight_buffer
  import sfc_pkg::*;
#(
  parameter int ICP    = 4,
  parameter int OCP    = 4,
  parameter int GROUPS = 128,
  parameter int GRP_W  = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [$clog2(OCP)-1:0]      wr_oc,
  input  logic [$clog2(ICP)-1:0]      wr_ic,
  input  logic [GRP_W-1:0]            wr_grp,
  input  logic signed [Q_W-1:0]       wr_w  [TDOM][TDOM],
  input  logic [SH_W-1:0]             wr_sh [TDOM][TDOM],
  input  logic                        rd_en,
  input  logic [GRP_W-1:0]            rd_grp,
  output logic signed [Q_W-1:0]       rd_w  [OCP][ICP][TDOM][TDOM],
  output logic [SH_W-1:0]             w_sh  [OCP][TDOM][TDOM]
);

  localparam int WORD_W = TDOM * TDOM * Q_W;

  logic [WORD_W-1:0] mem  [OCP][ICP][GROUPS];
  logic [WORD_W-1:0] wword;
  logic [WORD_W-1:0] rword [OCP][ICP];

  always_comb begin
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++)
        wword[(i*TDOM+j)*Q_W +: Q_W] = wr_w[i][j];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_oc][wr_ic][wr_grp] <= wword;
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int o = 0; o < OCP; o++)
        for (int c = 0; c < ICP; c++)
          rword[o][c] <= mem[o][c][rd_grp];
  end

  always_comb begin
    for (int o = 0; o < OCP; o++)
      for (int c = 0; c < ICP; c++)
        for (int i = 0; i < TDOM; i++)
          for (int j = 0; j < TDOM; j++)
            rd_w[o][c][i][j] = rword[o][c][(i*TDOM+j)*Q_W +: Q_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < OCP; o++)
        for (int i = 0; i < TDOM; i++)
          for (int j = 0; j < TDOM; j++)
            w_sh[o][i][j] <= '0;
    end else if (wr_en) begin
      w_sh[wr_oc] <= wr_sh;
    end
  end

endmodule
