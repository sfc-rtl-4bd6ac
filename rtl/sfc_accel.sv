// sfc_accel - SFC-6(7x7,3x3) fast-convolution accelerator, top level.
//
// Computes 3x3, stride-1 convolution layers tile by tile with the Symbolic
// Fourier Convolution algorithm: each 9x9 input tile is taken into a 12x12
// transform domain with additions only (B^T X B), multiplied element-wise
// with filters already held in that domain (G F G^T), summed over input
// channels, and brought back with additions only (A^T M A) to a 7x7 output
// tile. Transform-domain operands are int8 with per-frequency scales.
// The array processes ICP=4 input channels x OCP=4 output channels x one
// 7x7 output tile per cycle (the [4x4x7x7] parallelism of the reference
// FPGA design), i.e. 4x4x144 int8 multipliers, fully pipelined.
//
// Pipeline (one tile per cycle when tile_valid stays high):
//   t0  tile accepted; controller tags group/first/last
//   t1  input transform registered (ICP x sfc_input_transform);
//       weight buffer read issued for the tile's group
//   t2  activations requantized per frequency (ICP x sfc_freq_quant);
//       filters of the group available
//   t3  element-wise products rescaled and summed over ICP (OCP x sfc_ewmul)
//   t4  summed over groups in the transform domain (sfc_accumulator)
//   t5  output transform (OCP x sfc_output_transform): y_valid
// y_valid rises 5 cycles after the tile tagged 'last' is accepted.
// y is 36 times the integer convolution of the dequantized operands (the
// 1/36 of the inverse transform is left to the output scale); with all
// scale exponents 0 and no clipping it is exactly 36x the int convolution.
//
// Filter loading (mode switch): a 3x3 int8 filter for lane (wl_oc, wl_ic)
// and group wl_grp is sent with its per-frequency scale exponents; it is
// transformed (sfc_filter_transform), requantized (sfc_freq_quant) and
// written into sfc_weight_buffer two cycles later. sfc_controller lets
// loads in only between output tiles with the pipeline empty and stalls
// tiles meanwhile. Loading filters through the on-chip filter transform,
// the shift-based scales, the group-major tile order and the handshakes
// are this design's choices; the transforms, int8 operands, per-frequency
// scaling and the 4x4x7x7 parallelism follow the algorithm and its FPGA
// evaluation. The 132-multiplier Hermitian variant is not used: every
// lane has the 144 multipliers of the listed matrices.
module sfc_accel
  import sfc_pkg::*;
#(
  parameter int ICP    = 4,
  parameter int OCP    = 4,
  parameter int GROUPS = 128,
  parameter int GRP_W  = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration, held stable while busy
  input  logic [GRP_W:0]           cfg_groups,
  input  logic [SH_W-1:0]          cfg_shx  [TDOM][TDOM],
  // input tile stream
  input  logic                     tile_valid,
  output logic                     tile_ready,
  input  logic signed [DATA_W-1:0] tile_x   [ICP][TILE_IN][TILE_IN],
  // filter load stream
  input  logic                     wl_valid,
  output logic                     wl_ready,
  input  logic [$clog2(OCP)-1:0]   wl_oc,
  input  logic [$clog2(ICP)-1:0]   wl_ic,
  input  logic [GRP_W-1:0]         wl_grp,
  input  logic signed [DATA_W-1:0] wl_f     [KSZ][KSZ],
  input  logic [SH_W-1:0]          wl_shw   [TDOM][TDOM],
  // output tiles
  output logic                     y_valid,
  output logic signed [Y_W-1:0]    y        [OCP][TILE_OUT][TILE_OUT],
  // status
  output logic                     stall,
  output logic                     busy,
  output logic                     sat_x,
  output logic                     sat_w
);

  // ---------------- control ----------------
  logic             tile_fire, first0, last0;
  logic [GRP_W-1:0] grp0;

  sfc_controller #(.GROUPS(GROUPS), .GRP_W(GRP_W), .PIPE_LAT(5), .FILL_LAT(2)) u_ctrl (
    .clk, .rst_n, .cfg_groups,
    .tile_valid, .tile_ready, .wl_valid, .wl_ready,
    .tile_fire, .grp(grp0), .first(first0), .last(last0),
    .stall, .busy
  );

  // tags travelling with the tile: t1, t2, t3
  logic             first1, first2, first3, last1, last2, last3;
  logic [GRP_W-1:0] grp1;
  always_ff @(posedge clk) begin
    grp1   <= grp0;
    first1 <= first0;  first2 <= first1;  first3 <= first2;
    last1  <= last0;   last2  <= last1;   last3  <= last2;
  end

  // ---------------- filter load path ----------------
  logic                     wl_fire;
  logic                     wt_valid, wq_valid;
  logic signed [WT_W-1:0]   wt [TDOM][TDOM];
  logic signed [Q_W-1:0]    wq [TDOM][TDOM];
  logic [SH_W-1:0]          shw1 [TDOM][TDOM];
  logic [SH_W-1:0]          shw2 [TDOM][TDOM];
  logic [$clog2(OCP)-1:0]   woc1, woc2;
  logic [$clog2(ICP)-1:0]   wic1, wic2;
  logic [GRP_W-1:0]         wgrp1, wgrp2;

  assign wl_fire = wl_valid && wl_ready;

  sfc_filter_transform #(.IN_W(DATA_W), .OUT_W(WT_W)) u_ftr (
    .clk, .rst_n, .in_valid(wl_fire), .f(wl_f), .out_valid(wt_valid), .wt
  );

  always_ff @(posedge clk) begin
    shw1 <= wl_shw;  woc1 <= wl_oc;  wic1 <= wl_ic;  wgrp1 <= wl_grp;
    shw2 <= shw1;    woc2 <= woc1;   wic2 <= wic1;   wgrp2 <= wgrp1;
  end

  sfc_freq_quant #(.IN_W(WT_W), .OUT_W(Q_W), .SHW(SH_W)) u_wquant (
    .clk, .rst_n, .in_valid(wt_valid), .v(wt), .sh(shw1),
    .out_valid(wq_valid), .q(wq), .sat(sat_w)
  );

  // ---------------- weight buffer ----------------
  logic                  rd_en1;
  logic signed [Q_W-1:0] wbuf [OCP][ICP][TDOM][TDOM];
  logic [SH_W-1:0]       wsh  [OCP][TDOM][TDOM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_en1 <= 1'b0;
    else        rd_en1 <= tile_fire;
  end

  sfc_weight_buffer #(.ICP(ICP), .OCP(OCP), .GROUPS(GROUPS), .GRP_W(GRP_W)) u_wbuf (
    .clk, .rst_n,
    .wr_en(wq_valid), .wr_oc(woc2), .wr_ic(wic2), .wr_grp(wgrp2), .wr_w(wq), .wr_sh(shw2),
    .rd_en(rd_en1), .rd_grp(grp1), .rd_w(wbuf), .w_sh(wsh)
  );

  // ---------------- activation path ----------------
  logic                   xt_valid [ICP];
  logic signed [XT_W-1:0] xt       [ICP][TDOM][TDOM];
  logic                   xq_valid [ICP];
  logic signed [Q_W-1:0]  xq       [ICP][TDOM][TDOM];
  logic [ICP-1:0]         xsat;

  for (genvar c = 0; c < ICP; c++) begin : g_in
    sfc_input_transform #(.IN_W(DATA_W), .OUT_W(XT_W)) u_itr (
      .clk, .rst_n, .in_valid(tile_fire), .x(tile_x[c]),
      .out_valid(xt_valid[c]), .xt(xt[c])
    );
    sfc_freq_quant #(.IN_W(XT_W), .OUT_W(Q_W), .SHW(SH_W)) u_xquant (
      .clk, .rst_n, .in_valid(xt_valid[c]), .v(xt[c]), .sh(cfg_shx),
      .out_valid(xq_valid[c]), .q(xq[c]), .sat(xsat[c])
    );
  end
  assign sat_x = |xsat;

  // ---------------- multiplier array ----------------
  logic                   p_valid [OCP];
  logic signed [ACC_W-1:0] p      [OCP][TDOM][TDOM];

  for (genvar o = 0; o < OCP; o++) begin : g_mul
    sfc_ewmul #(.ICP(ICP), .PW(ACC_W)) u_mul (
      .clk, .rst_n, .in_valid(xq_valid[0]), .xq, .wq(wbuf[o]),
      .shx(cfg_shx), .shw(wsh[o]), .out_valid(p_valid[o]), .p(p[o])
    );
  end

  // ---------------- accumulation over input-channel groups ----------------
  logic                    acc_valid;
  logic signed [ACC_W-1:0] acc [OCP][TDOM][TDOM];

  sfc_accumulator #(.OCP(OCP), .W(ACC_W)) u_acc (
    .clk, .rst_n, .in_valid(p_valid[0]), .first(first3), .last(last3), .p,
    .out_valid(acc_valid), .acc
  );

  // ---------------- output transform ----------------
  logic y_valid_o [OCP];

  for (genvar o = 0; o < OCP; o++) begin : g_out
    sfc_output_transform #(.IN_W(ACC_W), .OUT_W(Y_W)) u_otr (
      .clk, .rst_n, .in_valid(acc_valid), .m(acc[o]),
      .out_valid(y_valid_o[o]), .y(y[o])
    );
  end
  assign y_valid = y_valid_o[0];

endmodule
