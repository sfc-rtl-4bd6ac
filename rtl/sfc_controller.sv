// sfc_controller - stream sequencing and load/compute arbitration.
//
// The datapath takes one input tile (ICP channels of 9x9) per cycle. An
// output tile needs cfg_groups consecutive input tiles, one per input-channel
// group, in group order 0..cfg_groups-1. The controller counts the groups,
// addresses the weight buffer with the group number and tags each accepted
// tile 'first' (group 0) and 'last' (group cfg_groups-1).
// It also switches between the two modes of the accelerator: computing
// (tiles accepted) and loading filters (filter writes accepted). A filter
// load is only taken at an output-tile boundary (group counter at 0) and
// when no tile is left in the pipeline, so that tiles in flight never see
// half-updated weights; while a load is pending or running, tiles are
// stalled. A tile is only taken once every filter write in flight
// (FILL_LAT cycles) has reached the weight buffer.
// The published design describes no control scheme; all of this is this
// design's own choice.
//
// Interface: tile_valid/tile_ready and wl_valid/wl_ready handshakes
// (a transfer happens when both are high), grp/first/last tags of the
// accepted tile, stall (a tile is offered but held back), busy.
module sfc_controller #(
  parameter int GROUPS   = 128,
  parameter int GRP_W    = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  parameter int PIPE_LAT = 5,   // cycles from tile accept to the last stage using weights/scales
  parameter int FILL_LAT = 2    // cycles from filter accept to its write into the buffer
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [GRP_W:0]   cfg_groups,   // input-channel groups per output tile, 1..GROUPS
  input  logic             tile_valid,
  output logic             tile_ready,
  input  logic             wl_valid,
  output logic             wl_ready,
  output logic             tile_fire,
  output logic [GRP_W-1:0] grp,
  output logic             first,
  output logic             last,
  output logic             stall,
  output logic             busy
);

  logic [PIPE_LAT-1:0] tile_pipe;   // tiles in flight, one bit per stage
  logic [FILL_LAT-1:0] wl_pipe;     // filter writes in flight
  logic                boundary;
  logic                wl_fire;

  assign boundary   = (grp == '0);
  assign wl_ready   = boundary && (tile_pipe == '0);
  assign wl_fire    = wl_valid && wl_ready;
  assign tile_ready = !(boundary && wl_valid) && (wl_pipe == '0);
  assign tile_fire  = tile_valid && tile_ready;
  assign first      = boundary;
  assign last       = ({1'b0, grp} == cfg_groups - 1'b1);
  assign stall      = tile_valid && !tile_ready;
  assign busy       = (tile_pipe != '0) || (wl_pipe != '0) || !boundary;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp       <= '0;
      tile_pipe <= '0;
      wl_pipe   <= '0;
    end else begin
      tile_pipe <= {tile_pipe[PIPE_LAT-2:0], tile_fire};
      wl_pipe   <= {wl_pipe[FILL_LAT-2:0], wl_fire};
      if (tile_fire) grp <= last ? '0 : grp + 1'b1;
    end
  end

  // a filter write and a tile never enter in the same cycle
  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(tile_fire && wl_fire));
  // the group count must lie in 1..GROUPS
  a_groups: assert property (@(posedge clk) disable iff (!rst_n)
                             tile_fire |-> (cfg_groups != '0 && cfg_groups <= (GRP_W+1)'(GROUPS)));

endmodule
