// tb_sfc_controller - self-checking test of the sequencing controller.
//
// Random tile and filter-load requests are offered (the filter requests
// held until taken, as a valid/ready source must) with a random group
// count. A software model checks every cycle: group numbers run
// 0..cfg_groups-1 with first/last on the ends; a filter load is taken only
// at a group-0 boundary with no tile left in the PIPE_LAT-stage pipeline; a tile
// is never taken while a filter write is in flight (FILL_LAT cycles), nor while a load
// waits at a boundary; and a request is not refused when the rules allow
// it. Stalls, loads and completed output tiles must all occur.
module tb_sfc_controller;

  localparam int GROUPS = 16, GRP_W = 4, PIPE_LAT = 5, FILL_LAT = 2;

  logic clk = 0, rst_n = 0;
  logic [GRP_W:0] cfg_groups;
  logic tile_valid = 0, wl_valid = 0;
  logic tile_ready, wl_ready, tile_fire, first, last, stall, busy;
  logic [GRP_W-1:0] grp;
  int checks = 0, failures = 0;
  int mgrp = 0, since_tile = 100, since_wl = 100;
  bit wl_took = 0;
  int n_stall = 0, n_wl = 0, n_done = 0, n_tiles = 0;

  sfc_controller #(.GROUPS(GROUPS), .PIPE_LAT(PIPE_LAT), .FILL_LAT(FILL_LAT)) dut (
    .clk, .rst_n, .cfg_groups, .tile_valid, .tile_ready, .wl_valid, .wl_ready,
    .tile_fire, .grp, .first, .last, .stall, .busy);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%0t: %s", $time, what);
    end
  endtask

  // model check just before each edge
  always @(negedge clk) if (rst_n) begin
    bit wl_ok, tile_ok, wl_fire;
    wl_ok   = (mgrp == 0) && (since_tile > PIPE_LAT);
    tile_ok = !(mgrp == 0 && wl_valid) && (since_wl > FILL_LAT);
    chk(int'(grp) == mgrp, "group number");
    chk(first == (mgrp == 0), "first tag");
    chk(last == (mgrp == int'(cfg_groups) - 1), "last tag");
    chk(wl_ready == wl_ok, "wl_ready rule");
    chk(tile_ready == tile_ok, "tile_ready rule");
    chk(stall == (tile_valid && !tile_ok), "stall flag");
    wl_fire = wl_valid && wl_ready;
    chk(!(tile_fire && wl_fire), "exclusive");
    if (stall) n_stall++;
    wl_took = wl_fire;
    if (wl_fire) n_wl++;
    if (tile_fire) begin
      n_tiles++;
      if (last) n_done++;
      mgrp = last ? 0 : mgrp + 1;
    end
    since_tile = tile_fire ? 1 : since_tile + 1;
    since_wl   = wl_fire ? 1 : since_wl + 1;
  end

  initial begin
    cfg_groups = 5;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 4; phase++) begin
      cfg_groups = (phase == 0) ? 5 : (phase == 1) ? 1 : (phase == 2) ? 16 : 3;
      for (int k = 0; k < 600; k++) begin
        @(posedge clk);
        #1;
        if (wl_took) wl_valid = 0;
        tile_valid = ($urandom % 4) != 0;
        if (!wl_valid && ($urandom % 40) == 0) wl_valid = 1;
      end
      // finish the output tile in progress before the group count changes
      wl_valid = 0;
      tile_valid = 1;
      while (!(grp == 0)) @(posedge clk);
      #1 tile_valid = 0;
      repeat (8) @(posedge clk);
    end
    chk(n_stall > 0 && n_wl > 0 && n_done > 0, "coverage");
    $display("tiles=%0d outputs=%0d loads=%0d stalls=%0d", n_tiles, n_done, n_wl, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
