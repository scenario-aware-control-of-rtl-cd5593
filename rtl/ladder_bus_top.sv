// ladder_bus_top: segmented ladder bus with its scenario-aware control plane.
//
// The data plane (ladder_data_plane) links TILES tiles over LANES segmented
// lanes of DATA_W bits. The control plane is a row of local controllers
// (local_controller), each owning a region of REGION_POS consecutive switch
// positions across all lanes (the last region may be narrower), as the
// controller in the paper's example figure owns the switches next to two
// tiles. Each controller keeps its own scenarios and its own loop counter;
// all of them get the same start/halt/num_iter/evt, so when the loader
// gives every controller the same hold/wait/last fields they step in
// lockstep and together set up the whole-bus scenario. `sync_err` flags any
// cycle in which they disagree on their running state or address.
//
// Scenario loading (from the central software framework, not part of this
// design): ld_we writes ld_data at ld_addr of controller ld_ctrl. ld_data has
// one layout for all controllers:
//   [CFG_MAX_W-1:0]          switch states of the region, 2 bits each,
//                             switch (lane k, region offset j) at bit
//                             2*(k*region_width + j); a narrower last region
//                             uses only the low bits
//   [CFG_MAX_W +: HOLD_W]    hold time in cycles
//   [CFG_MAX_W+HOLD_W]       wait for evt after the hold
//   [CFG_MAX_W+HOLD_W+1]     last scenario of the loop
// Timing: scenario 0 reaches the switches at the edge after the one that
// samples `start`; the switches then follow the loop counters (see
// local_controller). Tile traffic crosses the fabric within the cycle.
//
// Defaults follow the largest configuration the paper puts on its FPGA
// (emnist: 30 tiles, 5 lanes, 26 scenarios, 32-bit lanes). REGION_POS, the
// hold and iteration widths and the load port are this design's choices.
module ladder_bus_top
  import ladder_pkg::*;
#(
  parameter int unsigned TILES      = 30,
  parameter int unsigned LANES      = 5,
  parameter int unsigned DATA_W     = 32,
  parameter int unsigned DEPTH      = 26,
  parameter int unsigned REGION_POS = 4,
  parameter int unsigned HOLD_W     = 16,
  parameter int unsigned ITER_W     = 16,
  localparam int unsigned NPOS      = 2 * (TILES / 2),
  localparam int unsigned NCTRL     = (NPOS + REGION_POS - 1) / REGION_POS,
  localparam int unsigned CW        = (NCTRL > 1) ? $clog2(NCTRL) : 1,
  localparam int unsigned AW        = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CFG_MAX_W = SW_STATE_W * LANES * REGION_POS,
  localparam int unsigned LD_W      = CFG_MAX_W + HOLD_W + 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // scenario load port
  input  logic                         ld_we,
  input  logic [CW-1:0]                ld_ctrl,
  input  logic [AW-1:0]                ld_addr,
  input  logic [LD_W-1:0]              ld_data,
  // run control
  input  logic                         start,
  input  logic                         halt,
  input  logic [ITER_W-1:0]            num_iter,
  input  logic                         evt,
  // tiles
  input  logic [TILES-1:0]             tx_valid,
  input  logic [TILES-1:0][DATA_W-1:0] tx_data,
  output logic [TILES-1:0]             rx_valid,
  output logic [TILES-1:0][DATA_W-1:0] rx_data,
  // status (from controller 0)
  output logic                         busy,
  output logic                         done,
  output logic [AW-1:0]                cur_scen,
  output logic [ITER_W-1:0]            iter,
  output logic                         sync_err
);

  sw_state_e          sw_cfg [LANES][NPOS];
  logic [NCTRL-1:0]   c_running;
  logic [NCTRL-1:0]   c_done;
  logic [AW-1:0]      c_addr [NCTRL];
  logic [ITER_W-1:0]  c_iter [NCTRL];

  for (genvar r = 0; r < NCTRL; r++) begin : g_ctrl
    localparam int unsigned X0    = r * REGION_POS;
    localparam int unsigned RW    = (NPOS - X0 < REGION_POS) ? NPOS - X0 : REGION_POS;
    localparam int unsigned CFG_W = SW_STATE_W * LANES * RW;

    logic [CFG_W-1:0] cfg;

    local_controller #(
      .DEPTH(DEPTH), .CFG_W(CFG_W), .HOLD_W(HOLD_W), .ITER_W(ITER_W)
    ) u_ctrl (
      .clk      (clk),
      .rst_n    (rst_n),
      .ld_we    (ld_we && (32'(ld_ctrl) == r)),
      .ld_addr  (ld_addr),
      .ld_data  ({ld_data[LD_W-1 -: HOLD_W+2], ld_data[CFG_W-1:0]}),
      .start    (start),
      .halt    (halt),
      .num_iter (num_iter),
      .evt      (evt),
      .cfg_out  (cfg),
      .running  (c_running[r]),
      .done     (c_done[r]),
      .addr     (c_addr[r]),
      .iter     (c_iter[r])
    );

    for (genvar k = 0; k < LANES; k++) begin : g_lane
      for (genvar j = 0; j < RW; j++) begin : g_sw
        assign sw_cfg[k][X0+j] = sw_state_e'(cfg[SW_STATE_W*(k*RW+j) +: SW_STATE_W]);
      end
    end
  end

  ladder_data_plane #(.TILES(TILES), .LANES(LANES), .DATA_W(DATA_W)) u_dp (
    .sw_cfg   (sw_cfg),
    .tx_valid (tx_valid),
    .tx_data  (tx_data),
    .rx_valid (rx_valid),
    .rx_data  (rx_data)
  );

  assign busy     = c_running[0];
  assign done     = c_done[0];
  assign cur_scen = c_addr[0];
  assign iter     = c_iter[0];

  always_comb begin
    sync_err = 1'b0;
    for (int r = 1; r < NCTRL; r++) begin
      if (c_running[r] != c_running[0] || c_done[r] != c_done[0] ||
          c_addr[r] != c_addr[0]) sync_err = 1'b1;
    end
  end

endmodule
