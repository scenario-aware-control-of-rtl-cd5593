// ladder_data_plane: the segmented ladder bus fabric.
//
// TILES tiles sit in two rows of COLS = TILES/2 (top row T0..T{COLS-1},
// bottom row T{COLS}..T{TILES-1}). LANES parallel segmented lanes run
// between the rows. Each lane is a chain of NPOS = 2*COLS three-way switches
// (ladder_switch); the lane segment between two neighbouring switches is one
// link in each direction. The vertical port of a switch goes either to a tile
// (top tiles on lane 0, bottom tiles on the last lane) or through a rung to
// the switch at the same position on the next lane; rungs between lanes k
// and k+1 alternate with those between k-1 and k, which gives the
// criss-cross pattern of the paper's example figure (8 tiles, 3 lanes). The
// placement rules are in ladder_pkg. Both lane ends are open.
//
// Interface: sw_cfg[k][x] is the state of the switch on lane k at position x,
// normally driven by the local controllers. Tile t drives tx_valid[t] and
// tx_data[t]; whatever link its switch joins it to comes back on
// rx_valid[t]/rx_data[t]. A path of joined switches between two tiles is a
// circuit that carries data both ways in the same cycle: the fabric is
// combinational, without buffers, as in the paper.
//
// Circuit note: the fabric has structural combinational cycles (along a lane,
// down a rung, back along the next lane and up another rung). They cannot
// oscillate while the switch states form simple paths between tiles, which is
// what a valid scenario is; a scenario that closes a ring of joined switches
// is invalid and must not be loaded. The cycles are the bus itself and are
// left as they are.
module ladder_data_plane
  import ladder_pkg::*;
#(
  parameter int unsigned TILES  = 30,
  parameter int unsigned LANES  = 5,
  parameter int unsigned DATA_W = 32
) (
  input  sw_state_e                      sw_cfg [LANES][2*(TILES/2)],
  input  logic [TILES-1:0]               tx_valid,
  input  logic [TILES-1:0][DATA_W-1:0]   tx_data,
  output logic [TILES-1:0]               rx_valid,
  output logic [TILES-1:0][DATA_W-1:0]   rx_data
);

  localparam int unsigned COLS = TILES / 2;
  localparam int unsigned NPOS = 2 * COLS;

  // Link arrays, one entry per switch and port.
  logic [DATA_W:0] l_in  [LANES][NPOS];
  logic [DATA_W:0] r_in  [LANES][NPOS];
  logic [DATA_W:0] v_in  [LANES][NPOS];
  logic [DATA_W:0] l_out [LANES][NPOS];
  logic [DATA_W:0] r_out [LANES][NPOS];
  logic [DATA_W:0] v_out [LANES][NPOS];

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    for (genvar x = 0; x < NPOS; x++) begin : g_pos
      // Lane segments.
      if (x == 0) begin : g_lend
        assign l_in[k][x] = '0;
      end else begin : g_lseg
        assign l_in[k][x] = r_out[k][x-1];
      end
      if (x == NPOS - 1) begin : g_rend
        assign r_in[k][x] = '0;
      end else begin : g_rseg
        assign r_in[k][x] = l_out[k][x+1];
      end

      // Vertical link: tile or rung.
      if (vert_is_up(k, x)) begin : g_up
        if (k == 0) begin : g_top_tile
          assign v_in[k][x] = {tx_valid[x/2], tx_data[x/2]};
          assign {rx_valid[x/2], rx_data[x/2]} = v_out[k][x];
        end else begin : g_rung_up
          assign v_in[k][x] = v_out[k-1][x];
        end
      end else begin : g_down
        if (k == LANES - 1) begin : g_bot_tile
          assign v_in[k][x] = {tx_valid[COLS + x/2], tx_data[COLS + x/2]};
          assign {rx_valid[COLS + x/2], rx_data[COLS + x/2]} = v_out[k][x];
        end else begin : g_rung_down
          assign v_in[k][x] = v_out[k+1][x];
        end
      end

      ladder_switch #(.DATA_W(DATA_W)) u_sw (
        .cfg   (sw_cfg[k][x]),
        .l_in  (l_in[k][x]),
        .r_in  (r_in[k][x]),
        .v_in  (v_in[k][x]),
        .l_out (l_out[k][x]),
        .r_out (r_out[k][x]),
        .v_out (v_out[k][x])
      );
    end
  end

  // Parameter checks.
  initial begin
    assert (TILES >= 2 && TILES % 2 == 0)
      else $error("ladder_data_plane: TILES must be even and at least 2");
    assert (LANES >= 1) else $error("ladder_data_plane: LANES must be at least 1");
  end

endmodule
