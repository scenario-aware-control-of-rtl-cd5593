// ladder_pkg: types and geometry rules shared by the segmented ladder bus.
//
// A three-way switch sits at every (lane, position) point of the ladder. Its
// state says which two of its three ports (left segment, right segment,
// vertical link) it joins; a joined pair passes data both ways. The encoding
// is this design's own: the paper names the switch but gives no encoding.
//
// Geometry (read off the 8-tile, 3-lane example figure of the paper and
// generalised): every lane has 2*COLS switch positions, COLS = TILES/2. On
// lane k the vertical link of a switch at position x goes up (to lane k-1,
// or to a top-row tile for k = 0) when x has the parity of k+1, and down (to
// lane k+1, or to a bottom-row tile for the last lane) when x has the parity
// of k. Top tile c (T0..T{COLS-1}) sits at lane 0, position 2c+1; bottom
// tile COLS+c sits on the last lane at position 2c + ((LANES-1) mod 2).
package ladder_pkg;

  typedef enum logic [1:0] {
    SW_OPEN = 2'd0,  // no port joined
    SW_LR   = 2'd1,  // left segment <-> right segment (pass along the lane)
    SW_LV   = 2'd2,  // left segment <-> vertical link
    SW_RV   = 2'd3   // right segment <-> vertical link
  } sw_state_e;

  localparam int unsigned SW_STATE_W = 2;

  // 1 when the vertical link of switch (lane, pos) goes up, 0 when down.
  function automatic bit vert_is_up(int unsigned lane, int unsigned pos);
    return (pos % 2) == ((lane + 1) % 2);
  endfunction

  // Switch position of tile t on its lane (lane 0 for the top row, lane
  // LANES-1 for the bottom row).
  function automatic int unsigned tile_pos(int unsigned t, int unsigned tiles,
                                           int unsigned lanes);
    int unsigned cols = tiles / 2;
    if (t < cols) return 2 * t + 1;
    return 2 * (t - cols) + ((lanes - 1) % 2);
  endfunction

endpackage
