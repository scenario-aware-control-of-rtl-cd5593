// tb_ladder_data_plane: random scenarios on two ladders, the paper's example
// size (8 tiles, 3 lanes) and the default size (30 tiles, 5 lanes).
// Each trial routes random tile pairs greedily into one scenario, drives
// the switch states and random words from every tile, and checks that each
// connected pair sees the other's word (both ways) and that every other tile
// receives nothing.
module tb_ladder_data_plane;
  import ladder_pkg::*;
  import ladder_tb_pkg::*;

  localparam int DATA_W = 32;
  int checks = 0, failures = 0;
  int paths_routed = 0, multi_lane_paths = 0;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int t, logic [DATA_W:0] got, logic [DATA_W:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s tile %0d got=%h exp=%h", what, t, got, exp);
    end
  endtask

  // One ladder under test with its own trial loop.
  `define LADDER_TEST(NAME, T, L)                                               \
    sw_state_e               NAME``_cfg [L][T];                                 \
    logic [T-1:0]            NAME``_txv, NAME``_rxv;                            \
    logic [T-1:0][DATA_W-1:0] NAME``_txd, NAME``_rxd;                           \
    ladder_data_plane #(.TILES(T), .LANES(L), .DATA_W(DATA_W)) NAME (           \
      .sw_cfg(NAME``_cfg), .tx_valid(NAME``_txv), .tx_data(NAME``_txd),         \
      .rx_valid(NAME``_rxv), .rx_data(NAME``_rxd));                             \
    task automatic NAME``_run(int trials);                                      \
      ladder_router rt = new(T, L);                                             \
      int peer[T];                                                              \
      for (int tr = 0; tr < trials; tr++) begin                                 \
        rt.clear();                                                             \
        foreach (peer[i]) peer[i] = -1;                                         \
        for (int a = 0; a < 3 * T; a++) begin                                   \
          int s = $urandom_range(T-1), d = $urandom_range(T-1);                 \
          if (s != d && peer[s] < 0 && peer[d] < 0 && rt.route(s, d)) begin      \
            peer[s] = d; peer[d] = s; paths_routed++;                           \
            if ((s < T/2) != (d < T/2)) multi_lane_paths++;                     \
          end                                                                   \
        end                                                                     \
        for (int k = 0; k < L; k++)                                             \
          for (int x = 0; x < T; x++) NAME``_cfg[k][x] = rt.st[k*T + x];        \
        for (int i = 0; i < T; i++) begin                                       \
          NAME``_txv[i] = 1'($urandom);                                         \
          NAME``_txd[i] = $urandom;                                             \
        end                                                                     \
        #1;                                                                     \
        for (int i = 0; i < T; i++)                                             \
          check(`"NAME`", i, {NAME``_rxv[i], NAME``_rxd[i]},                    \
                peer[i] < 0 ? '0 : {NAME``_txv[peer[i]], NAME``_txd[peer[i]]}); \
      end                                                                       \
    endtask

  `LADDER_TEST(fig_ladder, 8, 3)
  `LADDER_TEST(full_ladder, 30, 5)

  initial begin
    fig_ladder_run(200);
    full_ladder_run(100);
    $display("paths routed %0d, top-to-bottom paths %0d", paths_routed, multi_lane_paths);
    checks++;
    if (multi_lane_paths == 0) begin
      failures++;
      $display("FAIL no path crossed the lanes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
