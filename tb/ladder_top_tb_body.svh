// Shared body of the whole-bus testbenches. The including module declares
// the bus size first (localparams TILES, LANES, DEPTH) and, after the
// include, instantiates ladder_bus_top as `dut` on the signals declared
// here (with .*), at that size. The body provides:
//   group_paths  greedy grouping with re-routing: each connection goes into
//                the first scenario where some path for it still fits
//                without sharing a switch, else into a new one;
//   group_fixed_greedy, group_fixed_clique
//                the paper's Algorithms 1 (greedy) and 2 (max clique) on
//                fixed shortest paths, one per connection;
//   load_program packs the scenarios into per-controller words and writes
//                them through the load port;
//   run_app      one application-sized workload: random graph, grouping,
//                load and run (in parts of DEPTH scenarios if needed);
//   run_program  starts the loop and checks, in every cycle, the scenario
//                address, the controllers' lockstep, and the word every tile
//                receives (its peer's word over the active scenario, or
//                nothing), and records which connections were delivered.

  import ladder_pkg::*;
  import ladder_tb_pkg::*;

  localparam int DATA_W = 32, REGION_POS = 4, HOLD_W = 16, ITER_W = 16;
  localparam int NPOS = TILES, NCTRL = (NPOS + REGION_POS - 1) / REGION_POS;
  localparam int CW = $clog2(NCTRL), AW = $clog2(DEPTH);
  localparam int CFG_MAX_W = 2 * LANES * REGION_POS, LD_W = CFG_MAX_W + HOLD_W + 2;

  logic clk = 0, rst_n = 0;
  logic ld_we = 0;
  logic [CW-1:0] ld_ctrl = 0;
  logic [AW-1:0] ld_addr = 0;
  logic [LD_W-1:0] ld_data = 0;
  logic start = 0, halt = 0, evt = 0;
  logic [ITER_W-1:0] num_iter = 0;
  logic [TILES-1:0] tx_valid = 0, rx_valid;
  logic [TILES-1:0][DATA_W-1:0] tx_data = 0, rx_data;
  logic busy, done, sync_err;
  logic [AW-1:0] cur_scen;
  logic [ITER_W-1:0] iter;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_loads = 0, n_advance = 0, n_waits = 0, n_wraps = 0, n_done = 0;
  int n_halt = 0, n_cross = 0, n_both_ways = 0, n_delivered = 0, n_reloads = 0;

  // current program
  ladder_router scen[$];
  int conn_src[$], conn_dst[$], conn_scen[$];
  int p_hold[] = new[DEPTH];
  bit p_wait[] = new[DEPTH];
  bit p_last[] = new[DEPTH];

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s at %0t", msg, $time);
  endtask

  // Greedy grouping; returns the number of scenarios, or -1 if some
  // connection cannot be routed at all.
  function automatic int group_paths();
    scen.delete();
    conn_scen.delete();
    foreach (conn_src[i]) begin
      int placed = -1;
      foreach (scen[s]) begin
        if (scen[s].route(conn_src[i], conn_dst[i])) begin
          placed = s;
          break;
        end
      end
      if (placed < 0) begin
        ladder_router r = new(TILES, LANES);
        if (!r.route(conn_src[i], conn_dst[i])) return -1;
        scen.push_back(r);
        placed = scen.size() - 1;
      end
      conn_scen.push_back(placed);
      if ((conn_src[i] < TILES/2) != (conn_dst[i] < TILES/2)) n_cross++;
    end
    return scen.size();
  endfunction

  // Reference paths: each connection routed alone on an empty ladder
  // (shortest path). The two fixed-path groupings below keep these paths as
  // they are; only their grouping into scenarios differs.
  ladder_router refp[$];

  function automatic bit make_refs();
    refp.delete();
    foreach (conn_src[i]) begin
      ladder_router r = new(TILES, LANES);
      if (!r.route(conn_src[i], conn_dst[i])) return 1'b0;
      refp.push_back(r);
    end
    return 1'b1;
  endfunction

  // Puts reference path v into the first scenario, not flagged in `skip`,
  // that it does not intersect; opens a new scenario if there is none.
  function automatic int place_fixed(int v, ref bit skip[]);
    foreach (scen[s]) begin
      if ((s >= skip.size() || !skip[s]) && scen[s].claim(refp[v])) return s;
    end
    begin
      ladder_router r = new(TILES, LANES);
      void'(r.claim(refp[v]));
      scen.push_back(r);
    end
    return scen.size() - 1;
  endfunction

  // The paper's Algorithm 1 on the fixed reference paths.
  function automatic int group_fixed_greedy();
    bit none[];
    scen.delete();
    conn_scen.delete();
    foreach (refp[i]) conn_scen.push_back(place_fixed(i, none));
    return scen.size();
  endfunction

  // The paper's Algorithm 2 on the fixed reference paths. Two paths
  // conflict when they share a switch (so always when they share a tile).
  // Repeatedly: take a large clique of the remaining conflict graph (seed =
  // vertex of highest remaining degree, then its neighbours in falling
  // degree order that are adjacent to every member so far), put each member
  // in a different scenario, the first it does not intersect, opening a new
  // scenario where there is none, and remove the clique from the graph.
  function automatic int group_fixed_clique();
    int n = refp.size();
    int nn = LANES * NPOS;
    bit adj[][];
    int deg[];
    bit alive[];
    int owners[][$];
    int remaining = n;
    scen.delete();
    conn_scen.delete();
    adj = new[n];
    deg = new[n];
    alive = new[n];
    owners = new[nn];
    foreach (adj[i]) begin
      adj[i] = new[n];
      foreach (adj[i][j]) adj[i][j] = 1'b0;
      deg[i] = 0;
      alive[i] = 1'b1;
      conn_scen.push_back(-1);
      foreach (refp[i].used[k]) if (refp[i].used[k]) owners[k].push_back(i);
    end
    foreach (owners[k])
      foreach (owners[k][a])
        for (int b = a + 1; b < owners[k].size(); b++) begin
          int u = owners[k][a], v = owners[k][b];
          if (!adj[u][v]) begin
            adj[u][v] = 1'b1;
            adj[v][u] = 1'b1;
            deg[u]++;
            deg[v]++;
          end
        end
    while (remaining > 0) begin
      int seed = -1;
      int clique[$];
      int cand[$];
      bit taken[];
      foreach (alive[i]) if (alive[i] && (seed < 0 || deg[i] > deg[seed])) seed = i;
      clique.push_back(seed);
      foreach (alive[u]) if (alive[u] && adj[seed][u]) cand.push_back(u);
      for (int a = 1; a < cand.size(); a++) begin  // falling degree
        int key = cand[a];
        int b = a - 1;
        while (b >= 0 && deg[cand[b]] < deg[key]) begin
          cand[b+1] = cand[b];
          b--;
        end
        cand[b+1] = key;
      end
      foreach (cand[c]) begin
        bit all = 1'b1;
        foreach (clique[m]) if (!adj[cand[c]][clique[m]]) all = 1'b0;
        if (all) clique.push_back(cand[c]);
      end
      taken = new[scen.size() + clique.size()];
      foreach (taken[t]) taken[t] = 1'b0;
      foreach (clique[m]) begin
        int s = place_fixed(clique[m], taken);
        taken[s] = 1'b1;
        conn_scen[clique[m]] = s;
      end
      foreach (clique[m]) begin
        alive[clique[m]] = 1'b0;
        remaining--;
        foreach (alive[u]) if (alive[u] && adj[clique[m]][u]) deg[u]--;
      end
    end
    return scen.size();
  endfunction

  // Scenarios first..first+n-1 of the grouping go to memory words 0..n-1.
  task automatic load_program(int first, int n, int wait_every);
    for (int s = 0; s < DEPTH; s++) begin
      p_hold[s] = $urandom_range(1, 4);
      p_wait[s] = (wait_every > 0) && (s % wait_every == wait_every - 1);
      p_last[s] = (s == n - 1);
    end
    for (int r = 0; r < NCTRL; r++) begin
      int x0 = r * REGION_POS;
      int rw = (NPOS - x0 < REGION_POS) ? NPOS - x0 : REGION_POS;
      for (int s = 0; s < n; s++) begin
        logic [4095:0] c = scen[first + s].region_cfg(x0, rw);
        @(negedge clk);
        ld_we   = 1;
        ld_ctrl = CW'(r);
        ld_addr = AW'(s);
        ld_data = {p_last[s], p_wait[s], HOLD_W'(p_hold[s]), c[CFG_MAX_W-1:0]};
        n_loads++;
      end
    end
    @(negedge clk);
    ld_we = 0;
  endtask

  // Peer of every tile in scenario s (-1: unconnected).
  function automatic void peers_of(int s, int first, ref int peer[TILES]);
    foreach (peer[i]) peer[i] = -1;
    if (s < 0) return;
    foreach (conn_src[i]) begin
      if (conn_scen[i] == first + s) begin
        peer[conn_src[i]] = conn_dst[i];
        peer[conn_dst[i]] = conn_src[i];
      end
    end
  endfunction

  // Runs the loaded program num_iter times, checking every cycle.
  task automatic run_program(int first, int niter);
    int aq[$];
    bit eq[$];
    int peer[TILES];
    bit got[] = new[conn_src.size()];
    build_timeline(p_hold, p_wait, p_last, DEPTH, niter, aq, eq, n_waits);
    @(negedge clk);
    num_iter = ITER_W'(niter);
    start = 1;
    @(negedge clk);
    start = 0;
    // aq.size()+1 cycles: the output register trails the address by one
    for (int j = 0; j <= aq.size(); j++) begin
      int act = (j == 0) ? -1 : aq[j-1];
      for (int i = 0; i < TILES; i++) begin
        tx_valid[i] = 1'($urandom);
        tx_data[i]  = $urandom;
      end
      #1;
      peers_of(act, first, peer);
      for (int i = 0; i < TILES; i++) begin
        logic [DATA_W:0] exp = (peer[i] < 0) ? '0 : {tx_valid[peer[i]], tx_data[peer[i]]};
        checks++;
        if ({rx_valid[i], rx_data[i]} !== exp) begin
          failures++;
          $display("FAIL tile %0d cycle %0d scenario %0d got=%h exp=%h",
                   i, j, act, {rx_valid[i], rx_data[i]}, exp);
        end
      end
      // every connection of the active scenario, both ways, this cycle
      foreach (conn_src[i]) begin
        if (act >= 0 && conn_scen[i] == first + act &&
            {rx_valid[conn_dst[i]], rx_data[conn_dst[i]]} ==
            {tx_valid[conn_src[i]], tx_data[conn_src[i]]})
          got[i] = 1;
        if (act >= 0 && conn_scen[i] == first + act && tx_valid[conn_dst[i]] &&
            rx_valid[conn_src[i]])
          n_both_ways++;
      end
      checks++;
      if (sync_err) fail("controllers out of step");
      if (j < aq.size()) begin
        checks++;
        if (!busy || int'(cur_scen) != aq[j]) fail($sformatf("cur_scen %0d exp %0d", cur_scen, aq[j]));
        if (j > 0 && aq[j] != aq[j-1]) n_advance++;
        if (j > 0 && aq[j] == 0 && aq[j-1] != 0) n_wraps++;
        evt = eq[j];
      end else begin
        checks++;
        if (busy || !done) fail("end of run not signalled");
        else n_done++;
        checks++;
        if (int'(iter) != niter) fail("iteration count");
        evt = 0;
      end
      @(negedge clk);
    end
    checks++;
    if (done) fail("done longer than one cycle");
    foreach (got[i]) begin
      if (conn_scen[i] >= first && conn_scen[i] < first + DEPTH) begin
        checks++;
        if (!got[i]) fail($sformatf("connection %0d->%0d never delivered", conn_src[i], conn_dst[i]));
        else n_delivered++;
      end
    end
  endtask

  // Random directed connections between distinct tiles 0..nclusters-1,
  // without repeats.
  task automatic make_graph(int nclusters, int nconn);
    bit seen [TILES][TILES];
    conn_src.delete();
    conn_dst.delete();
    foreach (seen[a, b]) seen[a][b] = 0;
    while (conn_src.size() < nconn) begin
      int a = $urandom_range(nclusters - 1), b = $urandom_range(nclusters - 1);
      if (a != b && !seen[a][b]) begin
        seen[a][b] = 1;
        conn_src.push_back(a);
        conn_dst.push_back(b);
      end
    end
  endtask

  // Largest number of connections any tile takes part in (in + out): no
  // scenario can hold two of them, so it bounds the scenario count from below.
  function automatic int largest_degree();
    int deg[TILES];
    int best = 0;
    foreach (deg[i]) deg[i] = 0;
    foreach (conn_src[i]) begin
      deg[conn_src[i]]++;
      deg[conn_dst[i]]++;
    end
    foreach (deg[i]) if (deg[i] > best) best = deg[i];
    return best;
  endfunction

  int n_apps = 0, sum_greedy = 0, sum_clique = 0;

  // Traffic shaped like one application: nclus clusters on tiles
  // 0..nclus-1 and nconn random directed connections between them.
  task automatic run_app(string name, int nclus, int nconn);
    int ns, ng, nr, n, parts, ld;
    parts = 0;
    make_graph(nclus, nconn);
    ld = largest_degree();
    checks++;
    if (!make_refs()) begin
      fail({name, ": a connection cannot be routed"});
      return;
    end
    nr = group_paths();
    ng = group_fixed_greedy();
    ns = group_fixed_clique();  // the program that is run
    checks++;
    if (ns < ld || ng < ld || nr < ld) fail({name, ": fewer scenarios than the largest degree"});
    sum_greedy += ng;
    sum_clique += ns;
    for (int first = 0; first < ns; first += DEPTH) begin
      n = (ns - first < DEPTH) ? ns - first : DEPTH;
      load_program(first, n, 4);
      run_program(first, 1);
      parts++;
    end
    n_apps++;
    $display("%-16s clusters %0d connections %0d largest degree %0d | scenarios: greedy %0d, clique %0d, greedy re-routed %0d | run in %0d part(s)",
             name, nclus, nconn, ld, ng, ns, nr, parts);
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
