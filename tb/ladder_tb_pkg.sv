// ladder_tb_pkg: test-side model of the segmented ladder bus.
//
// ladder_router finds and records tile-to-tile paths on a ladder of the
// given size. It keeps one scenario at a time: route() searches for a
// shortest chain of switches, none of them already used in the scenario,
// from the source tile's switch to the destination tile's switch
// (breadth-first search), and on success marks the chain and sets each
// switch on it to join the port the path enters by with the port it leaves
// by. A path that cannot be placed leaves the scenario unchanged, which is
// what greedy scenario grouping needs: try the path in each open scenario
// in turn, open a new one when none takes it. Two paths intersect exactly
// when they would share a switch, since a switch joins only one pair of
// ports.
//
// The placement rules are written out again here from the geometry of the
// ladder (not taken from the data plane's code): top tile c is on lane 0 at
// position 2c+1, bottom tile c on the last lane at 2c + ((LANES-1) mod 2),
// and the vertical port at (k, x) goes up when x and k+1 have equal parity.
package ladder_tb_pkg;
  import ladder_pkg::*;

  localparam int PORT_L = 0;
  localparam int PORT_R = 1;
  localparam int PORT_V = 2;

  class ladder_router;
    int        tiles, lanes, cols, npos;
    bit        used[];
    sw_state_e st[];

    function new(int t, int l);
      tiles = t;
      lanes = l;
      cols  = t / 2;
      npos  = 2 * cols;
      used  = new[lanes * npos];
      st    = new[lanes * npos];
      clear();
    endfunction

    function void clear();
      foreach (used[i]) begin
        used[i] = 1'b0;
        st[i]   = SW_OPEN;
      end
    endfunction

    function int node_of_tile(int t);
      if (t < cols) return 2 * t + 1;
      return (lanes - 1) * npos + 2 * (t - cols) + ((lanes - 1) % 2);
    endfunction

    function bit up_link(int k, int x);
      return (x % 2) == ((k + 1) % 2);
    endfunction

    function bit vert_is_tile(int k, int x);
      if (up_link(k, x)) return k == 0;
      return k == lanes - 1;
    endfunction

    // Port of node a that faces neighbour b.
    function int port_to(int a, int b);
      if (b == a - 1 && (a % npos) != 0) return PORT_L;
      if (b == a + 1 && (b % npos) != 0) return PORT_R;
      return PORT_V;
    endfunction

    static function sw_state_e join2(int p, int q);
      if ((p == PORT_L && q == PORT_R) || (p == PORT_R && q == PORT_L)) return SW_LR;
      if ((p == PORT_L && q == PORT_V) || (p == PORT_V && q == PORT_L)) return SW_LV;
      return SW_RV;
    endfunction

    function bit route(int src, int dst);
      int s, d, n, k, x;
      int prev[];
      bit seen[];
      int q[$];
      int nb[$];
      int path[$];
      s = node_of_tile(src);
      d = node_of_tile(dst);
      if (src == dst || used[s] || used[d]) return 1'b0;
      prev = new[lanes * npos];
      seen = new[lanes * npos];
      foreach (seen[i]) begin
        seen[i] = 1'b0;
        prev[i] = -1;
      end
      seen[s] = 1'b1;
      q.push_back(s);
      while (q.size() > 0) begin
        n = q.pop_front();
        if (n == d) break;
        k = n / npos;
        x = n % npos;
        nb.delete();
        if (x > 0) nb.push_back(n - 1);
        if (x < npos - 1) nb.push_back(n + 1);
        if (!vert_is_tile(k, x)) nb.push_back(up_link(k, x) ? n - npos : n + npos);
        foreach (nb[i]) begin
          if (!seen[nb[i]] && !used[nb[i]]) begin
            seen[nb[i]] = 1'b1;
            prev[nb[i]] = n;
            q.push_back(nb[i]);
          end
        end
      end
      if (!seen[d]) return 1'b0;
      for (n = d; n != -1; n = prev[n]) path.push_front(n);
      foreach (path[i]) begin
        int pin, pout;
        pin  = (i == 0) ? PORT_V : port_to(path[i], path[i-1]);
        pout = (i == path.size() - 1) ? PORT_V : port_to(path[i], path[i+1]);
        used[path[i]] = 1'b1;
        st[path[i]]   = join2(pin, pout);
      end
      return 1'b1;
    endfunction

    // Adds the path held by router p (a router holding that one path only)
    // to this scenario unchanged, if it shares no switch with it.
    function bit claim(ladder_router p);
      foreach (used[i]) if (used[i] && p.used[i]) return 1'b0;
      foreach (used[i]) if (p.used[i]) begin
        used[i] = 1'b1;
        st[i]   = p.st[i];
      end
      return 1'b1;
    endfunction

    // Switch states of the region starting at position x0, width rw, packed
    // two bits per switch at 2*(k*rw + j).
    function logic [4095:0] region_cfg(int x0, int rw);
      logic [4095:0] v = '0;
      for (int k = 0; k < lanes; k++)
        for (int j = 0; j < rw; j++)
          v[2*(k*rw+j) +: 2] = st[k*npos + x0 + j];
      return v;
    endfunction
  endclass

  // Expected schedule of a scenario loop, worked out from the program alone.
  // For iteration 0..num_iter-1 and scenario 0 up to the first `last` flag
  // (or depth-1) it appends one entry per cycle to addr_q: max(hold,1)
  // cycles, plus, for a scenario that waits for an event, a random 1..3
  // extra cycles ending in the cycle where evt is raised. evt_q gets the evt
  // value to drive in each cycle: random noise where the counter must ignore
  // it, low while a scenario waits, high in its release cycle. nwait counts
  // the event waits in the schedule.
  function automatic void build_timeline(input int hold[], input bit wt[],
                                         input bit last[], input int depth,
                                         input int num_iter,
                                         ref int addr_q[$], ref bit evt_q[$],
                                         ref int nwait);
    int nlast = depth - 1;
    for (int s = 0; s < depth; s++) if (last[s]) begin nlast = s; break; end
    for (int it = 0; it < num_iter; it++) begin
      for (int s = 0; s <= nlast; s++) begin
        int h = (hold[s] == 0) ? 1 : hold[s];
        int w = wt[s] ? $urandom_range(1, 3) : 0;
        for (int c = 0; c < h + w; c++) begin
          addr_q.push_back(s);
          if (!wt[s])          evt_q.push_back(1'($urandom));
          else if (c < h - 1)  evt_q.push_back(1'($urandom));
          else                 evt_q.push_back(c == h + w - 1);
        end
        if (wt[s]) nwait++;
      end
    end
  endfunction

endpackage
