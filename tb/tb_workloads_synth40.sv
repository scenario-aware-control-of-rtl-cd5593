// tb_workloads_synth40: runs traffic sized like the paper's two synthetic
// 40-cluster networks through the whole bus, at 40 tiles and 6 lanes (the
// square root of the tile count, rounded).
// The applications' connection lists are not published, so each one is a
// random directed graph with the published number of clusters and
// connections (Table 1 of the paper: clusters x average degree); cluster i
// sits on tile i. Each connection gets a fixed shortest path; the paths are
// grouped greedily (Algorithm 1 of the paper) and by max cliques
// (Algorithm 2), and, for comparison, greedily with re-routing. The clique
// grouping is loaded and run; a program with more scenarios than a
// controller holds (DEPTH) is run in parts, each loaded over the previous
// one. Every connection must be delivered, and no grouping may use fewer
// scenarios than the largest per-tile degree.
module tb_workloads_synth40;
  localparam int TILES = 40, LANES = 6, DEPTH = 26;
`include "ladder_top_tb_body.svh"
  ladder_bus_top #(.TILES(TILES), .LANES(LANES)) dut (.*);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_app("synth_40 (160)", 40, 160);
    run_app("synth_40 (292)", 40, 292);
    checks++;
    if (n_apps != 2 || n_delivered == 0) fail("not every workload ran");
    $display("connections delivered %0d", n_delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
