// tb_workloads: runs traffic sized like the five applications the paper
// maps onto its FPGA (mnist, LeNet, fashion-mnist, cifar10, emnist) through
// the whole bus, at its default size (30 tiles, 5 lanes).
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
module tb_workloads;
  localparam int TILES = 30, LANES = 5, DEPTH = 26;
`include "ladder_top_tb_body.svh"
  ladder_bus_top dut (.*);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_app("mnist", 11, 18);
    run_app("LeNet", 14, 41);
    run_app("fashion-mnist", 24, 128);
    run_app("cifar10", 26, 141);
    run_app("emnist", 30, 161);
    checks++;
    if (n_apps != 5 || n_delivered == 0) fail("not every workload ran");
    $display("connections delivered %0d", n_delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
