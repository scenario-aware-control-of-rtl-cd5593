// tb_ladder_bus_top: end-to-end test of the whole bus at its default size
// (30 tiles, 5 lanes, 26 scenarios, 32-bit lanes).
// A random set of directed tile-to-tile connections is grouped greedily into
// scenarios, loaded into the eight local controllers and run twice round
// the loop with some scenarios waiting for an event; then a second program
// is loaded over the first and run; then an endless loop is halted. Every
// cycle, every tile's received word is checked. Each mechanism (load,
// scenario advance, event wait, loop wrap, end of run, halt, reload,
// top-to-bottom path, two-way use of a path) must occur at least once.
module tb_ladder_bus_top;
  localparam int TILES = 30, LANES = 5, DEPTH = 26;
`include "ladder_top_tb_body.svh"
  ladder_bus_top dut (.*);  // default size

  task automatic need(string what, int n);
    checks++;
    $display("  %-26s %0d", what, n);
    if (n == 0) fail({"mechanism never exercised: ", what});
  endtask

  initial begin
    int ns;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (busy || rx_valid != '0) fail("not idle after reset");

    // program 1
    make_graph(TILES, 60);
    ns = group_paths();
    $display("program 1: %0d connections in %0d scenarios", conn_src.size(), ns);
    checks++;
    if (ns < 1 || ns > DEPTH) fail("program 1 does not fit");
    else begin
      load_program(0, ns, 3);
      run_program(0, 2);
    end

    // program 2, loaded over program 1
    make_graph(TILES, 30);
    ns = group_paths();
    $display("program 2: %0d connections in %0d scenarios", conn_src.size(), ns);
    n_reloads++;
    checks++;
    if (ns < 1 || ns > DEPTH) fail("program 2 does not fit");
    else begin
      load_program(0, ns, 0);
      run_program(0, 1);
    end

    // endless loop, halted
    @(negedge clk);
    num_iter = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (!busy) fail("endless loop stopped");
    halt = 1;
    @(negedge clk);
    halt = 0;
    @(negedge clk);
    checks++;
    if (busy || done || rx_valid != '0) fail("halt did not open the switches");
    else n_halt++;

    $display("mechanisms:");
    need("scenario words loaded", n_loads);
    need("program reloads", n_reloads);
    need("scenario advances", n_advance);
    need("event waits", n_waits);
    need("loop wraps", n_wraps);
    need("runs completed", n_done);
    need("halts", n_halt);
    need("top-to-bottom paths", n_cross);
    need("two-way path uses", n_both_ways);
    need("connections delivered", n_delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
