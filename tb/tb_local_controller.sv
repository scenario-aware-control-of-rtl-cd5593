// tb_local_controller: loads random scenario programs through the load port
// and checks the registered switch-control output cycle by cycle against a
// schedule computed from the program: all switches open before the start,
// each scenario one cycle after the loop counter reaches it, held for its
// hold time and event wait, and all open again after the last iteration.
module tb_local_controller;
  import ladder_tb_pkg::*;

  localparam int DEPTH = 26, CFG_W = 40, HOLD_W = 16, ITER_W = 16;
  localparam int AW = $clog2(DEPTH), WORD_W = CFG_W + HOLD_W + 2;

  logic clk = 0, rst_n = 0, ld_we = 0, start = 0, halt = 0, evt = 0;
  logic [AW-1:0] ld_addr = 0;
  logic [WORD_W-1:0] ld_data = 0;
  logic [ITER_W-1:0] num_iter = 0;
  logic [CFG_W-1:0] cfg_out;
  logic running, done;
  logic [AW-1:0] addr;
  logic [ITER_W-1:0] iter;

  int checks = 0, failures = 0, n_wait = 0, n_load = 0;

  local_controller #(.DEPTH(DEPTH), .CFG_W(CFG_W), .HOLD_W(HOLD_W), .ITER_W(ITER_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_cfg(string what, logic [CFG_W-1:0] exp);
    checks++;
    if (cfg_out !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h at %0t", what, cfg_out, exp, $time);
    end
  endtask

  task automatic run_program(int len, int niter);
    logic [CFG_W-1:0] cfg [DEPTH];
    int  dh[] = new[DEPTH];
    bit  dw[] = new[DEPTH];
    bit  dl[] = new[DEPTH];
    int  aq[$];
    bit  eq[$];
    for (int s = 0; s < DEPTH; s++) begin
      cfg[s] = {$urandom, $urandom};
      dh[s]  = $urandom_range(0, 5);
      dw[s]  = ($urandom_range(0, 3) == 0);
      dl[s]  = (s == len - 1);
      @(negedge clk);
      ld_we = 1; ld_addr = AW'(s);
      ld_data = {dl[s], dw[s], HOLD_W'(dh[s]), cfg[s]};
      n_load++;
    end
    @(negedge clk);
    ld_we = 0;
    build_timeline(dh, dw, dl, DEPTH, niter, aq, eq, n_wait);
    expect_cfg("open before start", '0);
    num_iter = ITER_W'(niter);
    start = 1;
    @(negedge clk);
    start = 0;
    foreach (aq[j]) begin
      expect_cfg("scenario", (j == 0) ? '0 : cfg[aq[j-1]]);
      evt = eq[j];
      @(negedge clk);
    end
    evt = 0;
    expect_cfg("last scenario", cfg[aq[aq.size()-1]]);
    checks++;
    if (!done || running) begin failures++; $display("FAIL done/running at end"); end
    @(negedge clk);
    expect_cfg("open after run", '0);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 10; n++) run_program($urandom_range(1, DEPTH), $urandom_range(1, 3));
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL no event wait exercised"); end
    $display("words loaded %0d, event waits %0d", n_load, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
