// tb_loop_counter: runs random scenario programs through the loop counter
// and compares its address with a schedule computed from the program, cycle
// by cycle: hold times (0 counted as 1), event waits with event noise that
// must be ignored, wrap at the `last` flag or at the end of the memory,
// iteration counting, the one-cycle done pulse, and halt of an endless run.
module tb_loop_counter;
  import ladder_tb_pkg::*;

  localparam int DEPTH = 26, HOLD_W = 16, ITER_W = 16, AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0, start = 0, halt = 0, evt = 0;
  logic [ITER_W-1:0] num_iter = 0;
  logic [HOLD_W-1:0] hold;
  logic wait_evt, last;
  logic [AW-1:0] addr;
  logic running, done;
  logic [ITER_W-1:0] iter;

  int  p_hold [DEPTH];
  bit  p_wait [DEPTH];
  bit  p_last [DEPTH];
  int checks = 0, failures = 0, n_wait = 0, n_wrap_end = 0, n_halt = 0;

  loop_counter #(.DEPTH(DEPTH), .HOLD_W(HOLD_W), .ITER_W(ITER_W)) dut (.*);

  assign hold     = HOLD_W'(p_hold[addr]);
  assign wait_evt = p_wait[addr];
  assign last     = p_last[addr];

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d at %0t", what, got, exp, $time);
    end
  endtask

  task automatic run_program(int len, int niter, bit no_last);
    int  aq[$];
    bit  eq[$];
    int  dh[] = new[DEPTH];
    bit  dw[] = new[DEPTH];
    bit  dl[] = new[DEPTH];
    for (int s = 0; s < DEPTH; s++) begin
      p_hold[s] = $urandom_range(0, 4);
      p_wait[s] = ($urandom_range(0, 3) == 0);
      p_last[s] = !no_last && (s == len - 1);
      dh[s] = p_hold[s]; dw[s] = p_wait[s]; dl[s] = p_last[s];
    end
    build_timeline(dh, dw, dl, DEPTH, niter, aq, eq, n_wait);
    if (no_last) n_wrap_end++;
    @(negedge clk);
    num_iter = ITER_W'(niter);
    start = 1;
    @(negedge clk);
    start = 0;
    foreach (aq[j]) begin
      expect_eq("running", running, 1);
      expect_eq("addr", addr, aq[j]);
      expect_eq("done", done, 0);
      evt = eq[j];
      @(negedge clk);
    end
    evt = 0;
    expect_eq("running at end", running, 0);
    expect_eq("done pulse", done, 1);
    expect_eq("iterations", iter, niter);
    @(negedge clk);
    expect_eq("done falls", done, 0);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq("idle after reset", running, 0);
    for (int n = 0; n < 12; n++) run_program($urandom_range(1, 8), $urandom_range(1, 3), 1'b0);
    run_program(DEPTH, 2, 1'b1);  // no last flag: wraps at the end of the memory
    // endless run, then halt
    for (int s = 0; s < DEPTH; s++) begin
      p_hold[s] = 2; p_wait[s] = 0; p_last[s] = (s == 2);
    end
    num_iter = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (50) @(negedge clk);
    expect_eq("endless run keeps running", running, 1);
    expect_eq("endless run counts iterations", iter, 8);
    halt = 1;
    @(negedge clk);
    halt = 0;
    n_halt++;
    expect_eq("halted", running, 0);
    expect_eq("no done on halt", done, 0);
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL no event wait exercised"); end
    $display("event waits %0d, wraps at memory end %0d, halts %0d", n_wait, n_wrap_end, n_halt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
