// tb_scenario_memory: writes random words to random addresses of the
// scenario memory, keeps a shadow copy, and checks every read against it;
// a write takes effect at the clock edge, a read is combinational.
module tb_scenario_memory;
  localparam int DEPTH = 26, WIDTH = 58, AW = $clog2(DEPTH);

  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [WIDTH-1:0] wdata = 0, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  scenario_memory #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_read(int a);
    raddr = AW'(a);
    #1;
    checks++;
    if (rdata !== shadow[a]) begin
      failures++;
      $display("FAIL addr %0d got=%h exp=%h", a, rdata, shadow[a]);
    end
  endtask

  initial begin
    // fill every word once
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom};
      shadow[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int a = 0; a < DEPTH; a++) check_read(a);
    // random overwrites, each checked right after its edge and before it
    for (int n = 0; n < 300; n++) begin
      int a;
      a = $urandom_range(DEPTH-1);
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom};
      check_read(a);           // old word still there before the edge
      @(negedge clk);
      we = 0;
      shadow[a] = wdata;
      check_read(a);
      check_read($urandom_range(DEPTH-1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
