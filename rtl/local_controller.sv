// local_controller: one distributed switch controller of the ladder bus.
//
// Built as in the paper's controller figure: a loop counter gives the
// address of a scenario memory, and the scenario read there is sent to the
// switches the controller manages. Each memory word is
//   { last, wait_evt, hold[HOLD_W-1:0], cfg[CFG_W-1:0] }
// where cfg holds one 2-bit ladder_pkg::sw_state_e per managed switch and
// the other fields drive the loop counter (see loop_counter). The field
// layout is this design's own; the paper says only that scenarios are
// stored as instructions for regular and irregular loops.
//
// Loading: the central loader writes words with ld_we/ld_addr/ld_data.
// Running: `start` begins the loop, `halt` stops it, `evt` releases a
// scenario that waits for a runtime event. `cfg_out` is registered: it shows
// the scenario at the loop counter's address one cycle later, and is all
// zeros (every switch open) while the controller is not running. So the
// first scenario reaches the switches at the edge after the one that samples
// `start`, and each scenario stays on them for its hold time (plus any
// event wait); they open again one edge after the run ends.
module local_controller #(
  parameter int unsigned DEPTH  = 26,
  parameter int unsigned CFG_W  = 40,
  parameter int unsigned HOLD_W = 16,
  parameter int unsigned ITER_W = 16,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned WORD_W = CFG_W + HOLD_W + 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // scenario loading
  input  logic              ld_we,
  input  logic [AW-1:0]     ld_addr,
  input  logic [WORD_W-1:0] ld_data,
  // run control
  input  logic              start,
  input  logic              halt,
  input  logic [ITER_W-1:0] num_iter,
  input  logic              evt,
  // switch control signals
  output logic [CFG_W-1:0]  cfg_out,
  // status
  output logic              running,
  output logic              done,
  output logic [AW-1:0]     addr,
  output logic [ITER_W-1:0] iter
);

  logic [WORD_W-1:0] word;
  logic [CFG_W-1:0]  w_cfg;
  logic [HOLD_W-1:0] w_hold;
  logic              w_wait;
  logic              w_last;

  assign {w_last, w_wait, w_hold, w_cfg} = word;

  scenario_memory #(.DEPTH(DEPTH), .WIDTH(WORD_W)) u_mem (
    .clk   (clk),
    .we    (ld_we),
    .waddr (ld_addr),
    .wdata (ld_data),
    .raddr (addr),
    .rdata (word)
  );

  loop_counter #(.DEPTH(DEPTH), .HOLD_W(HOLD_W), .ITER_W(ITER_W)) u_cnt (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .halt    (halt),
    .num_iter (num_iter),
    .evt      (evt),
    .hold     (w_hold),
    .wait_evt (w_wait),
    .last     (w_last),
    .addr     (addr),
    .running  (running),
    .done     (done),
    .iter     (iter)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       cfg_out <= '0;
    else if (running) cfg_out <= w_cfg;
    else              cfg_out <= '0;
  end

  a_ld_addr: assert property (@(posedge clk) disable iff (!rst_n)
    ld_we |-> 32'(ld_addr) < DEPTH);

endmodule
