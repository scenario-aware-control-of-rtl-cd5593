// loop_counter: sequencer of a local switch controller.
//
// It gives the scenario memory its read address and steps through the
// scenario list on its own once started, as the paper's controller does. The
// paper says only that a loop counter steps through the scenarios, that the
// scenarios encode regular sequences and irregular ones (reconfiguration on a
// runtime event) and that the scheme works like a distributed loop nest
// counter. The loop nest built here is this design's reading of that:
//   inner loop : the current scenario is applied for `hold` cycles (0 counts
//                as 1); if its `wait_evt` flag is set it then stays until
//                `evt` is high in a cycle (the irregular case);
//   middle loop: the address steps 0, 1, 2, ... up to the scenario whose
//                `last` flag is set (or DEPTH-1), then returns to 0;
//   outer loop : one pass over the list is an iteration; after `num_iter`
//                iterations the counter stops (num_iter = 0: run forever).
// hold/wait_evt/last are the fields of the word at `addr`, fed back from the
// memory in the same cycle.
//
// Timing: `start` while idle sets addr to 0 at the next edge and raises
// `running`. Each scenario then keeps `addr` for exactly its hold time (plus
// any event wait). After the last scenario of the last iteration `running`
// falls and `done` pulses for one cycle. `halt` stops the counter at the
// next edge. `start` while running is ignored.
module loop_counter #(
  parameter int unsigned DEPTH  = 26,
  parameter int unsigned HOLD_W = 16,
  parameter int unsigned ITER_W = 16,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              halt,
  input  logic [ITER_W-1:0] num_iter,
  input  logic              evt,
  // fields of the current scenario word
  input  logic [HOLD_W-1:0] hold,
  input  logic              wait_evt,
  input  logic              last,
  output logic [AW-1:0]     addr,
  output logic              running,
  output logic              done,
  output logic [ITER_W-1:0] iter
);

  logic [HOLD_W-1:0] cnt;
  logic [HOLD_W:0]   hold_eff;
  logic              expired;
  logic              advance;
  logic              end_of_list;
  logic              final_iter;

  assign hold_eff    = (hold == '0) ? (HOLD_W+1)'(1) : {1'b0, hold};
  assign expired     = ({1'b0, cnt} + (HOLD_W+1)'(1)) >= hold_eff;
  assign advance     = running && expired && (!wait_evt || evt);
  assign end_of_list = last || (32'(addr) == DEPTH - 1);
  assign final_iter  = (num_iter != '0) && (iter == num_iter - ITER_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      addr    <= '0;
      cnt     <= '0;
      iter    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (halt) begin
        running <= 1'b0;
        addr    <= '0;
        cnt     <= '0;
      end else if (!running) begin
        if (start) begin
          running <= 1'b1;
          addr    <= '0;
          cnt     <= '0;
          iter    <= '0;
        end
      end else if (advance) begin
        cnt <= '0;
        if (end_of_list) begin
          addr <= '0;
          iter <= iter + ITER_W'(1);
          if (final_iter) begin
            running <= 1'b0;
            done    <= 1'b1;
          end
        end else begin
          addr <= addr + AW'(1);
        end
      end else if (!expired) begin
        cnt <= cnt + HOLD_W'(1);
      end
    end
  end

  // The address never leaves the memory.
  a_addr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    32'(addr) < DEPTH);
  // done is a single-cycle pulse that ends a run.
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> !running && !$past(done));

endmodule
