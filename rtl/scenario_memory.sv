// scenario_memory: the local memory bank of a switch controller.
//
// DEPTH words of WIDTH bits, one word per switch scenario (Scenario 0,
// Scenario 1, ... in the paper's controller figure). The central loader
// writes a word with we/waddr/wdata on a rising clock edge; the loop counter
// reads the word at raddr combinationally, the way a distributed (LUT) RAM of
// an FPGA reads. The paper gives the memory's role, not its organisation:
// the asynchronous read and the single write port are this design's choice.
// The array is not reset; a scenario must be written before it is used.
module scenario_memory #(
  parameter int unsigned DEPTH = 26,
  parameter int unsigned WIDTH = 58,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr] : '0;

endmodule
