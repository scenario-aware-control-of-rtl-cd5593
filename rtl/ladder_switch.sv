// ladder_switch: bufferless three-way segmented switch of the ladder bus.
//
// The switch has three bidirectional ports, each made of one input and one
// output link: L (lane segment to the left), R (lane segment to the right)
// and V (vertical link to a tile or, through a rung, to the switch at the
// same position on the neighbouring lane). The state `cfg` joins one pair of
// ports, and the joined pair passes its links both ways; every output of a
// port that is not joined is driven to zero, so an idle segment carries an
// all-zero word (valid bit low).
//
// A link is DATA_W data bits plus a valid bit at the top (bit DATA_W). The
// 32-bit lane width is the paper's; the valid bit, the both-ways pairing and
// the one-pair-at-a-time rule are this design's choices. The switch is purely
// combinational: a connection has no register in it, as the paper's bus is
// bufferless.
module ladder_switch
  import ladder_pkg::*;
#(
  parameter int unsigned DATA_W = 32
) (
  input  sw_state_e         cfg,
  input  logic [DATA_W:0]   l_in,
  input  logic [DATA_W:0]   r_in,
  input  logic [DATA_W:0]   v_in,
  output logic [DATA_W:0]   l_out,
  output logic [DATA_W:0]   r_out,
  output logic [DATA_W:0]   v_out
);

  always_comb begin
    l_out = '0;
    r_out = '0;
    v_out = '0;
    unique case (cfg)
      SW_LR: begin
        r_out = l_in;
        l_out = r_in;
      end
      SW_LV: begin
        v_out = l_in;
        l_out = v_in;
      end
      SW_RV: begin
        v_out = r_in;
        r_out = v_in;
      end
      default: ;
    endcase
  end

endmodule
