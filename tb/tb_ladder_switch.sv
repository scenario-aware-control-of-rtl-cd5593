// tb_ladder_switch: exhaustive check of the three-way switch.
// For every switch state and many random input words it compares the three
// outputs with a table of which port each output copies (or zero).
module tb_ladder_switch;
  import ladder_pkg::*;

  localparam int DATA_W = 32;

  sw_state_e       cfg;
  logic [DATA_W:0] l_in, r_in, v_in, l_out, r_out, v_out;
  int checks = 0, failures = 0;

  ladder_switch #(.DATA_W(DATA_W)) dut (.*);

  // src[state][output port] = input port copied, -1 for none (order L, R, V)
  int src [4][3] = '{'{-1, -1, -1}, '{1, 0, -1}, '{2, -1, 0}, '{-1, 2, 1}};

  function automatic logic [DATA_W:0] pick(int p);
    case (p)
      0: return l_in;
      1: return r_in;
      2: return v_in;
      default: return '0;
    endcase
  endfunction

  task automatic check(string what, logic [DATA_W:0] got, logic [DATA_W:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s cfg=%s got=%h exp=%h", what, cfg.name(), got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++) begin
      for (int n = 0; n < 100; n++) begin
        cfg  = sw_state_e'(s);
        l_in = {$urandom, $urandom};
        r_in = {$urandom, $urandom};
        v_in = {$urandom, $urandom};
        #1;
        check("l_out", l_out, pick(src[s][0]));
        check("r_out", r_out, pick(src[s][1]));
        check("v_out", v_out, pick(src[s][2]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
