// ome_mode_gate_tb: exhaustive self-checking testbench of ome_mode_gate.
//
// All eight input combinations are applied and compared with the intended
// function: with the mode on the wires pass unchanged; with it off the early
// request seen by the server stays high while the actual request is high.
module ome_mode_gate_tb;
  import ome_pkg::*;

  logic opp_en;
  ome_req_t req_in, req_out;
  int checks = 0, failures = 0;

  ome_mode_gate dut (.opp_en(opp_en), .req_in(req_in), .req_out(req_out));

  initial begin
    #1000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      logic exp_re;
      {opp_en, req_in.re, req_in.ra} = 3'(i);
      #1;
      exp_re = opp_en ? req_in.re : (req_in.re || req_in.ra);
      checks++;
      if (req_out.re !== exp_re || req_out.ra !== req_in.ra) begin
        failures++;
        $display("MISMATCH en=%b in=%b%b out=%b%b", opp_en, req_in.re, req_in.ra,
                 req_out.re, req_out.ra);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
