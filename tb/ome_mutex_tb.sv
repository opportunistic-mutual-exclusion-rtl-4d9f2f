// ome_mutex_tb: self-checking testbench of the mutual-exclusion element.
//
// Random request sequences; after each change the grants are compared with
// a reference that keeps the current owner: a lone request is granted, a
// grant is held until its request falls, a pending request is then granted
// in the same time step, and the two grants are never high together. For
// requests that rise in the same step either winner is accepted. Also
// checks that the element is transparent in time: every grant follows its
// cause within the same time step.
module ome_mutex_tb;

  logic r1 = 1'b0, r2 = 1'b0, g1, g2;
  int checks = 0, failures = 0;
  int n_tie = 0, n_handover = 0;
  int owner = 0;  // 0 none, 1 or 2

  ome_mutex dut (.r1(r1), .r2(r2), .g1(g1), .g2(g2));

  task automatic check();
    int prev;
    prev = owner;
    if (owner == 1 && !r1) owner = 0;
    if (owner == 2 && !r2) owner = 0;
    if (owner == 0) begin
      if (r1 && r2) begin
        owner = g1 ? 1 : 2;  // tie or hand-over: accept the element's pick
        if (prev == 0) n_tie++;
      end else if (r1) owner = 1;
      else if (r2) owner = 2;
      if (prev != 0 && owner != 0) n_handover++;
    end
    checks++;
    if (g1 !== (owner == 1) || g2 !== (owner == 2)) begin
      failures++;
      $display("%0t MISMATCH r=%b%b g=%b%b owner=%0d", $time, r1, r2, g1, g2, owner);
    end
  endtask

  initial begin
    #(20000);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 check();
    // directed: simultaneous rise, then hand-over both ways
    r1 = 1'b1; r2 = 1'b1; #1 check();
    if (g1) r1 = 1'b0; else r2 = 1'b0;
    #1 check();
    r1 = 1'b1; r2 = 1'b1; #1 check();
    r1 = 1'b0; r2 = 1'b0; #1 check();
    repeat (2000) begin
      case ($urandom_range(0, 2))
        0: r1 = ~r1;
        1: r2 = ~r2;
        default: begin r1 = ~r1; r2 = ~r2; end
      endcase
      #1 check();
    end
    checks++;
    if (n_tie == 0 || n_handover == 0) begin
      failures++;
      $display("FAIL: ties=%0d hand-overs=%0d", n_tie, n_handover);
    end
    $display("ties=%0d hand-overs=%0d", n_tie, n_handover);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
