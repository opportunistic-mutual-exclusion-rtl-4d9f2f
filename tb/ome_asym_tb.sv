// ome_asym_tb: self-checking testbench of the asymmetric server ome_asym.
//
// C1 is a random two-wire client acting at times 0 mod 10, C2 a random
// one-wire client acting at 5 mod 10, so every request edge is resolved
// before the next one and the server's answer is deterministic. Twice per
// slot (2 and 7 mod 10) ome_ref_model compares both acknowledges with the
// specification. The server is a zero-delay model, so each acknowledge is
// expected within the time step of the edge that causes it, which is the
// latency checked here. The run must see normal grants to both clients,
// advance approvals to C2 and too-early C2 requests. A reset in the middle
// checks that the server returns to idle.
module ome_asym_tb;
  import ome_pkg::*;

  localparam int NHS = 400;  // handshakes per client

  logic reset = 1'b1, run = 1'b0, pause = 1'b0, sample = 1'b0;
  ome_req_t c1, c2;
  logic c1_a, c2_a;
  int n1, n2, checks, failures;

  ome_asym dut (.reset(reset), .c1(c1), .c1_a(c1_a), .c2_r(c2.ra), .c2_a(c2_a));

  ome_client #(.PHASE(0), .TWO_WIRE(1'b1)) u_c1 (.run(run), .pause(pause), .ack(c1_a), .req(c1), .n_done(n1));
  ome_client #(.PHASE(5), .TWO_WIRE(1'b0)) u_c2 (.run(run), .pause(pause), .ack(c2_a), .req(c2), .n_done(n2));

  ome_ref_model #(.SYMMETRIC(1'b0)) u_ref (
    .sample(sample), .opp_en(1'b1), .c1(c1), .c2(c2), .c1_a(c1_a), .c2_a(c2_a));

  initial forever begin
    #2 sample = 1'b1; #1 sample = 1'b0;
    #4 sample = 1'b1; #1 sample = 1'b0; #2;
  end

  task automatic finish_tb();
    checks   = u_ref.checks;
    failures = u_ref.failures;
    $display("grants C1=%0d C2=%0d advance C2=%0d too-early C2=%0d handshakes %0d/%0d",
             u_ref.n_grant1, u_ref.n_grant2, u_ref.n_adv2, u_ref.n_early2, n1, n2);
    if (u_ref.n_grant1 == 0) begin failures++; $display("FAIL: no normal C1 grant"); end
    if (u_ref.n_grant2 == 0) begin failures++; $display("FAIL: no normal C2 grant"); end
    if (u_ref.n_adv2   == 0) begin failures++; $display("FAIL: no advance approval"); end
    if (u_ref.n_early2 == 0) begin failures++; $display("FAIL: no too-early request"); end
    if (u_ref.n_adv1   != 0) begin failures++; $display("FAIL: C1 granted in advance"); end
    checks += 5;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  // watchdog
  initial begin
    #(10 * 40 * NHS);
    $display("watchdog expired");
    u_ref.failures++;
    finish_tb();
  end

  initial begin
    #21 reset = 1'b0;
    // both acknowledges low after reset
    if (c1_a || c2_a) begin u_ref.failures++; $display("FAIL: ack high after reset"); end
    u_ref.checks++;
    run = 1'b1;
    wait (n1 >= NHS / 2 && n2 >= NHS / 2);
    // mid-run reset: let the clients finish, then reset the idle server
    pause = 1'b1;
    wait (c1 == '0 && c2 == '0 && !c1_a && !c2_a);
    #3 reset = 1'b1;
    #10 reset = 1'b0;
    #1;
    if (c1_a || c2_a) begin u_ref.failures++; $display("FAIL: ack high after reset"); end
    u_ref.checks++;
    pause = 1'b0;
    wait (n1 >= NHS && n2 >= NHS);
    #20 finish_tb();
  end

endmodule
