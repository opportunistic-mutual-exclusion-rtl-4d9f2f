// ome_sym_tb: self-checking testbench of the symmetric server ome_sym.
//
// Two random two-wire clients act at 0 and 5 mod 10, so every request edge
// is resolved before the next; ome_ref_model compares both acknowledges with
// the specification twice per slot. Zero-delay model: each acknowledge is
// expected within the time step of the edge that causes it. The run must
// see normal grants, advance approvals and too-early requests on both
// channels, and a clean return to idle after a reset in the middle.
module ome_sym_tb;
  import ome_pkg::*;

  localparam int NHS = 400;  // handshakes per client

  logic reset = 1'b1, run = 1'b0, pause = 1'b0, sample = 1'b0;
  ome_req_t c1, c2;
  logic c1_a, c2_a;
  int n1, n2, checks, failures;

  ome_sym dut (.reset(reset), .c1(c1), .c1_a(c1_a), .c2(c2), .c2_a(c2_a));

  ome_client #(.PHASE(0), .TWO_WIRE(1'b1)) u_c1 (.run(run), .pause(pause), .ack(c1_a), .req(c1), .n_done(n1));
  ome_client #(.PHASE(5), .TWO_WIRE(1'b1)) u_c2 (.run(run), .pause(pause), .ack(c2_a), .req(c2), .n_done(n2));

  ome_ref_model #(.SYMMETRIC(1'b1)) u_ref (
    .sample(sample), .opp_en(1'b1), .c1(c1), .c2(c2), .c1_a(c1_a), .c2_a(c2_a));

  initial forever begin
    #2 sample = 1'b1; #1 sample = 1'b0;
    #4 sample = 1'b1; #1 sample = 1'b0; #2;
  end

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: %s never happened", what); end
  endtask

  task automatic finish_tb();
    checks   = u_ref.checks;
    failures = u_ref.failures;
    $display("grants C1=%0d C2=%0d advance C1=%0d C2=%0d too-early C1=%0d C2=%0d handshakes %0d/%0d",
             u_ref.n_grant1, u_ref.n_grant2, u_ref.n_adv1, u_ref.n_adv2,
             u_ref.n_early1, u_ref.n_early2, n1, n2);
    need(u_ref.n_grant1, "normal C1 grant");
    need(u_ref.n_grant2, "normal C2 grant");
    need(u_ref.n_adv1,   "advance approval to C1");
    need(u_ref.n_adv2,   "advance approval to C2");
    need(u_ref.n_early1, "too-early C1 request");
    need(u_ref.n_early2, "too-early C2 request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    #(10 * 40 * NHS);
    $display("watchdog expired");
    u_ref.failures++;
    finish_tb();
  end

  initial begin
    #21 reset = 1'b0;
    if (c1_a || c2_a) begin u_ref.failures++; $display("FAIL: ack high after reset"); end
    u_ref.checks++;
    run = 1'b1;
    wait (n1 >= NHS / 2 && n2 >= NHS / 2);
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
