// ome_top_sym_tb: end-to-end testbench of ome_top in its symmetric
// configuration (SYMMETRIC = 1) with the opportunistic mode switch.
//
// C1 and C2 (both two-wire, acting at 0 and 5 mod 10)
// run random handshakes in three phases: opportunistic mode on, off, on
// again; the mode bit is changed only while both channels are idle, then
// the server is reset once more. ome_ref_model compares both acknowledges
// with the specification twice per slot. Each mechanism must occur: normal
// grants, advance approvals and too-early requests on both channels, a
// request after the other's early release that had to wait because the
// mode was off, and every mode switch.
module ome_top_sym_tb;
  import ome_pkg::*;

  localparam int NHS = 300;  // handshakes per client and phase

  logic reset = 1'b1, run = 1'b0, pause = 1'b0, sample = 1'b0, opp_en = 1'b1;
  ome_req_t c1, c2;
  logic c1_a, c2_a;
  int n1, n2, checks, failures, n_switch = 0;
  int adv_on = 0, adv_off = 0;

  ome_top #(.SYMMETRIC(1'b1)) dut (.reset(reset), .opp_en(opp_en), .c1(c1), .c1_a(c1_a), .c2(c2), .c2_a(c2_a));

  ome_client #(.PHASE(0), .TWO_WIRE(1'b1)) u_c1 (.run(run), .pause(pause), .ack(c1_a), .req(c1), .n_done(n1));
  ome_client #(.PHASE(5), .TWO_WIRE(1'b1)) u_c2 (.run(run), .pause(pause), .ack(c2_a), .req(c2), .n_done(n2));

  ome_ref_model #(.SYMMETRIC(1'b1)) u_ref (
    .sample(sample), .opp_en(opp_en), .c1(c1), .c2(c2), .c1_a(c1_a), .c2_a(c2_a));

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
    $display("grants C1=%0d C2=%0d advance C1=%0d C2=%0d (mode off: %0d) too-early C2=%0d waited with mode off=%0d switches=%0d",
             u_ref.n_grant1, u_ref.n_grant2, u_ref.n_adv1, u_ref.n_adv2, adv_off, u_ref.n_early2,
             u_ref.n_blocked, n_switch);
    need(u_ref.n_grant1,  "normal C1 grant");
    need(u_ref.n_grant2,  "normal C2 grant");
    need(u_ref.n_adv1,    "advance approval to C1");
    need(u_ref.n_adv2,    "advance approval to C2");
    need(u_ref.n_early1,  "too-early C1 request");
    need(u_ref.n_early2,  "too-early C2 request");
    need(u_ref.n_blocked, "wait after early release with the mode off");
    checks++;
    if (n_switch != 2) begin failures++; $display("FAIL: %0d mode switches", n_switch); end
    checks++;
    if (adv_off != 0) begin failures++; $display("FAIL: advance grant not allowed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    #(10 * 150 * NHS);
    $display("watchdog expired");
    u_ref.failures++;
    finish_tb();
  end

  task automatic quiesce();
    pause = 1'b1;
    wait (c1 == '0 && c2 == '0 && !c1_a && !c2_a);
    #3;
  endtask

  task automatic run_phase(input int target);
    pause = 1'b0;
    wait (n1 >= target && n2 >= target);
    quiesce();
  endtask

  initial begin
    #21 reset = 1'b0;
    u_ref.checks++;
    if (c1_a || c2_a) begin u_ref.failures++; $display("FAIL: ack high after reset"); end
    run = 1'b1;
    run_phase(NHS);
    adv_on = u_ref.n_adv1 + u_ref.n_adv2;
    opp_en = 1'b0; n_switch++;
    run_phase(2 * NHS);
    adv_off = u_ref.n_adv1 + u_ref.n_adv2 - adv_on;
    opp_en = 1'b1; n_switch++;
    reset = 1'b1; #10 reset = 1'b0; #1;
    u_ref.checks++;
    if (c1_a || c2_a) begin u_ref.failures++; $display("FAIL: ack high after reset"); end
    run_phase(3 * NHS);
    #20 finish_tb();
  end

endmodule
