// ome_fig_sequences_tb: directed testbench replaying the two handshake
// sequences used to characterise the servers, on ome_top in both
// configurations.
//
// Asymmetric server (default ome_top):
//  1. advance approval: C1 raises both wires and is acknowledged, lowers its
//     early wire, C2 requests and is acknowledged at once while C1.a is still
//     high, C1 lowers its actual wire, C1.a falls, then C2 completes;
//  2. too-early request: C1 is acknowledged, C2 requests before C1's early
//     release and is not acknowledged until C1.a falls after C1's actual
//     release.
// Symmetric server (SYMMETRIC = 1): sequence 1 with two-wire C2, then its
// mirror image in which C1 receives the advance approval.
// Only the order of the edges matters; the time between them is arbitrary
// (10 time units here). Each step checks both acknowledges after the edge.
module ome_fig_sequences_tb;
  import ome_pkg::*;

  logic reset = 1'b1;
  ome_req_t a_c1 = '0, a_c2 = '0, s_c1 = '0, s_c2 = '0;
  logic a_c1_a, a_c2_a, s_c1_a, s_c2_a;
  int checks = 0, failures = 0;
  int n_adv = 0, n_wait = 0;

  ome_top u_asym (.reset(reset), .opp_en(1'b1), .c1(a_c1), .c1_a(a_c1_a), .c2(a_c2), .c2_a(a_c2_a));
  ome_top #(.SYMMETRIC(1'b1)) u_sym (
    .reset(reset), .opp_en(1'b1), .c1(s_c1), .c1_a(s_c1_a), .c2(s_c2), .c2_a(s_c2_a));

  task automatic expect_acks(input string step, input logic a1, input logic a2,
                             input logic got1, input logic got2);
    checks++;
    if (got1 !== a1 || got2 !== a2) begin
      failures++;
      $display("FAIL %s: acks %b%b, expected %b%b", step, got1, got2, a1, a2);
    end
  endtask

  task automatic asym_step(input string step, input ome_req_t c1, input logic c2_r,
                           input logic a1, input logic a2);
    a_c1 = c1;
    a_c2 = {c2_r, c2_r};
    #10 expect_acks(step, a1, a2, a_c1_a, a_c2_a);
  endtask

  task automatic sym_step(input string step, input ome_req_t c1, input ome_req_t c2,
                          input logic a1, input logic a2);
    s_c1 = c1;
    s_c2 = c2;
    #10 expect_acks(step, a1, a2, s_c1_a, s_c2_a);
  endtask

  initial begin
    #1000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10 reset = 1'b0;
    #10;
    // asymmetric, sequence 1: advance approval
    asym_step("A1 C1 request",        2'b11, 1'b0, 1'b1, 1'b0);
    asym_step("A1 C1 early release",  2'b01, 1'b0, 1'b1, 1'b0);
    asym_step("A1 C2 request",        2'b01, 1'b1, 1'b1, 1'b1);
    if (a_c1_a && a_c2_a) n_adv++;
    asym_step("A1 C1 actual release", 2'b00, 1'b1, 1'b0, 1'b1);
    asym_step("A1 C2 release",        2'b00, 1'b0, 1'b0, 1'b0);
    // asymmetric, sequence 2: too-early request
    asym_step("A2 C1 request",        2'b11, 1'b0, 1'b1, 1'b0);
    asym_step("A2 C2 request",        2'b11, 1'b1, 1'b1, 1'b0);
    asym_step("A2 C1 early release",  2'b01, 1'b1, 1'b1, 1'b0);
    asym_step("A2 C1 actual release", 2'b00, 1'b1, 1'b0, 1'b1);
    if (!a_c1_a && a_c2_a) n_wait++;
    asym_step("A2 C2 release",        2'b00, 1'b0, 1'b0, 1'b0);
    // symmetric, sequence 1: C2 granted in advance
    sym_step("S1 C1 request",         2'b11, 2'b00, 1'b1, 1'b0);
    sym_step("S1 C1 early release",   2'b01, 2'b00, 1'b1, 1'b0);
    sym_step("S1 C2 request",         2'b01, 2'b11, 1'b1, 1'b1);
    if (s_c1_a && s_c2_a) n_adv++;
    sym_step("S1 C1 actual release",  2'b00, 2'b11, 1'b0, 1'b1);
    sym_step("S1 C2 early release",   2'b00, 2'b01, 1'b0, 1'b1);
    sym_step("S1 C2 actual release",  2'b00, 2'b00, 1'b0, 1'b0);
    // symmetric, sequence 2: mirror image, C1 granted in advance
    sym_step("S2 C2 request",         2'b00, 2'b11, 1'b0, 1'b1);
    sym_step("S2 C2 early release",   2'b00, 2'b01, 1'b0, 1'b1);
    sym_step("S2 C1 request",         2'b11, 2'b01, 1'b1, 1'b1);
    if (s_c1_a && s_c2_a) n_adv++;
    sym_step("S2 C2 actual release",  2'b11, 2'b00, 1'b1, 1'b0);
    sym_step("S2 C1 early release",   2'b01, 2'b00, 1'b1, 1'b0);
    sym_step("S2 C1 actual release",  2'b00, 2'b00, 1'b0, 1'b0);
    checks++;
    if (n_adv != 3 || n_wait != 1) begin
      failures++;
      $display("FAIL: %0d advance approvals, %0d waits", n_adv, n_wait);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
