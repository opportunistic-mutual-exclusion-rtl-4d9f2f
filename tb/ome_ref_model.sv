// ome_ref_model: reference model and checker of the server's behaviour, for
// testbenches only.
//
// Written from the server's specification, not from its gates. On each
// rising edge of sample it updates the acknowledges it expects and compares
// them with the server's. The specification, for requests that never change
// in the same time step:
//  - a free resource is granted to a requesting client at once;
//  - a request that arrives while the other client holds the resource waits
//    until that client has lowered both wires, unless it arrives after the
//    holder's early release (early wire already low) and the opportunistic
//    mode is on; then it is granted at once ("advance approval"). In the
//    asymmetric server only C2 can be granted in advance;
//  - an acknowledge falls once the client's request wires are all low, but
//    in the asymmetric server an advance-granted C2 keeps its acknowledge
//    until C1's handshake has completed.
// Counters record how often each mechanism occurred.
module ome_ref_model
  import ome_pkg::*;
#(
  parameter bit SYMMETRIC = 1'b0
) (
  input logic     sample,
  input logic     opp_en,
  input ome_req_t c1,
  input ome_req_t c2,
  input logic     c1_a,
  input logic     c2_a
);

  int checks = 0, failures = 0;
  int n_grant1 = 0, n_grant2 = 0;       // grants to a free resource
  int n_adv1 = 0, n_adv2 = 0;           // advance approvals
  int n_early1 = 0, n_early2 = 0;       // too-early requests that waited
  int n_blocked = 0;                    // after early release, mode off
  int n_both_pending = 0;

  logic e1 = 1'b0, e2 = 1'b0;           // expected acknowledges
  logic adv1 = 1'b0, adv2 = 1'b0;       // request may be granted early
  logic r1_q = 1'b0, r2_q = 1'b0;

  always @(posedge sample) begin
    logic r1, r2;
    r1 = c1.re & c1.ra;
    r2 = c2.re & c2.ra;
    // classify newly arrived requests
    if (r2 && !r2_q && e1) begin
      if (!c1.re && opp_en) adv2 = 1'b1;
      else if (!c1.re)      n_blocked++;
      else                  n_early2++;
    end
    if (r1 && !r1_q && e2) begin
      if (SYMMETRIC && !c2.re && opp_en) adv1 = 1'b1;
      else if (!c2.re)                   n_blocked++;
      else                               n_early1++;
    end
    r1_q = r1;
    r2_q = r2;
    // releases
    if (e1 && !c1.re && !c1.ra) e1 = 1'b0;
    if (e2 && !c2.re && !c2.ra && (SYMMETRIC || !e1)) e2 = 1'b0;
    // grants
    if (r1 && !e1 && r2 && !e2 && !e1 && !e2) n_both_pending++;
    if (r1 && !e1 && (!e2 || adv1)) begin
      if (e2) n_adv1++; else n_grant1++;
      e1 = 1'b1;
      adv1 = 1'b0;
    end
    if (r2 && !e2 && (!e1 || adv2)) begin
      if (e1) n_adv2++; else n_grant2++;
      e2 = 1'b1;
      adv2 = 1'b0;
    end
    checks++;
    if (c1_a !== e1 || c2_a !== e2) begin
      failures++;
      if (failures <= 10)
        $display("%0t MISMATCH c1=%b%b c2=%b%b ack=%b%b expected=%b%b",
                 $time, c1.re, c1.ra, c2.re, c2.ra, c1_a, c2_a, e1, e2);
    end
  end

endmodule
