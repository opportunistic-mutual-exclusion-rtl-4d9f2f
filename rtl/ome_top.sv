// ome_top: opportunistic mutual-exclusion server with its mode switch.
//
// Two clients, C1 and C2, share one resource through this clockless server.
// A client that knows when it will stop using the resource lowers an early
// request wire before it stops; a client that asks for the resource ahead of
// need may then be granted while the other is still finishing, because
// known timing bounds guarantee that its use starts after the other's use
// ends. The server decides only from the order of the handshake events.
//
// SYMMETRIC = 0 (default) builds the asymmetric server: only C1 may release
// early, C2 has one request wire, carried here on c2.ra (c2.re is then not
// used). SYMMETRIC = 1 builds the symmetric server, where both clients have
// two wires and either may receive the early grant. In both, the early
// request of every two-wire client passes through an ome_mode_gate, so that
// opp_en = 0 turns the opportunistic grants off; change opp_en only while
// all channels are idle.
//
// Interface: reset (active high; hold the requests low while it is high),
// opp_en, c1 and c2 requests (re, ra), c1_a and c2_a acknowledges. Four-phase
// level handshakes, no clock. Timing: zero-delay model.
// The latch and loop warnings of this top come from the servers' state-
// holding gates and arbiter and stand on purpose (see those modules); in the
// asymmetric configuration c2.re is unused by design.
module ome_top
  import ome_pkg::*;
#(
  parameter bit SYMMETRIC = 1'b0  // 0: asymmetric server, 1: symmetric
) (
  input  logic     reset,
  input  logic     opp_en,
  input  ome_req_t c1,
  output logic     c1_a,
  input  ome_req_t c2,
  output logic     c2_a
);

  ome_req_t c1_s;  // C1 request as seen by the server

  ome_mode_gate u_gate1 (.opp_en(opp_en), .req_in(c1), .req_out(c1_s));

  if (SYMMETRIC) begin : g_sym
    ome_req_t c2_s;
    ome_mode_gate u_gate2 (.opp_en(opp_en), .req_in(c2), .req_out(c2_s));
    ome_sym u_server (.reset(reset), .c1(c1_s), .c1_a(c1_a), .c2(c2_s), .c2_a(c2_a));
  end else begin : g_asym
    ome_asym u_server (.reset(reset), .c1(c1_s), .c1_a(c1_a), .c2_r(c2.ra), .c2_a(c2_a));
  end

endmodule
