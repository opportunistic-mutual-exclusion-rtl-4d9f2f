// ome_mode_gate: one-bit switch that turns the opportunistic mode on or off
// for one two-wire client channel.
//
// The server can only grant early because it sees the early request re fall
// before the actual request ra. With opp_en low this gate holds the early
// request it passes to the server high for as long as ra is high
// (re_out = re | (ra & ~opp_en)), so the server sees both wires fall
// together and behaves as a plain mutual-exclusion server: no client is
// acknowledged before the other's actual release. With opp_en high the
// wires pass unchanged. The OR of two monotonic wires adds no hazard.
//
// The paper states only that a few gates and a single bit can switch the
// mode; this gate, and placing it in front of the server, are this design's
// choice. opp_en is a static configuration bit: change it only while the
// client's channel is idle (both wires and the acknowledge low).
// Interface: opp_en, req_in (from the client), req_out (to the server).
// Timing: combinational.
module ome_mode_gate
  import ome_pkg::*;
(
  input  logic     opp_en,   // 1: opportunistic grants allowed
  input  ome_req_t req_in,   // client's early and actual request
  output ome_req_t req_out   // request as seen by the server
);

  assign req_out.re = req_in.re | (req_in.ra & ~opp_en);
  assign req_out.ra = req_in.ra;

endmodule
