// ome_sym: symmetric opportunistic mutual-exclusion server (clockless).
//
// Both clients request with two wires (early request re, actual request ra)
// and either may receive the opportunistic grant: a client whose request
// (both wires high) arrives after the other client's early release and
// before its actual release is acknowledged at once; a request that arrives
// before the other's early release waits for the actual release.
//
// How it works. One arbiter x,y = mutex(GX, GY) works in three modes set by
// f1 and f2 (00: idle, arbitrate C1 against C2; f1: C1 holds the resource,
// arbitrate C1's early release against a too-early C2 request; f2: the
// mirror image). Six branch registers b1..b6 latch which guarded command of
// the six-way selection fired and sequence its actions; busy is their OR:
//   b1 (00, x)  wait C1.ra; C1.a+; f1+         normal grant to C1
//   b2 (00, y)  wait C2.ra; C2.a+; f2+         normal grant to C2
//   b3 (f1, y)  g1+; wait g1-; f1-             C2 asked too early
//   b4 (f1, x)  g1+; f1-                       C1 released early
//   b5 (f2, x)  g2+; wait g2-; f2-             C1 asked too early
//   b6 (f2, y)  g2+; f2-                       C2 released early
// Two small parallel processes complete a client's handshake whenever g1
// (g2) is set: once both of that client's wires are low its acknowledge
// falls, then g1 (g2) falls. A too-early request keeps its arbiter grant
// across the mode change, so after b3 (b5) it is served as a normal grant.
// GX and GY are latched arbiter inputs, as G_arb is in the asymmetric
// netlist, so that a guard cannot change while the mode switches; a latched
// early-release input is withdrawn when the too-early branch has consumed
// its meaning.
//
// The paper gives this server's handshake expansion and the mode structure
// of its single arbiter, not its gates. The guards follow that expansion;
// the branch registers, the latched inputs and every gate are this design's
// own derivation. In the mode-00 guard of C2 the paper's expansion reads
// ~g1; the mirror of C1's guard, ~g2, is used instead (see the README).
//
// Interface: reset (active high, requests low while it is high), c1 and c2
// (re, ra) requests, c1_a and c2_a acknowledges. Four-phase level
// handshakes. Timing: zero-delay model, every response settles within the
// time step of the request edge that caused it.
// Circuit warnings stand on purpose: the state-holding gates are latches and
// the arbiter forms a combinational loop, which is how a clockless circuit
// stores its state.
module ome_sym
  import ome_pkg::*;
(
  input  logic     reset,  // active-high reset
  input  ome_req_t c1,     // C1.r_e, C1.r_a
  output logic     c1_a,   // C1.a
  input  ome_req_t c2,     // C2.r_e, C2.r_a
  output logic     c2_a    // C2.a
);

  logic f1, f2, g1, g2;
  logic gx, gy, x, y;
  logic b1, b2, b3, b4, b5, b6, busy;
  logic cond_x, cond_y;

  assign busy = b1 | b2 | b3 | b4 | b5 | b6;

  // Arbiter guards of the three modes (C1 side x, C2 side y)
  always_comb begin
    unique case ({f1, f2})
      2'b10:   begin cond_x = ~c1.re;                   cond_y = ~g2 & c2.re & c2.ra; end
      2'b01:   begin cond_x = ~g1 & c1.re & c1.ra;      cond_y = ~c2.re;              end
      default: begin cond_x = ~g1 & c1.re;              cond_y = ~g2 & c2.re;         end
    endcase
  end

  ome_gc u_gx (.pu(~reset & ~busy & cond_x), .pd(reset | (busy & (b1 | b3 | b4))), .y(gx));
  ome_gc u_gy (.pu(~reset & ~busy & cond_y), .pd(reset | (busy & (b2 | b5 | b6))), .y(gy));

  ome_mutex u_arb (.r1(gx), .r2(gy), .g1(x), .g2(y));

  // Branch registers of the six-way selection
  ome_gc u_b1 (.pu(~reset & ~busy & x & ~f1 & ~f2), .pd(reset | (f1 & ~x)),  .y(b1));
  ome_gc u_b2 (.pu(~reset & ~busy & y & ~f1 & ~f2), .pd(reset | (f2 & ~y)),  .y(b2));
  ome_gc u_b3 (.pu(~reset & ~busy & y &  f1),       .pd(reset | ~f1),        .y(b3));
  ome_gc u_b4 (.pu(~reset & ~busy & x &  f1),       .pd(reset | (~f1 & ~x)), .y(b4));
  ome_gc u_b5 (.pu(~reset & ~busy & x &  f2),       .pd(reset | ~f2),        .y(b5));
  ome_gc u_b6 (.pu(~reset & ~busy & y &  f2),       .pd(reset | (~f2 & ~y)), .y(b6));

  // Acknowledges: raised by a normal grant, lowered by the completion process
  ome_gc u_c1_a (.pu(b1 & c1.ra & ~f1), .pd(reset | (g1 & ~c1.ra & ~c1.re)), .y(c1_a));
  ome_gc u_c2_a (.pu(b2 & c2.ra & ~f2), .pd(reset | (g2 & ~c2.ra & ~c2.re)), .y(c2_a));

  // Completion requests g1, g2
  ome_gc u_g1 (.pu((b3 | b4) & f1 & c1_a), .pd(reset | ~c1_a), .y(g1));
  ome_gc u_g2 (.pu((b5 | b6) & f2 & c2_a), .pd(reset | ~c2_a), .y(g2));

  // Mode bits
  ome_gc u_f1 (
    .pu(b1 & c1_a),
    .pd(reset | (b3 & ~c1_a & ~g1) | (b4 & (g1 | ~c1_a))),
    .y (f1)
  );
  ome_gc u_f2 (
    .pu(b2 & c2_a),
    .pd(reset | (b5 & ~c2_a & ~g2) | (b6 & (g2 | ~c2_a))),
    .y (f2)
  );

endmodule
