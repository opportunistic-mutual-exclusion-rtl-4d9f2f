// ome_asym: asymmetric opportunistic mutual-exclusion server (clockless).
//
// Two clients share one resource. Client C1 requests with two wires (early
// request re, actual request ra) and lowers re a known time before it stops
// using the resource. Client C2 requests with one wire r. If C2's request
// arrives after C1 has lowered re but before it has lowered ra, the server
// grants C2 at once ("advance approval"), before C1's handshake is complete:
// known bounds on the clients' timing (a positive-weight timing zigzag)
// guarantee that C2 cannot start using the resource before C1 has stopped.
// If C2 asks before C1's early release, C2 waits for C1's actual release.
//
// How it works. A single arbiter u,v = mutex(G_arb, C2.r) is used in two
// modes selected by the state bit f. With f low it arbitrates between the
// two clients (v: C1 wins, u: C2 wins). After C1 is acknowledged f rises and
// the same arbiter now decides between C1's early release (v) and C2's
// request (u). The four registers u_reg1, v_reg1 (f mode) and u_reg2, v_reg2
// (normal mode) latch which of the four cases occurred, reg is their OR, and
// G_arb is a latched arbiter input so that the guard cannot change while
// the mode switches. g and g_reg record that C1's handshake still has to be
// completed in parallel; C1.a then falls once both of C1's wires are low.
//
// This netlist is the production-rule set printed for the asymmetric server
// in the paper, gate for gate. Each "(*)" rule is a combinational gate here
// and each rule pair is an ome_gc state-holding gate. The arbiter's inside,
// the signal names (a leading underscore in the paper becomes n_) and the
// active-high reset port are this design's.
//
// Interface: reset (active high, requests must be low while it is high),
// c1 (re, ra), c1_a, c2_r, c2_a. Four-phase level handshakes, no clock.
// Timing: zero-delay model; every response settles in the time step of the
// request edge that caused it. The circuit relies on one timing assumption
// stated in the paper: the G_arb gate must switch before the environment
// can answer an f transition.
// Circuit warnings stand on purpose: the state-holding gates are latches and
// the arbiter and the gates around it form combinational loops, which is how
// a clockless circuit stores its state.
module ome_asym
  import ome_pkg::*;
(
  input  logic     reset,  // active-high reset
  input  ome_req_t c1,     // C1.r_e, C1.r_a
  output logic     c1_a,   // C1.a
  input  logic     c2_r,   // C2.r
  output logic     c2_a    // C2.a
);

  logic n_reset, n_c1_re;
  logic u, v, n_u, n_v;
  logic u_reg1, u_reg2, v_reg1, v_reg2;
  logic n_u_reg1, n_u_reg2, n_v_reg1, n_v_reg2;
  logic reg_any;                 // "reg" of the production rules
  logic g_arb;
  logic n_g_reg, g_reg;
  logic n_g, g;
  logic n_f, f;
  logic n_c1_a;
  logic n_c2_a;

  // Combinational gates (*)
  assign n_reset  = ~reset;
  assign n_c1_re  = ~n_reset | ~c1.re;
  assign n_u_reg1 = ~u_reg1;
  assign n_u_reg2 = ~u_reg2;
  assign n_v_reg1 = ~v_reg1;
  assign n_v_reg2 = ~v_reg2;
  assign reg_any  = ~(n_u_reg1 & n_u_reg2 & n_v_reg1 & n_v_reg2);
  assign n_u      = ~u;
  assign n_v      = ~v;
  assign g_reg    = ~n_g_reg;
  assign g        = ~n_g;
  assign c2_a     = ~n_c2_a;

  // Arbiter input: G = ~g & (f xor C1.r_e), latched until the grant is taken
  ome_gc u_g_arb (
    .pu(~reg_any & ~g & ((~n_f & ~c1.re) | (~f & ~n_c1_re))),
    .pd(reset | (reg_any & (v_reg1 | v_reg2))),
    .y (g_arb)
  );

  ome_mutex u_arb (.r1(g_arb), .r2(c2_r), .g1(v), .g2(u));

  ome_gc u_n_g_reg (
    .pu(~f & ~c1_a & ~g),
    .pd(c1_a & v_reg1 & reg_any),
    .y (n_g_reg)
  );

  // f mode, C2 won: C2 asked too early
  ome_gc u_u_reg1 (
    .pu(~n_u & ~n_f & ~reg_any),
    .pd(reset | (reg_any & n_g & n_f & n_c1_a)),
    .y (u_reg1)
  );

  // f mode, C1 won: early release came first
  ome_gc u_v_reg1 (
    .pu(~n_v & ~n_f & ~reg_any),
    .pd(reset | (reg_any & n_f & n_v)),
    .y (v_reg1)
  );

  // normal mode, C2 won
  ome_gc u_u_reg2 (
    .pu(~n_u & ~f & ~reg_any),
    .pd(reset | (reg_any & n_g & n_u)),
    .y (u_reg2)
  );

  // normal mode, C1 won
  ome_gc u_v_reg2 (
    .pu(~n_v & ~f & ~reg_any & ~g_reg),
    .pd(reset | (reg_any & c1_a & f & n_v)),
    .y (v_reg2)
  );

  ome_gc u_n_g (
    .pu(~n_reset | (~c1_a & ~f)),
    .pd(((reg_any & u_reg1) | g_reg) & f),
    .y (n_g)
  );

  ome_gc u_n_f (
    .pu(~n_reset | ((((~n_u_reg1 & ~c1_a) | ~n_v_reg1)) & ~n_g)),
    .pd(reg_any & v_reg2 & c1_a),
    .y (n_f)
  );

  ome_gc u_f (
    .pu(~n_f),
    .pd(reset | (g & n_f)),
    .y (f)
  );

  ome_gc u_n_c1_a (
    .pu(~n_reset | (~v_reg2 & (~n_u_reg1 | ~n_g_reg) & ~c1.ra & ~c1.re)),
    .pd(n_g_reg & c1.ra & c1.re & v_reg2 & reg_any),
    .y (n_c1_a)
  );

  ome_gc u_c1_a (
    .pu(~n_c1_re & ~n_c1_a),
    .pd(reset | (n_c1_re & n_c1_a)),
    .y (c1_a)
  );

  ome_gc u_n_c2_a (
    .pu(~c2_r & ~u_reg2),
    .pd(reg_any & u_reg2 & c2_r),
    .y (n_c2_a)
  );

endmodule
