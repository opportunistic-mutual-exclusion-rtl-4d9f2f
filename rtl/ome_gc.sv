// ome_gc: state-holding gate (generalised C-element) of a production-rule
// netlist.
//
// A production-rule pair "pu -> y+" / "pd -> y-" describes a CMOS gate with a
// pull-up network pu and a pull-down network pd. When neither network
// conducts, the gate keeps its value (a staticizer holds the node). The gate
// is written as a transparent latch whose enable is (pu | pd) and whose data
// is pu. The two networks must never conduct together (interference); a
// correct netlist guarantees that, and this gate then drives pu's value.
//
// Interface: pu, pd are the two guard expressions, y is the node.
// Timing: zero-delay; y follows a conducting network in the same time step.
// Synthesis maps the gate to a level-sensitive latch; the latch is intended,
// as the servers built from it are clockless (asynchronous) circuits.
module ome_gc (
  input  logic pu,  // pull-up guard
  input  logic pd,  // pull-down guard
  output logic y    // state-holding node
);

  always_latch begin
    if (pu || pd) y = pu;
  end

  // Interference (both networks conducting) means the netlist is wrong. It
  // is not checked at power-up (time 0): there the nodes start at arbitrary
  // values and the reset pull-downs may fight pull-ups that are not gated by
  // reset until the reset has propagated.
  always_comb begin
    assert final ($time == 0 || !(pu && pd))
      else $error("ome_gc: pull-up and pull-down conduct together");
  end

endmodule
