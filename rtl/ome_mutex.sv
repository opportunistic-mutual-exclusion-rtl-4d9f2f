// ome_mutex: two-input mutual-exclusion element (arbiter) for clockless
// handshake circuits.
//
// Each request r1, r2 is a level. A request that rises while the other is not
// granted is granted (g1 or g2 rises) and keeps its grant until the request
// falls; the grant then falls and a pending other request is granted. The
// two grants are never high together. When both requests rise together, one
// of them wins; in silicon the choice is decided by the resolution of a
// metastable latch, here by evaluation order.
//
// Structure: the classic pair of cross-coupled NAND gates (an SR latch) with
// a filter stage on each output. In silicon the filter is a pair of
// transistors that hides the metastable midrail voltage; logically it is the
// AND of one NAND output low and the other high, which is what is written
// here. The intended combinational loop is the SR latch itself.
//
// The servers use this element as their single arbiter; the paper names the
// element but does not draw its inside, so the textbook form is used.
// Interface: r1, r2 requests; g1, g2 grants. Timing: zero-delay.
module ome_mutex (
  input  logic r1,
  input  logic r2,
  output logic g1,
  output logic g2
);

  logic n1, n2;  // outputs of the cross-coupled NAND pair

  assign n1 = ~(r1 & n2);
  assign n2 = ~(r2 & n1);

  // Output filter: a side is granted when its NAND is low and the other high.
  assign g1 = ~n1 &  n2;
  assign g2 = ~n2 &  n1;

  // The two grants are never high together once the time step has settled.
  always_comb begin
    assert final (!(g1 && g2)) else $error("ome_mutex: both grants high");
  end

endmodule
