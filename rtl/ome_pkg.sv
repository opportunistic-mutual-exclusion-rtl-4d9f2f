// ome_pkg: types shared by the opportunistic mutual-exclusion servers.
//
// A client that can release early drives two request wires: the early
// request re and the actual request ra. It raises both to ask for the
// resource, lowers re shortly before it stops using the resource ("early
// release") and lowers ra when it has really stopped ("actual release").
// The server answers on a single acknowledge wire. All signals are
// level-sensitive four-phase handshake wires; there is no clock.
package ome_pkg;

  // Two-wire request of a client that signals its early release.
  typedef struct packed {
    logic re;  // early request, falls first on release
    logic ra;  // actual request, falls when use has ended
  } ome_req_t;

endpackage
