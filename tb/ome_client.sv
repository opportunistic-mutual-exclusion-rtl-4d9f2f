// ome_client: behavioural model of a client of the mutual-exclusion server,
// for testbenches only.
//
// The client runs four-phase handshakes with random gaps. It acts only at
// times t with t mod 10 == PHASE, so two clients with different phases never
// change their wires in the same time step. A two-wire client raises both
// request wires, waits for the acknowledge, holds for a random number of
// slots, lowers the early wire (early release), waits again and lowers the
// actual wire; a one-wire client has re tied to ra. While pause is high it
// starts no new request. n_done counts completed handshakes.
module ome_client
  import ome_pkg::*;
#(
  parameter int PHASE    = 0,
  parameter bit TWO_WIRE = 1'b1,
  parameter int MAXIDLE  = 6,
  parameter int MAXHOLD  = 4
) (
  input  logic     run,
  input  logic     pause,
  input  logic     ack,
  output ome_req_t req,
  output int       n_done
);

  task automatic slot();
    longint unsigned d;
    d = 64'd10 - (($time + 64'd10 - longint'(PHASE)) % 64'd10);
    #(d);
  endtask

  initial begin
    req    = '0;
    n_done = 0;
    wait (run);
    forever begin
      repeat ($urandom_range(0, MAXIDLE)) slot();
      slot();
      while (pause) slot();
      req = '1;
      wait (ack);
      slot();
      repeat ($urandom_range(0, MAXHOLD)) slot();
      if (TWO_WIRE) begin
        req.re = 1'b0;
        repeat ($urandom_range(0, MAXHOLD)) slot();
        slot();
      end
      req = '0;
      wait (!ack);
      n_done++;
    end
  end

endmodule
