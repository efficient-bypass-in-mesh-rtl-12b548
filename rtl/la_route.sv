// la_route: lookahead dimension-order routing.
//
// Given the coordinates of this router, the output port a packet takes here
// and its destination, it returns the output port the packet will take at
// the next router. The result travels in the lookahead and in the flit, so
// no router computes its own route for a transit packet. `local_route` is
// the plain route at this router, used for packets injected here.
// Purely combinational; X is routed before Y. In a torus each dimension is
// travelled the shorter way round.
module la_route
  import nebb_pkg::*;
#(
  parameter int unsigned K     = 8,
  parameter bit          TORUS = 1'b0
) (
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic [PORT_W-1:0]  out_port,
  input  dest_t              dest,
  output logic [PORT_W-1:0]  next_route,
  output logic [PORT_W-1:0]  local_route
);
  logic [2*COORD_W-1:0] nb;
  always_comb begin
    nb          = neighbour(my_x, my_y, out_port, K);
    next_route  = dor_route(nb[2*COORD_W-1:COORD_W], nb[COORD_W-1:0], dest, TORUS, K);
    local_route = dor_route(my_x, my_y, dest, TORUS, K);
  end
endmodule
