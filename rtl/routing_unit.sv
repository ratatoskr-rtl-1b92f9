// routing_unit -- routing computation for one head flit.
//
// Combinational: takes the router's own coordinates and the head flit, reads
// the destination from the head payload (noc_pkg::head_t) and returns the
// output port chosen by XYZ dimension-ordered routing: first the x offset is
// removed (east/west), then y (north/south), then z (up/down); a flit at its
// destination leaves on the local port. RT_FULL uses the same routing (it
// only changes crossbar pruning). The routing algorithm is the design's;
// the port orientation is this implementation's choice (see noc_pkg).
module routing_unit #(
  parameter noc_pkg::routing_e ROUTING = noc_pkg::RT_XYZ
) (
  input  noc_pkg::coord_t cur,
  input  noc_pkg::flit_t  head,
  output noc_pkg::port_e  out_port
);
  import noc_pkg::*;

  head_t h;
  assign h = head_t'(head.data);

  always_comb begin
    unique case (ROUTING)
      RT_XYZ, RT_FULL: out_port = route_xyz(cur, h.dst);
      default:         out_port = route_xyz(cur, h.dst);
    endcase
  end

endmodule
