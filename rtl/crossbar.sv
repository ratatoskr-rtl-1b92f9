// crossbar -- MUX-based router crossbar with routing-aware pruning.
//
// Output port o carries the flit of input port sel[o] when sel_valid[o] is
// high, built as an AND-OR multiplexer. The mux leg from input i to output o
// exists only if noc_pkg::turn_allowed(ROUTING, i, o) says the routing
// algorithm can ever take that turn; otherwise the leg is tied to ground and
// synthesis removes it. With XYZ routing this removes U-turns, turns from y
// or z back into x, and turns from z back into x or y. RT_FULL keeps every
// leg (the fully connected reference crossbar). Purely combinational; the
// router registers the outputs.
//
// The pruning by forbidden turns is the design's area-saving feature; the
// AND-OR form of the mux is this implementation's choice.
module crossbar #(
  parameter int unsigned       NUM_PORTS = 7,
  parameter noc_pkg::routing_e ROUTING   = noc_pkg::RT_XYZ
) (
  input  noc_pkg::flit_t             in_flit   [NUM_PORTS],
  input  logic [noc_pkg::VC_W-1:0]   in_vc     [NUM_PORTS],
  input  logic [noc_pkg::PORT_W-1:0] sel       [NUM_PORTS],
  input  logic [NUM_PORTS-1:0]       sel_valid,
  output noc_pkg::link_t             out_link  [NUM_PORTS]
);
  import noc_pkg::*;

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_out
    always_comb begin
      out_link[o] = '0;
      for (int i = 0; i < NUM_PORTS; i++) begin
        if (turn_allowed(ROUTING, port_e'(i), port_e'(o)) &&
            sel_valid[o] && int'(sel[o]) == i) begin
          out_link[o].valid = 1'b1;
          out_link[o].vc    = in_vc[i];
          out_link[o].flit  = in_flit[i];
        end
      end
    end
  end

endmodule
