// router -- wormhole virtual-channel router of the 3D mesh NoC.
//
// Three parts, as in the design's router schematic: NUM_PORTS input units
// (VC buffers of DEPTH flits, NUM_VC per port), the central control unit
// (routing computation, VC allocation, switch allocation, credit counters)
// and the central crossbar, pruned of the turns the routing algorithm never
// takes. Ports are numbered local, east, west, north, south, up, down.
//
// Link protocol (per port and direction): in_link/out_link carry one flit
// per cycle with its VC number; credit_out/credit_in carry one credit per
// cycle with its VC number, returned when a flit leaves an input buffer.
// A sender may only send on a VC for which it holds a credit; the counters
// start at DEPTH, the depth of the receiving buffer.
//
// Timing: a flit arriving at edge t is at its buffer front from cycle t.
// A head flit then takes one cycle of VC allocation and one of switch
// allocation; the crossbar output is registered, so the head leaves on
// out_link 3 cycles after it arrived (zero load). Body flits follow one per
// cycle. The credit for a popped flit is on credit_out one cycle after the
// pop. With DEPTH >= 4 a single VC can stream at one flit per cycle between
// two routers.
//
// my_coord is the router's own position in the mesh (a constant at the
// instance; a port rather than a parameter so that all routers are one
// module). ROUTING selects the routing algorithm and thereby the crossbar
// pruning.
//
// Following the router architecture: wormhole switching, VCs, credit
// counters, a central control unit and a MUX crossbar without the turns the
// routing cannot take; defaults 4 VCs of 4 flits. The link format, the
// 3-cycle pipeline and the registered outputs are this implementation's own.
module router #(
  parameter int unsigned       NUM_PORTS = 7,
  parameter int unsigned       NUM_VC    = 4,
  parameter int unsigned       DEPTH     = 4,
  parameter noc_pkg::routing_e ROUTING   = noc_pkg::RT_XYZ
) (
  input  logic             clk,
  input  logic             rst_n,
  input  noc_pkg::coord_t  my_coord,
  input  noc_pkg::link_t   in_link    [NUM_PORTS],
  output noc_pkg::credit_t credit_out [NUM_PORTS],
  output noc_pkg::link_t   out_link   [NUM_PORTS],
  input  noc_pkg::credit_t credit_in  [NUM_PORTS]
);
  import noc_pkg::*;

  flit_t                            front    [NUM_PORTS][NUM_VC];
  logic [NUM_PORTS-1:0][NUM_VC-1:0] nonempty, active;
  port_e                            out_port [NUM_PORTS][NUM_VC];
  logic [VC_W-1:0]                  out_vc   [NUM_PORTS][NUM_VC];

  logic [NUM_PORTS-1:0] va_gnt, pop, xb_valid;
  logic [VC_W-1:0]      va_vc [NUM_PORTS], va_out_vc [NUM_PORTS], pop_vc [NUM_PORTS];
  port_e                va_port [NUM_PORTS];
  logic [PORT_W-1:0]    xb_sel [NUM_PORTS];

  // Crossbar inputs: the flit each input pops this cycle, with the
  // downstream VC its packet was allocated (selected in the control unit).
  flit_t           xb_flit [NUM_PORTS];
  logic [VC_W-1:0] xb_vc   [NUM_PORTS];
  link_t           xb_out  [NUM_PORTS];

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_in
    input_unit #(.NUM_VC(NUM_VC), .DEPTH(DEPTH)) u_in (
      .clk(clk), .rst_n(rst_n), .in_link(in_link[p]),
      .pop(pop[p]), .pop_vc(pop_vc[p]),
      .va_gnt(va_gnt[p]), .va_vc(va_vc[p]), .va_port(va_port[p]), .va_out_vc(va_out_vc[p]),
      .front(front[p]), .nonempty(nonempty[p]), .active(active[p]),
      .out_port(out_port[p]), .out_vc(out_vc[p]), .credit_out(credit_out[p])
    );
  end

  control_unit #(.NUM_PORTS(NUM_PORTS), .NUM_VC(NUM_VC), .DEPTH(DEPTH), .ROUTING(ROUTING)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .cur(my_coord),
    .front(front), .nonempty(nonempty), .active(active),
    .out_port(out_port), .out_vc(out_vc), .credit_in(credit_in),
    .va_gnt(va_gnt), .va_vc(va_vc), .va_port(va_port), .va_out_vc(va_out_vc),
    .pop(pop), .pop_vc(pop_vc), .xb_valid(xb_valid), .xb_sel(xb_sel),
    .xb_flit(xb_flit), .xb_vc(xb_vc)
  );

  crossbar #(.NUM_PORTS(NUM_PORTS), .ROUTING(ROUTING)) u_xbar (
    .in_flit(xb_flit), .in_vc(xb_vc), .sel(xb_sel), .sel_valid(xb_valid), .out_link(xb_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NUM_PORTS; o++) out_link[o] <= '0;
    end else begin
      for (int o = 0; o < NUM_PORTS; o++) out_link[o] <= xb_out[o];
    end
  end

endmodule
