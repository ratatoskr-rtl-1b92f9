// control_unit -- the central control unit of a router.
//
// Holds the three allocation stages of the router and the output-side flow
// control:
//   * routing computation: one routing_unit per input VC, applied to the
//     head flit at the front of every IDLE VC;
//   * VC allocation (vc_allocator): an IDLE VC with a routed head requests
//     its output port; a grant makes it ACTIVE with a downstream VC;
//   * switch allocation (switch_allocator): an ACTIVE VC with a flit and a
//     downstream credit requests its output port; a grant pops the flit and
//     sets the crossbar;
//   * one output_unit per output port with the credit counters and the busy
//     flags of the downstream VCs.
// All decisions are combinational within one cycle; their effects (VC state,
// pops, credits, crossbar output register) land at the next clock edge.
// Consequently a head flit spends one cycle in VC allocation and one in
// switch allocation after it reaches the front of its buffer.
//
// The split into routing computation, VC allocation and switch allocation
// follows the design; the single-cycle-per-stage timing is this
// implementation's choice.
module control_unit #(
  parameter int unsigned       NUM_PORTS = 7,
  parameter int unsigned       NUM_VC    = 4,
  parameter int unsigned       DEPTH     = 4,
  parameter noc_pkg::routing_e ROUTING   = noc_pkg::RT_XYZ
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  noc_pkg::coord_t                  cur,
  // view of the input units
  input  noc_pkg::flit_t                   front    [NUM_PORTS][NUM_VC],
  input  logic [NUM_PORTS-1:0][NUM_VC-1:0] nonempty,
  input  logic [NUM_PORTS-1:0][NUM_VC-1:0] active,
  input  noc_pkg::port_e                   out_port [NUM_PORTS][NUM_VC],
  input  logic [noc_pkg::VC_W-1:0]         out_vc   [NUM_PORTS][NUM_VC],
  // credits from the downstream routers
  input  noc_pkg::credit_t                 credit_in [NUM_PORTS],
  // VC allocation result, per input port
  output logic [NUM_PORTS-1:0]             va_gnt,
  output logic [noc_pkg::VC_W-1:0]         va_vc     [NUM_PORTS],
  output noc_pkg::port_e                   va_port   [NUM_PORTS],
  output logic [noc_pkg::VC_W-1:0]         va_out_vc [NUM_PORTS],
  // switch allocation result, per input port
  output logic [NUM_PORTS-1:0]             pop,
  output logic [noc_pkg::VC_W-1:0]         pop_vc    [NUM_PORTS],
  // crossbar setting, per output port
  output logic [NUM_PORTS-1:0]             xb_valid,
  output logic [noc_pkg::PORT_W-1:0]       xb_sel    [NUM_PORTS],
  // per input port: the flit it pops and the downstream VC it goes to
  output noc_pkg::flit_t                   xb_flit   [NUM_PORTS],
  output logic [noc_pkg::VC_W-1:0]         xb_vc     [NUM_PORTS]
);
  import noc_pkg::*;
  localparam int unsigned VIW = $clog2(NUM_VC > 1 ? NUM_VC : 2);

  port_e                            route [NUM_PORTS][NUM_VC];
  logic [NUM_PORTS-1:0][NUM_VC-1:0] va_req, sa_req;
  logic [NUM_PORTS-1:0][NUM_VC-1:0] credit_ok, vc_free;
  logic [NUM_PORTS-1:0]             claim;
  logic [VC_W-1:0]                  claim_vc [NUM_PORTS];

  // Routing computation and request generation.
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_rc
    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      routing_unit #(.ROUTING(ROUTING)) u_rc (
        .cur(cur), .head(front[p][v]), .out_port(route[p][v])
      );
      assign va_req[p][v] = nonempty[p][v] && !active[p][v] && is_head(front[p][v].ftype);
      assign sa_req[p][v] = nonempty[p][v] && active[p][v] &&
                            credit_ok[out_port[p][v]][VIW'(out_vc[p][v])];
    end
  end

  vc_allocator #(.NUM_PORTS(NUM_PORTS), .NUM_VC(NUM_VC)) u_va (
    .clk(clk), .rst_n(rst_n), .req(va_req), .route(route), .out_free(vc_free),
    .gnt(va_gnt), .gnt_vc(va_vc), .gnt_port(va_port), .gnt_out_vc(va_out_vc),
    .claim(claim), .claim_vc(claim_vc)
  );

  switch_allocator #(.NUM_PORTS(NUM_PORTS), .NUM_VC(NUM_VC)) u_sa (
    .clk(clk), .rst_n(rst_n), .req(sa_req), .route(out_port),
    .in_gnt(pop), .in_gnt_vc(pop_vc), .out_valid(xb_valid), .out_sel(xb_sel)
  );

  // The flit each input pops this cycle and its downstream VC.
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_sel
    assign xb_flit[p] = front[p][VIW'(pop_vc[p])];
    assign xb_vc[p]   = out_vc[p][VIW'(pop_vc[p])];
  end

  // Output side: credits and downstream VC ownership.
  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_out
    logic [VC_W-1:0] s_vc;
    logic            s_tail;
    assign s_vc   = xb_vc[xb_sel[o]];
    assign s_tail = is_tail(xb_flit[xb_sel[o]].ftype);
    output_unit #(.NUM_VC(NUM_VC), .DEPTH(DEPTH)) u_ou (
      .clk(clk), .rst_n(rst_n),
      .send(xb_valid[o]), .send_vc(s_vc), .send_tail(s_tail),
      .credit_in(credit_in[o]), .claim(claim[o]), .claim_vc(claim_vc[o]),
      .credit_ok(credit_ok[o]), .vc_free(vc_free[o])
    );
    // The routing algorithm never asks for a turn the crossbar lacks.
    a_turn_legal: assert property (@(posedge clk) disable iff (!rst_n)
      xb_valid[o] |-> turn_allowed(ROUTING, port_e'(xb_sel[o]), port_e'(o)));
  end

endmodule
