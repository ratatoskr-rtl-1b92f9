// vc_allocator -- separable input-first virtual-channel allocator.
//
// Stage 1 (per input port): among the VCs that hold a routed head flit
// (req[p][v]) one VC is picked round robin. The pick is held until it is
// acknowledged, so the next VC of that port may request only after the
// previous one received its grant. Stage 2 (per output port): among the
// input ports whose picked VC routes to this output, one input is chosen
// round robin, provided the output has a free downstream VC. The granted
// packet receives the free downstream VC with the lowest number.
//
// All outputs are combinational from the inputs and the arbiter pointers;
// the caller registers the result (the input unit's VC state, the output
// unit's busy flags). One grant per input and per output per cycle.
//
// The input-first order, round robin at both stages and lowest-free-VC
// choice follow the design's description of its central control unit.
module vc_allocator #(
  parameter int unsigned NUM_PORTS = 7,
  parameter int unsigned NUM_VC    = 4
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [NUM_PORTS-1:0][NUM_VC-1:0]      req,
  input  noc_pkg::port_e                        route    [NUM_PORTS][NUM_VC],
  input  logic [NUM_PORTS-1:0][NUM_VC-1:0]      out_free,   // per output port, per downstream VC
  output logic [NUM_PORTS-1:0]                  gnt,        // per input port
  output logic [noc_pkg::VC_W-1:0]              gnt_vc     [NUM_PORTS],
  output noc_pkg::port_e                        gnt_port   [NUM_PORTS],
  output logic [noc_pkg::VC_W-1:0]              gnt_out_vc [NUM_PORTS],
  output logic [NUM_PORTS-1:0]                  claim,      // per output port
  output logic [noc_pkg::VC_W-1:0]              claim_vc   [NUM_PORTS]
);
  import noc_pkg::*;
  localparam int unsigned VIW = $clog2(NUM_VC > 1 ? NUM_VC : 2);
  localparam int unsigned PIW = $clog2(NUM_PORTS > 1 ? NUM_PORTS : 2);

  logic [NUM_PORTS-1:0]  in_any;
  logic [VIW-1:0]        in_idx  [NUM_PORTS];
  port_e                 in_route[NUM_PORTS];

  // Stage 1: one VC per input port.
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_in
    logic [NUM_VC-1:0] g_unused;
    rr_arbiter #(.N(NUM_VC)) u_arb (
      .clk(clk), .rst_n(rst_n), .req(req[p]), .advance(gnt[p]),
      .gnt(g_unused), .gnt_idx(in_idx[p]), .any(in_any[p])
    );
    assign in_route[p] = route[p][in_idx[p]];
  end

  // Stage 2: one input per output port, if a downstream VC is free.
  logic [NUM_PORTS-1:0] out_win [NUM_PORTS];   // out_win[o][p]
  logic [VIW-1:0]       free_vc [NUM_PORTS];

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_out
    logic [NUM_PORTS-1:0] oreq;
    logic [PIW-1:0]       oidx;
    logic                 oany, has_free;

    always_comb begin
      has_free   = 1'b0;
      free_vc[o] = '0;
      for (int v = NUM_VC - 1; v >= 0; v--) begin
        if (out_free[o][v]) begin
          has_free   = 1'b1;
          free_vc[o] = VIW'(v);
        end
      end
      for (int p = 0; p < NUM_PORTS; p++)
        oreq[p] = has_free && in_any[p] && (int'(in_route[p]) == o);
    end

    rr_arbiter #(.N(NUM_PORTS)) u_arb (
      .clk(clk), .rst_n(rst_n), .req(oreq), .advance(1'b1),
      .gnt(out_win[o]), .gnt_idx(oidx), .any(oany)
    );
    assign claim[o]    = oany;
    assign claim_vc[o] = VC_W'(free_vc[o]);
  end

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      gnt[p]        = 1'b0;
      gnt_vc[p]     = VC_W'(in_idx[p]);
      gnt_port[p]   = in_route[p];
      gnt_out_vc[p] = '0;
      for (int o = 0; o < NUM_PORTS; o++) begin
        if (out_win[o][p]) begin
          gnt[p]        = 1'b1;
          gnt_out_vc[p] = VC_W'(free_vc[o]);
        end
      end
    end
  end

endmodule
