// switch_allocator -- separable input-first switch allocator.
//
// A request req[p][v] means: VC v of input p is ACTIVE, has a flit and its
// downstream VC has a credit. Stage 1 picks one VC per input port round
// robin; stage 2 picks, per output port, one of the input ports whose picked
// VC routes there, also round robin. An input's round-robin pointer moves
// only when its pick wins stage 2. No maximal matching is attempted: an
// input that loses at its output stays idle this cycle even if another of
// its VCs could have used a free output (the cheaper separable scheme the
// design chose over maximum matching).
//
// Combinational outputs: in_gnt/in_gnt_vc say which VC of each input pops a
// flit this cycle; out_valid/out_sel set the crossbar. The caller registers
// the crossbar output (switch traversal in the next cycle on the link).
//
// Following the router architecture this implements: separable input-first
// switch allocation without maximum matching, with round-robin arbiters.
// The arbiter rules (input pointer moves on a grant, output pointer moves
// past each winner) are this implementation's own.
module switch_allocator #(
  parameter int unsigned NUM_PORTS = 7,
  parameter int unsigned NUM_VC    = 4
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [NUM_PORTS-1:0][NUM_VC-1:0]      req,
  input  noc_pkg::port_e                        route [NUM_PORTS][NUM_VC],
  output logic [NUM_PORTS-1:0]                  in_gnt,
  output logic [noc_pkg::VC_W-1:0]              in_gnt_vc [NUM_PORTS],
  output logic [NUM_PORTS-1:0]                  out_valid,
  output logic [noc_pkg::PORT_W-1:0]            out_sel   [NUM_PORTS]
);
  import noc_pkg::*;
  localparam int unsigned VIW = $clog2(NUM_VC > 1 ? NUM_VC : 2);
  localparam int unsigned PIW = $clog2(NUM_PORTS > 1 ? NUM_PORTS : 2);

  logic [NUM_PORTS-1:0] in_any;
  logic [VIW-1:0]       in_idx   [NUM_PORTS];
  port_e                in_route [NUM_PORTS];

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_in
    logic [NUM_VC-1:0] g_unused;
    rr_arbiter #(.N(NUM_VC)) u_arb (
      .clk(clk), .rst_n(rst_n), .req(req[p]), .advance(in_gnt[p]),
      .gnt(g_unused), .gnt_idx(in_idx[p]), .any(in_any[p])
    );
    assign in_route[p]  = route[p][in_idx[p]];
    assign in_gnt_vc[p] = VC_W'(in_idx[p]);
  end

  logic [NUM_PORTS-1:0] out_win [NUM_PORTS];   // out_win[o][p]

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_out
    logic [NUM_PORTS-1:0] oreq;
    logic [PIW-1:0]       oidx;
    always_comb
      for (int p = 0; p < NUM_PORTS; p++)
        oreq[p] = in_any[p] && (int'(in_route[p]) == o);
    rr_arbiter #(.N(NUM_PORTS)) u_arb (
      .clk(clk), .rst_n(rst_n), .req(oreq), .advance(1'b1),
      .gnt(out_win[o]), .gnt_idx(oidx), .any(out_valid[o])
    );
    assign out_sel[o] = PORT_W'(oidx);
  end

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_gnt[p] = 1'b0;
      for (int o = 0; o < NUM_PORTS; o++)
        if (out_win[o][p]) in_gnt[p] = 1'b1;
    end
  end

endmodule
