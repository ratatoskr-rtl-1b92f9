// noc_3d -- 3D mesh network-on-chip: DIM_X x DIM_Y x DIM_Z tiles.
//
// Each tile holds one router and one processing element on the router's
// local port. Router (x,y,z) has index x + DIM_X*(y + DIM_Y*z). Its east port
// connects to the west port of (x+1,y,z), north to south of (x,y+1,z) and up
// to down of (x,y,z+1); the vertical links model the through-silicon links
// between stacked dies. Every link is a pair of unidirectional flit channels
// with a credit channel running back beside each. Ports at the mesh boundary
// are tied off (no flits in, no credits in) and left unused; synthesis
// removes their logic.
//
// The defaults are the main configuration evaluated for the design: a
// 4x4x4 mesh, 4 VCs per port, 4-flit buffers, XYZ dimension-ordered routing
// and a crossbar pruned of impossible turns. All routers run on one clock
// (the design's pseudo-mesochronous layer clocking is not modelled).
//
// Interface: inject_en starts and stops traffic generation in all tiles; the
// per-tile statistics of the processing elements come out as packed arrays
// indexed by tile number.
module noc_3d #(
  parameter int unsigned       DIM_X             = 4,
  parameter int unsigned       DIM_Y             = 4,
  parameter int unsigned       DIM_Z             = 4,
  parameter int unsigned       NUM_VC            = 4,
  parameter int unsigned       DEPTH             = 4,
  parameter noc_pkg::routing_e ROUTING           = noc_pkg::RT_XYZ,
  parameter int unsigned       PKT_LEN           = 32,
  parameter int unsigned       INJ_RATE_PERMILLE = 70,
  parameter int unsigned       SEED              = 32'h1234_5678,
  localparam int unsigned      N                 = DIM_X * DIM_Y * DIM_Z
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  inject_en,
  output logic [N-1:0][31:0]    pkts_sent,
  output logic [N-1:0][31:0]    pkts_recv,
  output logic [N-1:0][31:0]    flits_recv,
  output logic [N-1:0][31:0]    lat_sum,
  output logic [N-1:0][31:0]    lat_max,
  output logic [N-1:0][31:0]    pending,
  output logic [N-1:0][15:0]    errors
);
  import noc_pkg::*;
  localparam int unsigned P = NUM_PORTS;

  link_t   r_in   [N][P];
  link_t   r_out  [N][P];
  credit_t r_cin  [N][P];
  credit_t r_cout [N][P];

  function automatic int unsigned idx(int unsigned x, int unsigned y, int unsigned z);
    return x + DIM_X * (y + DIM_Y * z);
  endfunction

  for (genvar z = 0; z < DIM_Z; z++) begin : g_z
    for (genvar y = 0; y < DIM_Y; y++) begin : g_y
      for (genvar x = 0; x < DIM_X; x++) begin : g_x
        localparam int unsigned I = idx(x, y, z);
        localparam coord_t      C = '{x: COORD_W'(x), y: COORD_W'(y), z: COORD_W'(z)};

        router #(
          .NUM_PORTS(P), .NUM_VC(NUM_VC), .DEPTH(DEPTH), .ROUTING(ROUTING)
        ) u_router (
          .clk(clk), .rst_n(rst_n), .my_coord(C),
          .in_link(r_in[I]), .credit_out(r_cout[I]),
          .out_link(r_out[I]), .credit_in(r_cin[I])
        );

        processing_element #(
          .DIM_X(DIM_X), .DIM_Y(DIM_Y), .DIM_Z(DIM_Z),
          .NUM_VC(NUM_VC), .DEPTH(DEPTH), .PKT_LEN(PKT_LEN),
          .INJ_RATE_PERMILLE(INJ_RATE_PERMILLE), .SEED(SEED)
        ) u_pe (
          .clk(clk), .rst_n(rst_n), .my_coord(C), .inject_en(inject_en),
          .tx_link(r_in[I][P_LOCAL]), .tx_credit(r_cout[I][P_LOCAL]),
          .rx_link(r_out[I][P_LOCAL]), .rx_credit(r_cin[I][P_LOCAL]),
          .pkts_sent(pkts_sent[I]), .pkts_recv(pkts_recv[I]), .flits_recv(flits_recv[I]),
          .lat_sum(lat_sum[I]), .lat_max(lat_max[I]), .pending(pending[I]), .errors(errors[I])
        );

        // x links
        if (x + 1 < DIM_X) begin : g_e
          assign r_in[I][P_EAST]  = r_out[idx(x+1, y, z)][P_WEST];
          assign r_cin[I][P_EAST] = r_cout[idx(x+1, y, z)][P_WEST];
        end else begin : g_e_edge
          assign r_in[I][P_EAST]  = '0;
          assign r_cin[I][P_EAST] = '0;
        end
        if (x > 0) begin : g_w
          assign r_in[I][P_WEST]  = r_out[idx(x-1, y, z)][P_EAST];
          assign r_cin[I][P_WEST] = r_cout[idx(x-1, y, z)][P_EAST];
        end else begin : g_w_edge
          assign r_in[I][P_WEST]  = '0;
          assign r_cin[I][P_WEST] = '0;
        end
        // y links
        if (y + 1 < DIM_Y) begin : g_n
          assign r_in[I][P_NORTH]  = r_out[idx(x, y+1, z)][P_SOUTH];
          assign r_cin[I][P_NORTH] = r_cout[idx(x, y+1, z)][P_SOUTH];
        end else begin : g_n_edge
          assign r_in[I][P_NORTH]  = '0;
          assign r_cin[I][P_NORTH] = '0;
        end
        if (y > 0) begin : g_s
          assign r_in[I][P_SOUTH]  = r_out[idx(x, y-1, z)][P_NORTH];
          assign r_cin[I][P_SOUTH] = r_cout[idx(x, y-1, z)][P_NORTH];
        end else begin : g_s_edge
          assign r_in[I][P_SOUTH]  = '0;
          assign r_cin[I][P_SOUTH] = '0;
        end
        // z links (vertical, between dies)
        if (z + 1 < DIM_Z) begin : g_u
          assign r_in[I][P_UP]  = r_out[idx(x, y, z+1)][P_DOWN];
          assign r_cin[I][P_UP] = r_cout[idx(x, y, z+1)][P_DOWN];
        end else begin : g_u_edge
          assign r_in[I][P_UP]  = '0;
          assign r_cin[I][P_UP] = '0;
        end
        if (z > 0) begin : g_d
          assign r_in[I][P_DOWN]  = r_out[idx(x, y, z-1)][P_UP];
          assign r_cin[I][P_DOWN] = r_cout[idx(x, y, z-1)][P_UP];
        end else begin : g_d_edge
          assign r_in[I][P_DOWN]  = '0;
          assign r_cin[I][P_DOWN] = '0;
        end
      end
    end
  end

endmodule
