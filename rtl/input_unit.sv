// input_unit -- one router input port: VC buffers plus per-VC packet state.
//
// Each of the NUM_VC virtual channels has its own vc_buffer of DEPTH flits.
// An arriving flit (in_link.valid) is written into the buffer of the VC it
// names. Per VC the unit keeps a two-state packet register: IDLE (the next
// flit at the front is a head that still needs a route and an output VC) and
// ACTIVE (the packet owns output port out_port[v] and downstream VC
// out_vc[v]). The control unit moves a VC to ACTIVE with a VC-allocation
// grant (va_gnt) and pops one flit per cycle with a switch-allocation grant
// (pop). Popping the tail flit returns the VC to IDLE (wormhole switching:
// the route is held for the whole packet).
//
// Every pop returns one credit upstream, registered: credit_out is valid in
// the cycle after the pop. A flit written at a clock edge is at the buffer
// front from the next cycle.
//
// Buffer storage, per-VC state and credit return follow the design's input
// port description; the two-state encoding and the credit timing are this
// implementation's choices.
module input_unit #(
  parameter int unsigned NUM_VC = 4,
  parameter int unsigned DEPTH  = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  noc_pkg::link_t            in_link,
  // switch allocation: pop one flit of VC pop_vc
  input  logic                      pop,
  input  logic [noc_pkg::VC_W-1:0]  pop_vc,
  // VC allocation: VC va_vc gets output va_port, downstream VC va_out_vc
  input  logic                      va_gnt,
  input  logic [noc_pkg::VC_W-1:0]  va_vc,
  input  noc_pkg::port_e            va_port,
  input  logic [noc_pkg::VC_W-1:0]  va_out_vc,
  // per-VC view for the control unit and the crossbar
  output noc_pkg::flit_t            front    [NUM_VC],
  output logic [NUM_VC-1:0]         nonempty,
  output logic [NUM_VC-1:0]         active,
  output noc_pkg::port_e            out_port [NUM_VC],
  output logic [noc_pkg::VC_W-1:0]  out_vc   [NUM_VC],
  output noc_pkg::credit_t          credit_out
);
  import noc_pkg::*;

  logic [NUM_VC-1:0] empty;

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    logic wr, rd;
    assign wr = in_link.valid && (int'(in_link.vc) == v);
    assign rd = pop && (int'(pop_vc) == v);

    vc_buffer #(.DEPTH(DEPTH)) u_buf (
      .clk    (clk),
      .rst_n  (rst_n),
      .wr_en  (wr),
      .wr_flit(in_link.flit),
      .rd_en  (rd),
      .front  (front[v]),
      .empty  (empty[v]),
      .full   (),
      .count  ()
    );
    assign nonempty[v] = !empty[v];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        active[v]   <= 1'b0;
        out_port[v] <= P_LOCAL;
        out_vc[v]   <= '0;
      end else if (rd && is_tail(front[v].ftype)) begin
        active[v]   <= 1'b0;
      end else if (va_gnt && int'(va_vc) == v) begin
        active[v]   <= 1'b1;
        out_port[v] <= va_port;
        out_vc[v]   <= va_out_vc;
      end
    end

    // An idle VC must present a head flit; an active VC is never re-allocated.
    a_head_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (!active[v] && !empty[v]) |-> is_head(front[v].ftype));
    a_no_double_alloc: assert property (@(posedge clk) disable iff (!rst_n)
      (va_gnt && int'(va_vc) == v) |-> !active[v]);
    a_pop_only_active: assert property (@(posedge clk) disable iff (!rst_n)
      rd |-> active[v]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credit_out <= '0;
    else begin
      credit_out.valid <= pop;
      credit_out.vc    <= pop_vc;
    end
  end

  a_vc_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_link.valid |-> (int'(in_link.vc) < NUM_VC));

endmodule
