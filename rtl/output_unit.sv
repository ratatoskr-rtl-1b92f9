// output_unit -- credit counters and VC ownership of one router output port.
//
// For each downstream VC the unit keeps a credit counter, reset to the
// downstream buffer depth DEPTH, and a busy flag. Sending a flit (send,
// send_vc) spends one credit; a credit returned by the downstream input unit
// (credit_in) gives one back; both may happen in the same cycle. A VC becomes
// busy when the VC allocator hands it to a packet (claim) and free again
// when that packet's tail flit is sent (send_tail). credit_ok[v] says VC v
// has at least one credit, vc_free[v] says it may be allocated.
//
// Credit-based flow control is the design's; counting full-buffer credits
// and freeing the VC at the tail are this implementation's choices.
module output_unit #(
  parameter int unsigned NUM_VC = 4,
  parameter int unsigned DEPTH  = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     send,
  input  logic [noc_pkg::VC_W-1:0] send_vc,
  input  logic                     send_tail,
  input  noc_pkg::credit_t         credit_in,
  input  logic                     claim,
  input  logic [noc_pkg::VC_W-1:0] claim_vc,
  output logic [NUM_VC-1:0]        credit_ok,
  output logic [NUM_VC-1:0]        vc_free
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [NUM_VC-1:0][CW-1:0] credits;
  logic [NUM_VC-1:0] busy;

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    logic dec, inc;
    assign dec = send && (int'(send_vc) == v);
    assign inc = credit_in.valid && (int'(credit_in.vc) == v);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        credits[v] <= CW'(DEPTH);
        busy[v]    <= 1'b0;
      end else begin
        if (dec && !inc)      credits[v] <= credits[v] - 1'b1;
        else if (inc && !dec) credits[v] <= credits[v] + 1'b1;
        if (dec && send_tail)                       busy[v] <= 1'b0;
        else if (claim && int'(claim_vc) == v)      busy[v] <= 1'b1;
      end
    end

    assign credit_ok[v] = (credits[v] != '0);
    assign vc_free[v]   = !busy[v];

    a_no_send_without_credit: assert property (@(posedge clk) disable iff (!rst_n)
      dec |-> credits[v] != '0);
    a_no_credit_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      (inc && !dec) |-> int'(credits[v]) < DEPTH);
    a_claim_only_free: assert property (@(posedge clk) disable iff (!rst_n)
      (claim && int'(claim_vc) == v) |-> !busy[v]);
  end

endmodule
