// rr_arbiter -- round-robin arbiter with a hold-until-served pointer.
//
// Grants the first requester at or after the priority pointer (combinational
// gnt/gnt_idx), found with a masked lowest-set-bit search. The pointer
// moves one past the winner only when `advance` is high, i.e. when the
// caller says the grant was used. Until then the same
// requester keeps winning as long as it keeps requesting. This gives the
// "next VC may request only after the previous one was acknowledged" rule of
// the router's allocators. Pointer reset value 0.
//
// Round robin is the arbitration the router's allocators use; the masked
// priority-encoder form of the arbiter is this implementation's own.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N-1:0]                  req,
  input  logic                          advance,
  output logic [N-1:0]                  gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx,
  output logic                          any
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);

  logic [IW-1:0] ptr_q;
  logic [N-1:0]  mask, req_hi, pick;

  // Requests at or above the pointer win first; if there are none, the
  // lowest request overall wins (wrap-around).
  assign mask   = ~((N'(1) << ptr_q) - N'(1));
  assign req_hi = req & mask;
  assign pick   = (req_hi != '0) ? req_hi : req;
  assign gnt    = pick & (~pick + N'(1));      // lowest set bit
  assign any    = (req != '0);

  always_comb begin
    gnt_idx = '0;
    for (int unsigned i = 0; i < N; i++)
      if (gnt[i]) gnt_idx = gnt_idx | IW'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              ptr_q <= '0;
    else if (advance && any) ptr_q <= (int'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
  end

endmodule
