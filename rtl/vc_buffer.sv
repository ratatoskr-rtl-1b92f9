// vc_buffer -- flit FIFO of one virtual channel of a router input port.
//
// DEPTH flit slots (slot 0 .. n in the router schematic) held in a circular
// array with read/write pointers and an occupancy counter. A write and a read
// may happen in the same cycle. The front flit is visible combinationally
// (first-word fall-through), so a flit written at a clock edge can be read
// from the next cycle on. Writing when full or reading when empty is a
// protocol error caught by assertions; credit flow control upstream makes it
// impossible in the router.
//
// A FIFO per VC of DEPTH flits follows the router architecture (DEPTH = 4
// in the main configuration); the circular-buffer form with a first-word
// fall-through output is this implementation's own.
module vc_buffer #(
  parameter int unsigned DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  noc_pkg::flit_t wr_flit,
  input  logic          rd_en,
  output noc_pkg::flit_t front,
  output logic          empty,
  output logic          full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH > 1 ? DEPTH : 2);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  noc_pkg::flit_t mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == CW'(DEPTH));
  assign front = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en) wr_ptr <= inc(wr_ptr);
      if (rd_en) rd_ptr <= inc(rd_ptr);
      count <= count + CW'(wr_en) - CW'(rd_en);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= wr_flit;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);

endmodule
