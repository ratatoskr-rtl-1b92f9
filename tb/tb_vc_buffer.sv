// tb_vc_buffer -- random writes and reads against a reference queue.
// Checks front flit, empty, full and count every cycle, including
// simultaneous write and read on a full buffer.
module tb_vc_buffer;
  import noc_pkg::*;
  localparam int unsigned D = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  wr_en = 0, rd_en = 0, empty, full;
  flit_t wr_flit, front;
  logic [$clog2(D+1)-1:0] count;

  vc_buffer #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  flit_t model [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_flit = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // compare state
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == D), "full flag");
      check(int'(count) == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      if (model.size() > 0) check(front == model[0], "front flit");
      // next stimulus: never overflow/underflow
      rd_en   = (model.size() > 0) && ($urandom_range(2) != 0);
      wr_en   = ((model.size() < D) || rd_en) && ($urandom_range(2) != 0);
      wr_flit = flit_t'({2'($urandom_range(3)), 32'($urandom)});
      @(posedge clk);
      #1;
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_flit);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
