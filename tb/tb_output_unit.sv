// tb_output_unit -- credit counters and VC ownership against a model.
// The driver sends only on VCs the model says have credit, returns credits
// for flits it has "received" with random delay, and claims only free VCs.
// Every cycle credit_ok and vc_free must equal the model.
module tb_output_unit;
  import noc_pkg::*;
  localparam int unsigned V = 4, D = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            send = 0, send_tail = 0, claim = 0;
  logic [VC_W-1:0] send_vc = '0, claim_vc = '0;
  credit_t         credit_in = '0;
  logic [V-1:0]    credit_ok, vc_free;

  output_unit #(.NUM_VC(V), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int cred [V];      // model credits
  int owed [V];      // flits downstream that can still return a credit
  bit busy [V];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < V; v++) begin cred[v] = D; owed[v] = 0; busy[v] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int sv, cv, kv;
      @(negedge clk);
      for (int v = 0; v < V; v++) begin
        check(credit_ok[v] == (cred[v] > 0), $sformatf("credit_ok[%0d] model %0d", v, cred[v]));
        check(vc_free[v] == !busy[v], $sformatf("vc_free[%0d]", v));
      end
      sv = $urandom_range(V - 1);
      cv = $urandom_range(V - 1);
      kv = $urandom_range(V - 1);
      send      = busy[sv] && cred[sv] > 0 && ($urandom_range(1) == 0);
      send_vc   = VC_W'(sv);
      send_tail = send && ($urandom_range(5) == 0);
      credit_in.valid = owed[cv] > 0 && ($urandom_range(2) == 0);
      credit_in.vc    = VC_W'(cv);
      claim     = !busy[kv] && !(send && send_tail && sv == kv) && ($urandom_range(3) == 0);
      claim_vc  = VC_W'(kv);
      @(posedge clk); #1;
      if (send) begin cred[sv]--; owed[sv]++; if (send_tail) busy[sv] = 0; end
      if (credit_in.valid) begin cred[cv]++; owed[cv]--; end
      if (claim) busy[kv] = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
