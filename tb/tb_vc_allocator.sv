// tb_vc_allocator -- rule checks on random requests plus two fairness runs.
// Random phase: every grant must match a requesting VC and its route, the
// granted downstream VC must be the lowest free one, each output claims at
// most one VC and only with a winner, and with all outputs free some request
// must be granted. Fairness phase: constant requests from all inputs to one
// output must be served round robin (each input once per 7 cycles), and
// four VCs of one input must be served round robin (each once per 4 cycles).
module tb_vc_allocator;
  import noc_pkg::*;
  localparam int unsigned P = 7, V = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [P-1:0][V-1:0] req, out_free;
  port_e               route [P][V];
  logic [P-1:0]        gnt, claim;
  logic [VC_W-1:0]     gnt_vc [P], gnt_out_vc [P], claim_vc [P];
  port_e               gnt_port [P];

  vc_allocator #(.NUM_PORTS(P), .NUM_VC(V)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int lowest_free(int o);
    for (int v = 0; v < V; v++) if (out_free[o][v]) return v;
    return -1;
  endfunction

  task automatic check_rules(bit all_free);
    int n_to [P];
    for (int o = 0; o < P; o++) n_to[o] = 0;
    for (int p = 0; p < P; p++) if (gnt[p]) begin
      int o = int'(gnt_port[p]);
      check(req[p][gnt_vc[p]], "grant to a requesting VC");
      check(gnt_port[p] == route[p][gnt_vc[p]], "grant on the VC's route");
      check(int'(gnt_out_vc[p]) == lowest_free(o), $sformatf("lowest free VC: got %0d want %0d", gnt_out_vc[p], lowest_free(o)));
      check(claim[o] && claim_vc[o] == gnt_out_vc[p], "claim matches grant");
      n_to[o]++;
    end
    for (int o = 0; o < P; o++) begin
      check(n_to[o] <= 1, "one winner per output");
      check(claim[o] == (n_to[o] == 1), "claim only with a winner");
    end
    if (all_free && req != '0) check(gnt != '0, "no grant although all outputs free");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt [P];
    req = '0; out_free = '1;
    for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) route[p][v] = P_LOCAL;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random phase
    for (int n = 0; n < 4000; n++) begin
      bit all_free = ($urandom_range(3) == 0);
      @(negedge clk);
      for (int p = 0; p < P; p++)
        for (int v = 0; v < V; v++) begin
          req[p][v]      = ($urandom_range(2) == 0);
          route[p][v]    = port_e'($urandom_range(P - 1));
          out_free[p][v] = all_free ? 1'b1 : ($urandom_range(1) == 0);
        end
      #1 check_rules(all_free);
    end
    // fairness across inputs: all inputs want output 3, one VC each
    @(negedge clk);
    out_free = '1;
    for (int p = 0; p < P; p++) begin
      cnt[p] = 0;
      req[p] = V'(1) << (p % V);
      for (int v = 0; v < V; v++) route[p][v] = P_NORTH;
    end
    for (int n = 0; n < 7 * 10; n++) begin
      @(negedge clk); #1;
      check_rules(1);
      for (int p = 0; p < P; p++) if (gnt[p]) cnt[p]++;
    end
    for (int p = 0; p < P; p++) check(cnt[p] == 10, $sformatf("input %0d served %0d of 10", p, cnt[p]));
    // fairness across VCs of one input
    @(negedge clk);
    req = '0;
    req[2] = '1;
    for (int v = 0; v < V; v++) begin cnt[v] = 0; route[2][v] = P_EAST; end
    for (int n = 0; n < V * 10; n++) begin
      @(negedge clk); #1;
      check_rules(1);
      if (gnt[2]) cnt[gnt_vc[2]]++;
    end
    for (int v = 0; v < V; v++) check(cnt[v] == 10, $sformatf("VC %0d served %0d of 10", v, cnt[v]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
