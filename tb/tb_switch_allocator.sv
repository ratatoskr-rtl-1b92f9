// tb_switch_allocator -- rule checks on random requests plus fairness runs.
// Every input grant must name a requesting VC whose route output selects
// exactly that input; every valid output must select a granted input; each
// input wins at most once; with any request some output must be valid.
// Constant requests must be served round robin across inputs (per output)
// and across VCs (per input).
module tb_switch_allocator;
  import noc_pkg::*;
  localparam int unsigned P = 7, V = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [P-1:0][V-1:0] req;
  port_e               route [P][V];
  logic [P-1:0]        in_gnt, out_valid;
  logic [VC_W-1:0]     in_gnt_vc [P];
  logic [PORT_W-1:0]   out_sel [P];

  switch_allocator #(.NUM_PORTS(P), .NUM_VC(V)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic check_rules();
    int wins [P];
    for (int p = 0; p < P; p++) wins[p] = 0;
    for (int o = 0; o < P; o++) if (out_valid[o]) begin
      int p = int'(out_sel[o]);
      check(p < P && in_gnt[p], "output selects a granted input");
      if (p < P) begin
        check(int'(route[p][in_gnt_vc[p]]) == o, "selected VC routes to this output");
        check(req[p][in_gnt_vc[p]], "selected VC requests");
        wins[p]++;
      end
    end
    for (int p = 0; p < P; p++) begin
      check(wins[p] == int'(in_gnt[p]), "input granted exactly once or not at all");
    end
    if (req != '0) check(out_valid != '0, "requests but no output valid");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt [P];
    req = '0;
    for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) route[p][v] = P_LOCAL;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      for (int p = 0; p < P; p++)
        for (int v = 0; v < V; v++) begin
          req[p][v]   = ($urandom_range(2) == 0);
          route[p][v] = port_e'($urandom_range(P - 1));
        end
      #1 check_rules();
    end
    // all inputs to output 6 (down)
    @(negedge clk);
    for (int p = 0; p < P; p++) begin
      cnt[p] = 0;
      req[p] = V'(1) << ((p + 1) % V);
      for (int v = 0; v < V; v++) route[p][v] = P_DOWN;
    end
    for (int n = 0; n < 7 * 10; n++) begin
      @(negedge clk); #1;
      check_rules();
      for (int p = 0; p < P; p++) if (in_gnt[p]) cnt[p]++;
    end
    for (int p = 0; p < P; p++) check(cnt[p] == 10, $sformatf("input %0d served %0d of 10", p, cnt[p]));
    // all VCs of input 4 to output 0
    @(negedge clk);
    req = '0;
    req[4] = '1;
    for (int v = 0; v < V; v++) begin cnt[v] = 0; route[4][v] = P_LOCAL; end
    for (int n = 0; n < V * 10; n++) begin
      @(negedge clk); #1;
      check_rules();
      if (in_gnt[4]) cnt[in_gnt_vc[4]]++;
    end
    for (int v = 0; v < V; v++) check(cnt[v] == 10, $sformatf("VC %0d served %0d of 10", v, cnt[v]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
