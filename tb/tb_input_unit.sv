// tb_input_unit -- packets on four VCs through one input unit.
// The driver sends packets on random VCs, keeping per-VC credits that are
// refilled only by the unit's credit_out. The test plays the control unit:
// it grants idle VCs with a head at the front a random output port and
// downstream VC, then pops flits of active VCs at random. Checks: popped
// flits come out per VC in sending order, out_port/out_vc hold the granted
// values for the whole packet, active clears after the tail, credit_out
// names the popped VC one cycle after the pop, and all credits return.
module tb_input_unit;
  import noc_pkg::*;
  localparam int unsigned V = 4, D = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t           in_link = '0;
  logic            pop = 0, va_gnt = 0;
  logic [VC_W-1:0] pop_vc = '0, va_vc = '0, va_out_vc = '0;
  port_e           va_port = P_LOCAL;
  flit_t           front [V];
  logic [V-1:0]    nonempty, active;
  port_e           out_port [V];
  logic [VC_W-1:0] out_vc [V];
  credit_t         credit_out;

  input_unit #(.NUM_VC(V), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  flit_t model [V][$];
  int    cred [V];
  port_e g_port [V];
  int    g_ovc [V];
  bit    g_act [V];
  int    sent_pkts = 0, done_pkts = 0;

  // sender: one packet at a time per VC, length 1..6
  int    left [V];
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_pop;
    n_pop = 0;
    for (int v = 0; v < V; v++) begin cred[v] = D; left[v] = 0; g_act[v] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int sv, pv, gv;
      logic [VC_W-1:0] exp_cr_vc;
      bit exp_cr;
      @(negedge clk);
      // compare visible state with the model
      for (int v = 0; v < V; v++) begin
        check(nonempty[v] == (model[v].size() > 0), "nonempty");
        if (model[v].size() > 0) check(front[v] == model[v][0], $sformatf("front of VC %0d", v));
        check(active[v] == g_act[v], $sformatf("active of VC %0d", v));
        if (g_act[v]) check(out_port[v] == g_port[v] && int'(out_vc[v]) == g_ovc[v], "held allocation");
      end
      // stimulus
      sv = $urandom_range(V - 1);
      in_link = '0;
      if (n < 5000 && cred[sv] > 0 && $urandom_range(1) == 0) begin
        flit_t f;
        f.data = $urandom;
        if (left[sv] == 0) begin
          left[sv] = $urandom_range(1, 6);
          f.ftype = (left[sv] == 1) ? FT_SINGLE : FT_HEAD;
          sent_pkts++;
        end else f.ftype = (left[sv] == 1) ? FT_TAIL : FT_BODY;
        left[sv]--;
        in_link.valid = 1; in_link.vc = VC_W'(sv); in_link.flit = f;
      end
      gv = $urandom_range(V - 1);
      va_gnt = !g_act[gv] && model[gv].size() > 0 && $urandom_range(1) == 0;
      va_vc = VC_W'(gv);
      va_port = port_e'($urandom_range(6));
      va_out_vc = VC_W'($urandom_range(V - 1));
      pv = $urandom_range(V - 1);
      pop = g_act[pv] && model[pv].size() > 0 && $urandom_range(2) != 0;
      pop_vc = VC_W'(pv);
      @(posedge clk); #1;
      // model update
      if (in_link.valid) begin model[sv].push_back(in_link.flit); cred[sv]--; end
      if (va_gnt) begin g_act[gv] = 1; g_port[gv] = va_port; g_ovc[gv] = int'(va_out_vc); end
      if (pop) begin
        flit_t f;
        f = model[pv].pop_front();
        if (is_tail(f.ftype)) begin g_act[pv] = 0; done_pkts++; end
        check(credit_out.valid && int'(credit_out.vc) == pv, "credit for the popped flit");
        n_pop++;
      end else check(!credit_out.valid, "no credit without pop");
      if (credit_out.valid) cred[credit_out.vc]++;
    end
    for (int v = 0; v < V; v++) check(cred[v] + model[v].size() == D, "credits conserved");
    check(done_pkts > 300, $sformatf("only %0d packets completed", done_pkts));
    $display("input unit: %0d packets in, %0d completed, %0d pops", sent_pkts, done_pkts, n_pop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
