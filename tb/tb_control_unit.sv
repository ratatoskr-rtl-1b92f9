// tb_control_unit -- the router's control unit against modelled input units
// and downstream routers, router at (1,1,1) of a 4x4x4 mesh.
// The test keeps the input buffers itself: it fills per-(port,VC) queues
// with packets whose entry port is consistent with dimension-ordered travel,
// applies the unit's VC grants and pops, and keeps per-output credit
// counters, returning each credit after a random delay. Checks: a VC grant
// goes to an idle VC with a head and names the XYZ output (computed here
// from coordinates) and a free downstream VC; every pop has a matching
// crossbar setting, a credit downstream and carries the front flit; flits of
// different packets never interleave on one downstream VC; packets arrive
// whole; everything drains and all credits return.
module tb_control_unit;
  import noc_pkg::*;
  localparam int unsigned P = 7, V = 4, D = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t          cur = '{x: 4'd1, y: 4'd1, z: 4'd1};
  flit_t           front [P][V];
  logic [P-1:0][V-1:0] nonempty, active;
  port_e           out_port [P][V];
  logic [VC_W-1:0] out_vc [P][V];
  credit_t         credit_in [P];
  logic [P-1:0]    va_gnt, pop, xb_valid;
  logic [VC_W-1:0] va_vc [P], va_out_vc [P], pop_vc [P], xb_vc [P];
  port_e           va_port [P];
  logic [PORT_W-1:0] xb_sel [P];
  flit_t           xb_flit [P];

  control_unit #(.NUM_PORTS(P), .NUM_VC(V), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // independent reference: output port for a destination
  function automatic int ref_route(coord_t d);
    if (d.x != cur.x) return (d.x > cur.x) ? 1 : 2;
    if (d.y != cur.y) return (d.y > cur.y) ? 3 : 4;
    if (d.z != cur.z) return (d.z > cur.z) ? 5 : 6;
    return 0;
  endfunction
  // entry port p may feed output o: dimension order never goes backwards
  function automatic bit can_enter(int p, int o);
    if (p == o) return 0;
    if (p == 0 || o == 0) return 1;
    return ((o + 1) / 2) >= ((p + 1) / 2);
  endfunction

  flit_t q [P][V][$];
  bit    m_act [P][V];
  int    m_port [P][V], m_ovc [P][V];
  int    cred [P][V];
  int    owner [P][V];               // downstream VC owner (p*V+v) or -1
  int    ret [P][$];                 // credits owed per output
  int    left [P][V];                // flits still to enqueue for a packet
  int    n_in = 0, n_out = 0, n_flits = 0;
  logic [P-1:0]    s_va_gnt, s_pop;
  logic [VC_W-1:0] s_va_vc [P], s_va_out_vc [P], s_pop_vc [P];
  port_e           s_va_port [P];

  always_comb
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++) begin
        nonempty[p][v] = q[p][v].size() > 0;
        front[p][v]    = (q[p][v].size() > 0) ? q[p][v][0] : '0;
        active[p][v]   = m_act[p][v];
        out_port[p][v] = port_e'(m_port[p][v]);
        out_vc[p][v]   = VC_W'(m_ovc[p][v]);
      end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < P; p++) begin
      credit_in[p] = '0;
      for (int v = 0; v < V; v++) begin
        m_act[p][v] = 0; m_port[p][v] = 0; m_ovc[p][v] = 0;
        cred[p][v] = D; owner[p][v] = -1; left[p][v] = 0;
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 12000; n++) begin
      @(negedge clk);
      // ---- new flits into the modelled buffers
      for (int p = 0; p < P; p++) begin
        int v;
        v = $urandom_range(V - 1);
        if ((n < 10000 || left[p][v] > 0) && q[p][v].size() < D && $urandom_range(2) == 0) begin
          flit_t f;
          if (left[p][v] == 0) begin
            head_t h;
            int tries;
            tries = 0;
            do begin
              h.dst = '{x: 4'($urandom_range(3)), y: 4'($urandom_range(3)), z: 4'($urandom_range(3))};
              tries++;
            end while (!can_enter(p, ref_route(h.dst)) && tries < 50);
            if (can_enter(p, ref_route(h.dst))) begin
              h.src = '0; h.seq = 8'(n_in);
              left[p][v] = $urandom_range(1, 5);
              f.ftype = (left[p][v] == 1) ? FT_SINGLE : FT_HEAD;
              f.data = FLIT_W'(h);
              q[p][v].push_back(f);
              left[p][v]--;
              n_in++;
            end
          end else begin
            f.ftype = (left[p][v] == 1) ? FT_TAIL : FT_BODY;
            f.data = $urandom;
            q[p][v].push_back(f);
            left[p][v]--;
          end
        end
      end
      #1;
      s_va_gnt = va_gnt; s_va_vc = va_vc; s_va_port = va_port; s_va_out_vc = va_out_vc;
      s_pop = pop; s_pop_vc = pop_vc;
      // ---- check the combinational decisions of this cycle
      for (int p = 0; p < P; p++) begin
        if (va_gnt[p]) begin
          int v, o;
          v = int'(va_vc[p]); o = int'(va_port[p]);
          check(!m_act[p][v] && q[p][v].size() > 0 && is_head(q[p][v][0].ftype), "VC grant to idle VC with a head");
          if (q[p][v].size() > 0) begin
            head_t h;
            h = head_t'(q[p][v][0].data);
            check(o == ref_route(h.dst), "VC grant names the XYZ output");
          end
          check(owner[o][va_out_vc[p]] == -1, "downstream VC is free");
        end
        if (pop[p]) begin
          int v, o, ov;
          bit found;
          v = int'(pop_vc[p]); o = m_port[p][v]; ov = m_ovc[p][v];
          check(m_act[p][v] && q[p][v].size() > 0, "pop of an active, non-empty VC");
          check(xb_valid[o] && int'(xb_sel[o]) == p, "crossbar set for the pop");
          check(cred[o][ov] > 0, "credit available downstream");
          if (q[p][v].size() > 0) check(xb_flit[p] == q[p][v][0], "popped flit is the front");
          check(int'(xb_vc[p]) == ov, "downstream VC of the pop");
        end
      end
      for (int o = 0; o < P; o++)
        if (xb_valid[o]) check(pop[xb_sel[o]] && m_port[xb_sel[o]][pop_vc[xb_sel[o]]] == o, "crossbar only for pops");
      // ---- apply the decisions at the clock edge
      @(posedge clk);
      #1;
      for (int p = 0; p < P; p++) begin
        credit_in[p] = '0;
        if (ret[p].size() > 0 && $urandom_range(2) == 0) begin
          int ov;
          ov = ret[p].pop_front();
          credit_in[p] = '{valid: 1'b1, vc: VC_W'(ov)};
          cred[p][ov]++;
        end
      end
      for (int p = 0; p < P; p++) begin
        if (s_va_gnt[p]) begin
          m_act[p][s_va_vc[p]] = 1;
          m_port[p][s_va_vc[p]] = int'(s_va_port[p]);
          m_ovc[p][s_va_vc[p]] = int'(s_va_out_vc[p]);
          owner[s_va_port[p]][s_va_out_vc[p]] = p * V + int'(s_va_vc[p]);
        end
      end
      for (int p = 0; p < P; p++) if (s_pop[p]) begin
        int v, o, ov;
        flit_t f;
        v = int'(s_pop_vc[p]); o = m_port[p][v]; ov = m_ovc[p][v];
        f = q[p][v].pop_front();
        check(owner[o][ov] == p * V + v, "no interleaving on a downstream VC");
        cred[o][ov]--;
        ret[o].push_back(ov);
        n_flits++;
        if (is_tail(f.ftype)) begin
          m_act[p][v] = 0;
          owner[o][ov] = -1;
          n_out++;
        end
      end
    end
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++) begin
        check(q[p][v].size() == 0 && !m_act[p][v], "all queues drained");
        check(cred[p][v] == D && ret[p].size() == 0, "all credits returned");
      end
    check(n_out == n_in, $sformatf("packets in %0d out %0d", n_in, n_out));
    $display("control unit: %0d packets, %0d flits switched", n_out, n_flits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
