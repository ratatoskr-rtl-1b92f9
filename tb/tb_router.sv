// tb_router -- self-checking testbench of one router at (1,1,1) in a 4x4x4 mesh.
//
// Every input port has a driver with one packet queue per VC and its own
// credit counters (reset to the buffer depth). Every output port has a sink
// that checks the flit stream per VC and returns credits, optionally held
// back to create backpressure. The expected output port of every packet
// comes from a reference XYZ routing written here, independently of the RTL.
//
// Phases: (1) zero-load latency: a 4-flit packet must leave 3 cycles after
// its head arrived, body flits back to back; (2) two inputs compete for one
// output and must get downstream VCs 0 and 1; (3) credits held back: exactly
// DEPTH flits per VC may pass, the rest after release; (4) random traffic
// from all inputs on all VCs, every flit checked for port, order and count.
module tb_router;
  import noc_pkg::*;

  localparam int unsigned P     = 7;
  localparam int unsigned V     = 4;
  localparam int unsigned D     = 4;
  localparam coord_t      ME    = '{x: 4'd1, y: 4'd1, z: 4'd1};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t   in_link [P], out_link [P];
  credit_t credit_out [P], credit_in [P];

  router #(.NUM_VC(V), .DEPTH(D)) dut (
    .clk(clk), .rst_n(rst_n), .my_coord(ME), .in_link(in_link), .credit_out(credit_out),
    .out_link(out_link), .credit_in(credit_in)
  );

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------- independent reference routing
  function automatic int ref_route(coord_t d);
    if (d.x != ME.x) return (d.x > ME.x) ? 1 : 2;
    if (d.y != ME.y) return (d.y > ME.y) ? 3 : 4;
    if (d.z != ME.z) return (d.z > ME.z) ? 5 : 6;
    return 0;
  endfunction
  // which input ports can a packet routed to output o come from (XYZ)?
  function automatic bit can_enter(int i, int o);
    int di, dout;  // dimension: 0 local, 1 x, 2 y, 3 z
    if (i == o) return 0;
    di   = (i == 0) ? 0 : (i + 1) / 2;
    dout = (o == 0) ? 0 : (o + 1) / 2;
    if (i == 0) return 1;
    if (o == 0) return 1;
    return dout >= di;
  endfunction

  // ---------------- drivers
  typedef struct { coord_t dst; int len; int id; } pkt_t;
  pkt_t q [P][V][$];
  int   cred [P][V];
  int   fidx [P][V];
  int   sent_pkts = 0, recv_pkts = 0;
  int   head_in_cycle [int];   // packet id -> cycle its head was on in_link

  function automatic flit_t mk_flit(pkt_t pk, int k);
    flit_t f;
    head_t h;
    if (k == 0) begin
      h.dst = pk.dst; h.src = ME; h.seq = 8'(pk.id);
      f.ftype = (pk.len == 1) ? FT_SINGLE : FT_HEAD;
      f.data  = FLIT_W'(h);
    end else begin
      f.ftype = (k == pk.len - 1) ? FT_TAIL : FT_BODY;
      f.data  = {16'(pk.id), 16'(k)};
    end
    return f;
  endfunction

  always @(posedge clk) begin
    for (int p = 0; p < P; p++) begin
      // credits returned by the router
      if (rst_n && credit_out[p].valid) cred[p][credit_out[p].vc]++;
    end
    for (int p = 0; p < P; p++) begin
      int cand [$];
      link_t l;
      cand.delete();
      l = '0;
      for (int v = 0; v < V; v++)
        if (q[p][v].size() > 0 && cred[p][v] > 0) cand.push_back(v);
      if (cand.size() > 0 && rst_n) begin
        int v;
        pkt_t pk;
        v  = cand[$urandom_range(cand.size() - 1)];
        pk = q[p][v][0];
        l.valid = 1;
        l.vc    = VC_W'(v);
        l.flit  = mk_flit(pk, fidx[p][v]);
        if (fidx[p][v] == 0) head_in_cycle[pk.id] = cyc + 1;
        cred[p][v]--;
        fidx[p][v]++;
        if (fidx[p][v] == pk.len) begin
          fidx[p][v] = 0;
          void'(q[p][v].pop_front());
          sent_pkts++;
        end
      end
      in_link[p] <= l;
    end
  end

  // ---------------- sinks
  bit   hold [P];
  int   owed [P][V];
  int   cur_id [P][V];
  int   cur_k  [P][V];
  bit   busy   [P][V];
  int   head_out_cycle [int];
  int   out_vc_of [int];
  int   flits_out [P];

  always @(posedge clk) begin
    for (int o = 0; o < P; o++) begin
      credit_t c;
      c = '0;
      if (rst_n && out_link[o].valid) begin
        int v;
        flit_t f;
        v = out_link[o].vc;
        f = out_link[o].flit;
        flits_out[o]++;
        owed[o][v]++;
        if (is_head(f.ftype)) begin
          head_t h;
          h = head_t'(f.data);
          check(!busy[o][v], $sformatf("head on busy VC %0d of output %0d", v, o));
          check(ref_route(h.dst) == o, $sformatf("packet %0d left on port %0d, expected %0d",
                h.seq, o, ref_route(h.dst)));
          busy[o][v]   = 1;
          cur_id[o][v] = h.seq;
          cur_k[o][v]  = 1;
          head_out_cycle[int'(h.seq)] = cyc;
          out_vc_of[int'(h.seq)] = v;
          if (is_tail(f.ftype)) begin
            busy[o][v] = 0;
            recv_pkts++;
          end
        end else begin
          check(busy[o][v], "body flit without head");
          check(f.data == {16'(cur_id[o][v]), 16'(cur_k[o][v])} ||
                (f.data[31:16] % 256 == cur_id[o][v] && f.data[15:0] == 16'(cur_k[o][v])),
                $sformatf("flit order on output %0d VC %0d", o, v));
          cur_k[o][v]++;
          if (is_tail(f.ftype)) begin
            busy[o][v] = 0;
            recv_pkts++;
          end
        end
      end
      if (!hold[o]) begin
        for (int v = 0; v < V; v++)
          if (owed[o][v] > 0 && !c.valid) begin
            c.valid = 1; c.vc = VC_W'(v); owed[o][v]--;
          end
      end
      credit_in[o] <= c;
    end
  end

  // ---------------- watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pkt_t mkpkt(int id, int x, int y, int z, int len);
    pkt_t pk;
    pk.dst = '{x: 4'(x), y: 4'(y), z: 4'(z)};
    pk.len = len;
    pk.id  = id;
    return pk;
  endfunction

  task automatic wait_drain(int target);
    int n = 0;
    while (recv_pkts < target && n < 5000) begin @(posedge clk); n++; end
    check(recv_pkts == target, $sformatf("drain: %0d of %0d packets", recv_pkts, target));
  endtask

  initial begin
    int id = 0;
    for (int p = 0; p < P; p++) begin
      in_link[p] = '0; credit_in[p] = '0; hold[p] = 0; flits_out[p] = 0;
      for (int v = 0; v < V; v++) begin cred[p][v] = D; fidx[p][v] = 0; owed[p][v] = 0; busy[p][v] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // (1) zero-load latency: west input, VC 2, to (3,1,1) -> east
    q[2][2].push_back(mkpkt(1, 3, 1, 1, 4));
    wait_drain(1);
    check(head_out_cycle[1] - head_in_cycle[1] == 3,
          $sformatf("zero-load head latency %0d, expected 3", head_out_cycle[1] - head_in_cycle[1]));
    check(flits_out[1] == 4, "4 flits on east");

    // (2) local and west both to east at once: VCs 0 and 1 downstream
    q[0][0].push_back(mkpkt(2, 2, 1, 0, 6));
    q[2][1].push_back(mkpkt(3, 3, 2, 3, 6));
    wait_drain(3);
    check(out_vc_of[2] != out_vc_of[3], "competing packets share a downstream VC");
    check((out_vc_of[2] + out_vc_of[3]) == 1, $sformatf("lowest free VCs expected (got %0d,%0d)",
          out_vc_of[2], out_vc_of[3]));
    check(head_out_cycle[2] != head_out_cycle[3], "two heads on one output in one cycle");

    // (3) backpressure: hold credits on north; 10-flit packet from south input? (y travel)
    hold[3] = 1;
    q[4][0].push_back(mkpkt(4, 1, 3, 1, 10));
    repeat (40) @(posedge clk);
    check(flits_out[3] == D, $sformatf("with credits held %0d flits passed, expected %0d", flits_out[3], D));
    hold[3] = 0;
    wait_drain(4);
    check(flits_out[3] == 10, "all flits after credit release");

    // (4) random traffic
    id = 10;
    for (int n = 0; n < 240; n++) begin
      coord_t d;
      int o, p, tries;
      d = '{x: 4'($urandom_range(3)), y: 4'($urandom_range(3)), z: 4'($urandom_range(3))};
      o = ref_route(d);
      tries = 0;
      do begin p = $urandom_range(P - 1); tries++; end while (!can_enter(p, o));
      q[p][$urandom_range(V - 1)].push_back(mkpkt(id, d.x, d.y, d.z, 1 + $urandom_range(7)));
      id++;
      if (id == 250) id = 10;
    end
    wait_drain(4 + 240);
    check(sent_pkts == 244, $sformatf("sent %0d packets", sent_pkts));
    // every credit came back: drivers hold full credit again
    repeat (5) @(posedge clk);
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++)
        check(cred[p][v] == D, $sformatf("credits of input %0d VC %0d = %0d", p, v, cred[p][v]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
