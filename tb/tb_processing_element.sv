// tb_processing_element -- one traffic-generating tile against a model router.
// The test stands in for the router: it takes the tile's flits, returns their
// credits after a random delay and checks each packet (head, PKT_LEN-2
// bodies, tail on one VC; source = own tile; destination inside the mesh and
// never the tile itself; VC = sequence number mod NUM_VC; body/tail payload =
// cycle the head left). It also checks the credit limit, the injection rate
// against the configured probability, that every destination is drawn, and
// that the queue drains. On the receive side it sends packets with known
// latency and one misaddressed packet, and checks the counters, the latency
// sum/max, the error count and the credit echo.
module tb_processing_element;
  import noc_pkg::*;
  localparam int unsigned DX = 4, DY = 4, DZ = 4, V = 4, D = 4, PL = 4;
  localparam int unsigned RATE = 400;   // per mille flits per cycle
  localparam int unsigned RUN  = 8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t  me = '{x: 4'd1, y: 4'd2, z: 4'd3};
  logic    inject_en = 0;
  link_t   tx_link, rx_link = '0;
  credit_t tx_credit = '0, rx_credit;
  logic [31:0] pkts_sent, pkts_recv, flits_recv, lat_sum, lat_max, pending;
  logic [15:0] errors;

  processing_element #(.DIM_X(DX), .DIM_Y(DY), .DIM_Z(DZ), .NUM_VC(V), .DEPTH(D),
                       .PKT_LEN(PL), .INJ_RATE_PERMILLE(RATE), .SEED(32'hC0FFEE))
    dut (.clk, .rst_n, .my_coord(me), .inject_en, .tx_link, .tx_credit, .rx_link,
         .rx_credit, .pkts_sent, .pkts_recv, .flits_recv, .lat_sum, .lat_max,
         .pending, .errors);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int unsigned cyc = 0;          // mirrors the tile's cycle counter
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  // ------------------------------------------------------------ tx checker
  int out_cr [V];                // flits held by the model router per VC
  int pos = 0, cur_vc = -1, n_pkts = 0;
  int unsigned head_cyc;
  bit seen [64];
  int ret_q [$];                 // VCs of flits whose credit is still owed

  always @(posedge clk) if (rst_n) begin
    tx_credit <= '0;
    if (ret_q.size() > 0 && $urandom_range(3) != 0) begin
      int v;
      v = ret_q.pop_front();
      tx_credit <= '{valid: 1'b1, vc: VC_W'(v)};
      out_cr[v]--;
    end
    if (tx_link.valid) begin
      int v;
      v = int'(tx_link.vc);
      out_cr[v]++;
      check(out_cr[v] <= D, "tile sent without credit");
      ret_q.push_back(v);
      if (pos == 0) begin
        head_t h;
        h = head_t'(tx_link.flit.data);
        check(tx_link.flit.ftype == FT_HEAD, "packet starts with a head");
        check(h.src == me, "source field");
        check(h.dst != me, "never sends to itself");
        check(h.dst.x < DX && h.dst.y < DY && h.dst.z < DZ, "destination inside the mesh");
        check(v == int'(h.seq) % V, "VC = sequence mod NUM_VC");
        check(int'(h.seq) == n_pkts % 256, "sequence number");
        seen[h.dst.z * 16 + h.dst.y * 4 + h.dst.x] = 1;
        cur_vc = v;
        head_cyc = cyc;
      end else begin
        check(v == cur_vc, "packet stays on one VC");
        check(tx_link.flit.ftype == ((pos == PL - 1) ? FT_TAIL : FT_BODY), "flit type order");
        check(tx_link.flit.data == head_cyc, "payload carries the head cycle");
      end
      pos++;
      if (pos == PL) begin pos = 0; n_pkts++; end
    end
  end

  // ------------------------------------------------------------ main
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned exp_lat_sum, exp_lat_max, gen_total;
    real expect_gen;
    int missing;
    for (int v = 0; v < V; v++) out_cr[v] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    inject_en = 1;
    repeat (RUN) @(negedge clk);
    inject_en = 0;
    gen_total  = pkts_sent + pending + (dut.sending ? 1 : 0);
    expect_gen = real'(RUN) * real'(dut.THRESH) / 65536.0;
    $display("generated %0d packets, expected %0.1f", gen_total, expect_gen);
    check(real'(gen_total) > 0.85 * expect_gen && real'(gen_total) < 1.15 * expect_gen,
          "injection rate");
    repeat (4000) @(negedge clk);
    check(pending == 0 && !dut.sending, "source queue drained");
    check(pkts_sent == n_pkts, $sformatf("pkts_sent %0d vs %0d seen", pkts_sent, n_pkts));
    missing = 0;
    for (int i = 0; i < 64; i++) if (!seen[i] && i != 3 * 16 + 2 * 4 + 1) missing++;
    check(missing == 0, $sformatf("%0d destinations never drawn", missing));
    check(ret_q.size() == 0, "all credits returned");

    // ---------------------------------------------------- receive side
    exp_lat_sum = 0; exp_lat_max = 0;
    for (int k = 0; k < 40; k++) begin
      int unsigned lat;
      int v;
      head_t h;
      lat = $urandom_range(5, 60);
      v = k % V;
      h.dst = me; h.src = '{x: 4'd0, y: 4'd0, z: 4'd0}; h.seq = 8'(k);
      for (int f = 0; f < PL; f++) begin
        @(negedge clk);
        rx_link.valid = 1;
        rx_link.vc = VC_W'(v);
        rx_link.flit.ftype = (f == 0) ? FT_HEAD : (f == PL - 1) ? FT_TAIL : FT_BODY;
        rx_link.flit.data  = (f == 0) ? FLIT_W'(h) : FLIT_W'(cyc - lat);
        @(posedge clk); #1;
        check(rx_credit.valid && int'(rx_credit.vc) == v, "credit echo");
      end
      exp_lat_sum += lat;
      if (lat > exp_lat_max) exp_lat_max = lat;
      @(negedge clk);
      rx_link = '0;
    end
    @(negedge clk);
    check(pkts_recv == 40, $sformatf("pkts_recv %0d", pkts_recv));
    check(flits_recv == 40 * PL, "flits_recv");
    check(lat_sum == exp_lat_sum, $sformatf("lat_sum %0d vs %0d", lat_sum, exp_lat_sum));
    check(lat_max == exp_lat_max, $sformatf("lat_max %0d vs %0d", lat_max, exp_lat_max));
    check(errors == 0, "no errors on good packets");
    // misaddressed single-flit-type packet: head for another tile
    begin
      head_t h;
      h.dst = '{x: 4'd0, y: 4'd0, z: 4'd0}; h.src = me; h.seq = 0;
      for (int f = 0; f < PL; f++) begin
        @(negedge clk);
        rx_link.valid = 1;
        rx_link.vc = '0;
        rx_link.flit.ftype = (f == 0) ? FT_HEAD : (f == PL - 1) ? FT_TAIL : FT_BODY;
        rx_link.flit.data  = (f == 0) ? FLIT_W'(h) : FLIT_W'(cyc);
      end
      @(negedge clk);
      rx_link = '0;
      @(negedge clk);
      check(errors == 1, $sformatf("misaddressed packet flagged (%0d)", errors));
    end
    $display("tile: %0d packets sent", n_pkts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
