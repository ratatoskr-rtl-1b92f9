// tb_noc_3d -- end-to-end testbench of the 3D mesh NoC at reduced size.
//
// A 2x2x2 mesh with 4 VCs, 4-flit buffers and 8-flit packets runs uniform
// random traffic at a high offered load (0.20 flits/cycle per tile, well past
// saturation) for INJECT cycles, then injection stops and the network must
// drain. Checks: no tile reports a protocol error (wrong destination, broken
// packet, wrong length), every generated packet is delivered, the worst
// latency is at least the zero-load latency of one hop.
//
// The testbench also counts how often each router mechanism happened,
// looking into every router: VC allocation lost to another input, switch
// allocation lost, a flit held back for lack of credits, several downstream
// VCs of one output owned at once, flits on the vertical (up/down) links, and
// packets waiting in a source queue. Each must happen at least once.
module tb_noc_3d;
  import noc_pkg::*;

  localparam int unsigned DX = 2, DY = 2, DZ = 2, NV = 4, DP = 4, PL = 8;
  localparam int unsigned N = DX * DY * DZ;
  localparam int unsigned INJECT = 3000;

  logic clk = 0, rst_n = 0, inject_en = 0;
  always #5 clk = ~clk;

  logic [N-1:0][31:0] pkts_sent, pkts_recv, flits_recv, lat_sum, lat_max, pending;
  logic [N-1:0][15:0] errors;

  noc_3d #(.DIM_X(DX), .DIM_Y(DY), .DIM_Z(DZ), .NUM_VC(NV), .DEPTH(DP),
           .PKT_LEN(PL), .INJ_RATE_PERMILLE(200)) dut (
    .clk(clk), .rst_n(rst_n), .inject_en(inject_en),
    .pkts_sent(pkts_sent), .pkts_recv(pkts_recv), .flits_recv(flits_recv),
    .lat_sum(lat_sum), .lat_max(lat_max), .pending(pending), .errors(errors)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------ mechanism counters
  longint va_lost = 0, sa_lost = 0, credit_stall = 0, multi_vc = 0, vertical = 0, queued = 0;

  for (genvar z = 0; z < DZ; z++) begin : m_z
    for (genvar y = 0; y < DY; y++) begin : m_y
      for (genvar x = 0; x < DX; x++) begin : m_x
        always @(posedge clk) if (rst_n) begin
          for (int p = 0; p < 7; p++) begin
            if (|dut.g_z[z].g_y[y].g_x[x].u_router.u_ctrl.va_req[p] &&
                !dut.g_z[z].g_y[y].g_x[x].u_router.u_ctrl.va_gnt[p]) va_lost++;
            if (|dut.g_z[z].g_y[y].g_x[x].u_router.u_ctrl.sa_req[p] &&
                !dut.g_z[z].g_y[y].g_x[x].u_router.u_ctrl.pop[p]) sa_lost++;
            if (|(dut.g_z[z].g_y[y].g_x[x].u_router.u_ctrl.nonempty[p] &
                  dut.g_z[z].g_y[y].g_x[x].u_router.u_ctrl.active[p] &
                 ~dut.g_z[z].g_y[y].g_x[x].u_router.u_ctrl.sa_req[p])) credit_stall++;
            if ($countones(~dut.g_z[z].g_y[y].g_x[x].u_router.u_ctrl.vc_free[p]) >= 2) multi_vc++;
          end
          if (dut.g_z[z].g_y[y].g_x[x].u_router.out_link[P_UP].valid ||
              dut.g_z[z].g_y[y].g_x[x].u_router.out_link[P_DOWN].valid) vertical++;
        end
      end
    end
  end
  always @(posedge clk) if (rst_n) for (int i = 0; i < N; i++) if (pending[i] > 1) queued++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sent, recv, flits, lsum;
    int unsigned lmax;
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    inject_en = 1;
    repeat (INJECT) @(posedge clk);
    inject_en = 0;
    // drain: all queued packets must be sent and delivered
    n = 0;
    do begin
      repeat (100) @(posedge clk);
      n++;
      sent = 0; recv = 0;
      for (int i = 0; i < N; i++) begin sent += pkts_sent[i]; recv += pkts_recv[i]; end
    end while ((sent != recv || (|pending)) && n < 1000);
    sent = 0; recv = 0; flits = 0; lsum = 0; lmax = 0;
    for (int i = 0; i < N; i++) begin
      sent  += pkts_sent[i];
      recv  += pkts_recv[i];
      flits += flits_recv[i];
      lsum  += lat_sum[i];
      if (lat_max[i] > lmax) lmax = lat_max[i];
      check(errors[i] == 0, $sformatf("tile %0d reports %0d errors", i, errors[i]));
      check(pending[i] == 0, $sformatf("tile %0d still has %0d packets queued", i, pending[i]));
    end
    $display("packets sent %0d received %0d, flits %0d, mean latency %0d, max %0d",
             sent, recv, flits, (recv > 0) ? lsum / recv : 0, lmax);
    check(sent > 0, "traffic was generated");
    check(sent == recv, $sformatf("sent %0d != received %0d", sent, recv));
    check(flits == recv * PL, "flit count = packets x packet length");
    check(lmax >= 3 + PL - 1, $sformatf("max latency %0d below one hop", lmax));
    $display("mechanisms: va_lost=%0d sa_lost=%0d credit_stall=%0d multi_vc=%0d vertical=%0d queued=%0d",
             va_lost, sa_lost, credit_stall, multi_vc, vertical, queued);
    check(va_lost > 0,      "VC allocation contention never happened");
    check(sa_lost > 0,      "switch allocation contention never happened");
    check(credit_stall > 0, "credit stall never happened");
    check(multi_vc > 0,     "several downstream VCs never owned at once");
    check(vertical > 0,     "no flit used a vertical link");
    check(queued > 0,       "source queue never held packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
