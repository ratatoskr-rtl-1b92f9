// tb_noc_3d_full -- the NoC at its default size: 4x4x4 tiles, 4 VCs, 4-flit
// buffers, 32-flit packets, XYZ routing, offered load 0.07 flits/cycle/tile.
//
// Uniform random traffic is injected for INJECT = 100,000 cycles (the run
// length of the reference latency measurement for this configuration), then
// the network is drained. Checks: no tile reports a protocol error, every
// generated packet arrived with all its flits, no packet is left in a source
// queue, the number of packets matches the offered load (64 tiles x 100,000
// cycles x 0.07 / 32 = 14,000, within 5 %), and the mean packet latency is
// at least the zero-load value of a one-hop packet (3 cycles for the head
// plus 31 for the remaining flits). The mean latency is printed. The run
// takes about a minute of simulation time on a current workstation.
module tb_noc_3d_full;
  import noc_pkg::*;

  localparam int unsigned N      = 64;
  localparam int unsigned PL     = 32;
  localparam int unsigned INJECT = 100000;

  logic clk = 0, rst_n = 0, inject_en = 0;
  always #5 clk = ~clk;

  logic [N-1:0][31:0] pkts_sent, pkts_recv, flits_recv, lat_sum, lat_max, pending;
  logic [N-1:0][15:0] errors;

  noc_3d dut (
    .clk(clk), .rst_n(rst_n), .inject_en(inject_en),
    .pkts_sent(pkts_sent), .pkts_recv(pkts_recv), .flits_recv(flits_recv),
    .lat_sum(lat_sum), .lat_max(lat_max), .pending(pending), .errors(errors)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sent, recv, flits, lsum;
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    inject_en = 1;
    repeat (INJECT) @(posedge clk);
    inject_en = 0;
    n = 0;
    do begin
      repeat (100) @(posedge clk);
      n++;
      sent = 0; recv = 0;
      for (int i = 0; i < N; i++) begin sent += pkts_sent[i]; recv += pkts_recv[i]; end
    end while ((sent != recv || (|pending)) && n < 500);
    sent = 0; recv = 0; flits = 0; lsum = 0;
    for (int i = 0; i < N; i++) begin
      sent  += pkts_sent[i];
      recv  += pkts_recv[i];
      flits += flits_recv[i];
      lsum  += lat_sum[i];
      check(errors[i] == 0, $sformatf("tile %0d reports %0d errors", i, errors[i]));
      check(pending[i] == 0, $sformatf("tile %0d still has %0d packets queued", i, pending[i]));
    end
    $display("packets sent %0d received %0d, flits %0d, mean latency %0d cycles",
             sent, recv, flits, (recv > 0) ? lsum / recv : 0);
    check(sent > 0, "traffic was generated");
    check(sent > 13300 && sent < 14700, $sformatf("%0d packets for an expected 14000", sent));
    check(sent == recv, $sformatf("sent %0d != received %0d", sent, recv));
    check(flits == recv * PL, "flit count = packets x packet length");
    check(recv > 0 && lsum / recv >= 3 + PL - 1, "mean latency below the one-hop minimum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
