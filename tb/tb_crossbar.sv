// tb_crossbar -- every input/output pair of the XYZ-pruned crossbar.
// An allowed turn must deliver the selected input's flit and VC; a pruned
// turn (U-turn, y->x, z->x/y) must give an idle, all-zero output. A second,
// fully connected instance (RT_FULL) must deliver every pair.
module tb_crossbar;
  import noc_pkg::*;
  localparam int unsigned P = 7;

  flit_t             in_flit [P];
  logic [VC_W-1:0]   in_vc   [P];
  logic [PORT_W-1:0] sel     [P];
  logic [P-1:0]      sel_valid;
  link_t             out_xyz [P], out_full [P];

  crossbar #(.ROUTING(RT_XYZ))  dut  (.in_flit, .in_vc, .sel, .sel_valid, .out_link(out_xyz));
  crossbar #(.ROUTING(RT_FULL)) full (.in_flit, .in_vc, .sel, .sel_valid, .out_link(out_full));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // independent table of the turns XYZ routing can take: dimension order
  // local(0) < x(1) < y(2) < z(3); a flit may only stay in or move to a
  // later dimension, never reverse, and may always eject to local.
  function automatic bit legal(int i, int o);
    int di, dout;
    if (i == o) return 0;
    if (i == 0 || o == 0) return 1;
    di = (i + 1) / 2; dout = (o + 1) / 2;
    return dout >= di;
  endfunction

  int n_legal = 0;
  initial begin
    for (int i = 0; i < P; i++) begin
      in_flit[i] = flit_t'({2'(i), 32'hA000_0000 + 32'(i)});
      in_vc[i]   = VC_W'(i % 4);
    end
    for (int o = 0; o < P; o++) begin
      for (int i = 0; i < P; i++) begin
        for (int k = 0; k < P; k++) begin sel[k] = '0; end
        sel_valid = '0;
        sel[o] = PORT_W'(i);
        sel_valid[o] = 1'b1;
        #1;
        if (legal(i, o)) begin
          n_legal++;
          check(out_xyz[o].valid && out_xyz[o].flit == in_flit[i] && out_xyz[o].vc == in_vc[i],
                $sformatf("turn %0d->%0d must pass", i, o));
        end else begin
          check(out_xyz[o] == '0, $sformatf("turn %0d->%0d must be pruned", i, o));
        end
        check(out_full[o].valid && out_full[o].flit == in_flit[i], $sformatf("full %0d->%0d", i, o));
        for (int k = 0; k < P; k++)
          if (k != o) check(!out_xyz[k].valid, "unselected output idle");
      end
    end
    // XYZ keeps 6 (local) + 2*6 (x) + 2*4 (y) + 2*2 (z) = 30 of 49 legs
    check(n_legal == 30, $sformatf("%0d legal turns, expected 30", n_legal));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
