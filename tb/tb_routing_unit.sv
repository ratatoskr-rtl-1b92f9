// tb_routing_unit -- exhaustive XYZ routing check over a 4x4x4 mesh.
// For every current and destination position the output port must be the
// one that corrects x first, then y, then z (reference computed here from
// the coordinate differences).
module tb_routing_unit;
  import noc_pkg::*;

  coord_t cur;
  flit_t  head;
  port_e  out_port;

  routing_unit dut (.cur(cur), .head(head), .out_port(out_port));

  int checks = 0, failures = 0;

  initial begin
    for (int c = 0; c < 64; c++)
      for (int d = 0; d < 64; d++) begin
        head_t h;
        int exp_p;
        int dx, dy, dz;
        cur   = '{x: 4'(c % 4), y: 4'((c / 4) % 4), z: 4'(c / 16)};
        h.dst = '{x: 4'(d % 4), y: 4'((d / 4) % 4), z: 4'(d / 16)};
        h.src = '0;
        h.seq = 8'(d);
        head.ftype = FT_HEAD;
        head.data  = FLIT_W'(h);
        dx = (d % 4) - (c % 4);
        dy = ((d / 4) % 4) - ((c / 4) % 4);
        dz = (d / 16) - (c / 16);
        exp_p = (dx > 0) ? 1 : (dx < 0) ? 2 : (dy > 0) ? 3 : (dy < 0) ? 4 :
                (dz > 0) ? 5 : (dz < 0) ? 6 : 0;
        #1;
        checks++;
        if (int'(out_port) != exp_p) begin
          failures++;
          if (failures < 10) $display("FAIL: cur %0d dst %0d -> %0d, expected %0d", c, d, out_port, exp_p);
        end
      end
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
