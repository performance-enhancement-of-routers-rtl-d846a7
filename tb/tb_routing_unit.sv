// tb_routing_unit: exhaustive test of XY routing. Every pair of router and
// destination coordinates in a 16 x 16 mesh is tried; the expected port is
// worked out here from the coordinate differences (X first, then Y, East is
// +X, North is +Y, else Local). The TYPE bits and the rest of the header are
// random, since only the destination field may matter.
module tb_routing_unit;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic [3:0] cx, cy;
  logic [FLIT_WIDTH-1:0] hdr;
  port_e op;

  routing_unit dut (.cur_x(cx), .cur_y(cy), .header(hdr), .out_port(op));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 16; x++) for (int y = 0; y < 16; y++)
      for (int dx = 0; dx < 16; dx++) for (int dy = 0; dy < 16; dy++) begin
        int exp_p;
        cx = 4'(x); cy = 4'(y);
        for (int w = 0; w < FLIT_WIDTH / 32; w++) hdr[w*32 +: 32] = $urandom;
        hdr[5:2] = 4'(dx); hdr[9:6] = 4'(dy);
        exp_p = (dx > x) ? 2 : (dx < x) ? 4 : (dy > y) ? 1 : (dy < y) ? 3 : 0;
        #1;
        checks++;
        if (int'(op) != exp_p) begin
          failures++;
          if (failures < 10) $display("FAIL: cur (%0d,%0d) dst (%0d,%0d) port %0d expected %0d", x, y, dx, dy, op, exp_p);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
