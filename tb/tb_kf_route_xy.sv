// tb_kf_route_xy -- exhaustive check of XY route computation over an 8x8 grid
// of source and destination coordinates against an independent rule: X first
// (East when the destination column is larger), then Y (South when the
// destination row is larger), Local when both match.
module tb_kf_route_xy;
  import kf_noc_pkg::*;
  logic [COORD_W-1:0] mx, my, dx, dy;
  port_e op;
  int checks = 0, failures = 0;

  kf_route_xy dut (.my_x(mx), .my_y(my), .dst_x(dx), .dst_y(dy), .out_port(op));

  initial begin
    for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++)
      for (int c = 0; c < 8; c++) for (int d = 0; d < 8; d++) begin
        port_e exp;
        mx = COORD_W'(a); my = COORD_W'(b); dx = COORD_W'(c); dy = COORD_W'(d);
        #1;
        if (c != a)      exp = (c > a) ? PORT_E : PORT_W;
        else if (d != b) exp = (d > b) ? PORT_S : PORT_N;
        else             exp = PORT_L;
        checks++;
        if (op != exp) begin
          failures++;
          if (failures < 10) $display("FAIL me=(%0d,%0d) dst=(%0d,%0d) got %s exp %s", a, b, c, d, op.name(), exp.name());
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
