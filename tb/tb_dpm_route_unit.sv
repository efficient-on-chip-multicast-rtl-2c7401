// tb_dpm_route_unit: for every source/destination pair of the 8x8 mesh,
// follows the route hop by hop through the unit and checks that each hop goes
// to a real neighbour, stays in one subnetwork (labels strictly rising or
// falling), reports the right VC class and arrives in the Manhattan distance.
module tb_dpm_route_unit;
  import dpm_pkg::*;
  import dpm_ref_pkg::*;

  node_id_t cur, dst;
  port_e    port;
  logic     high;
  int checks = 0, failures = 0;

  dpm_route_unit dut (.cur(cur), .dst(dst), .port(port), .high(high));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x, y, h, nx, ny;
    bit ok, up;
    for (int a = 0; a < NN; a++)
      for (int b = 0; b < NN; b++) begin
        int c;
        c = a;
        h = 0; ok = 1; up = (b > a);
        dst = node_id_t'(b);
        while (c != b && h <= 2 * N) begin
          cur = node_id_t'(c); #1;
          x = rx(c); y = ry(c);
          case (port)
            PORT_N: begin nx = x; ny = y + 1; end
            PORT_E: begin nx = x + 1; ny = y; end
            PORT_S: begin nx = x; ny = y - 1; end
            PORT_W: begin nx = x - 1; ny = y; end
            default: begin nx = -1; ny = -1; end
          endcase
          if (nx < 0 || ny < 0 || nx >= N || ny >= N) begin ok = 0; break; end
          if (high != up) ok = 0;
          if (up ? (rlab(nx, ny) <= c) : (rlab(nx, ny) >= c)) ok = 0;
          c = rlab(nx, ny);
          h++;
        end
        if (a == b) begin cur = node_id_t'(a); #1; ok = ok && (port == PORT_L); end
        checks++;
        if (!ok || c != b || h != rdist(a, b)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d->%0d hops %0d", a, b, h);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
