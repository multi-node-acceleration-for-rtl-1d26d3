// tb_dyxy_route -- checks DyXY routing (Algorithm 1) on a 4 x 4 torus against a model:
// local delivery, straight routing when one coordinate matches, and the choice of the
// less stressed of the two productive neighbours otherwise (ties go to the X direction).
// Directed cases plus random destinations and stress values; combinational, 1 ns steps.
module tb_dyxy_route;
  import multigcn_pkg::*;
  int checks = 0, failures = 0;
  logic [COORD_W-1:0] dx, dy, cx, cy;
  logic [7:0] st [NPORTS];
  port_e port;
  logic adapt;
  dyxy_route dut (.dst_x_i(dx), .dst_y_i(dy), .cur_x_i(cx), .cur_y_i(cy), .stress_i(st),
                  .port_o(port), .adaptive_o(adapt));

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    #100000;
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPORTS; p++) st[p] = '0;
    cx = 1; cy = 1;
    dx = 1; dy = 1; #1 chk(port == P_LOCAL && !adapt, "local");
    dx = 2; dy = 1; #1 chk(port == P_EAST && !adapt, "east");
    dx = 0; dy = 1; #1 chk(port == P_WEST, "west");
    dx = 1; dy = 0; #1 chk(port == P_NORTH, "north = smaller y");
    dx = 1; dy = 2; #1 chk(port == P_SOUTH, "south");
    dx = 3; dy = 1; #1 chk(port == P_EAST, "half ring goes east");
    dx = 2; dy = 0; st[P_EAST] = 10; st[P_NORTH] = 5; #1 chk(port == P_NORTH && adapt, "less stress N");
    st[P_EAST] = 3; #1 chk(port == P_EAST && adapt, "less stress E");
    st[P_EAST] = 5; #1 chk(port == P_EAST, "tie goes X");
    for (int it = 0; it < 5000; it++) begin
      int rx, ry;
      port_e px, py, want;
      dx = COORD_W'($urandom); dy = COORD_W'($urandom); cx = COORD_W'($urandom); cy = COORD_W'($urandom);
      for (int p = 0; p < NPORTS; p++) st[p] = 8'($urandom);
      #1;
      rx = (int'(dx) - int'(cx) + 4) % 4; if (rx > 2) rx -= 4;
      ry = (int'(dy) - int'(cy) + 4) % 4; if (ry > 2) ry -= 4;
      ry = -ry;                                   // positive = north; half ring = south
      px = rx > 0 ? P_EAST : P_WEST;
      py = ry > 0 ? P_NORTH : P_SOUTH;
      if (rx == 0 && ry == 0) want = P_LOCAL;
      else if (rx == 0) want = py;
      else if (ry == 0) want = px;
      else want = (st[py] < st[px]) ? py : px;
      chk(port == want, $sformatf("route (%0d,%0d)->(%0d,%0d) got %0d want %0d", cx, cy, dx, dy, port, want));
      chk(adapt == (rx != 0 && ry != 0), "adaptive flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
