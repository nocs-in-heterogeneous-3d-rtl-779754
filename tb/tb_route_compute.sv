// tb_route_compute: exhaustive check of the routing computation.
//
// For every pair of routers of a 4 x 3 x 3 NoC it compares the port chosen by
// route_compute with a reference written case by case from the routing
// functions R1 (Z+(XY)Z-) and R2 (ZXYZ), with the detour threshold 4 in layer
// 0 and none below, and from the XYZ baseline. It then walks every packet through the network hop by hop
// with the block itself and checks that it arrives, on a path of the expected
// length, and that ZXYZ detours pass through layer 1.
module tb_route_compute;
  import noc_pkg::*;

  localparam int X = 4, Y = 3, Z = 3;
  localparam logic [7:0] PHI0 = 8'd4;

  int checks = 0, failures = 0;
  int detours = 0;

  coord_t cur1, dst1, cur2, dst2;
  logic [7:0] phi1, phi2;
  port_e p1, p2;

  route_compute #(.ALGO(ALG_ZPXYZM)) u_r1 (.cur(cur1), .dst(dst1), .phi(phi1), .port(p1));
  route_compute #(.ALGO(ALG_ZXYZ))   u_r2 (.cur(cur2), .dst(dst2), .phi(phi2), .port(p2));

  coord_t cur0, dst0;
  port_e  p0;
  route_compute #(.ALGO(ALG_XYZ))    u_r0 (.cur(cur0), .dst(dst0), .phi(PHI0), .port(p0));

  function automatic logic [7:0] phi_of(int z);
    return (z == 0) ? PHI0 : PHI_INF;
  endfunction

  function automatic port_e ref_r1(coord_t v, coord_t d);
    if (v == d)                                  return P_LOCAL;
    if (v.x == d.x && v.y > d.y && v.z >= d.z)   return P_NORTH;
    if (v.x <  d.x && v.z >= d.z)                return P_EAST;
    if (v.x == d.x && v.y < d.y && v.z >= d.z)   return P_SOUTH;
    if (v.x >  d.x && v.z >= d.z)                return P_WEST;
    if (v.x == d.x && v.y == d.y && v.z > d.z)   return P_UP;
    return P_DOWN;
  endfunction

  function automatic port_e ref_xyz(coord_t v, coord_t d);
    if (v == d)    return P_LOCAL;
    if (v.x < d.x) return P_EAST;
    if (v.x > d.x) return P_WEST;
    if (v.y > d.y) return P_NORTH;
    if (v.y < d.y) return P_SOUTH;
    if (v.z < d.z) return P_DOWN;
    return P_UP;
  endfunction

  function automatic port_e ref_r2(coord_t v, coord_t d);
    int h;
    h = ((v.x > d.x) ? v.x - d.x : d.x - v.x) + ((v.y > d.y) ? v.y - d.y : d.y - v.y);
    if (v != d && v.z >= d.z && h > int'(phi_of(int'(v.z)))) return P_DOWN;
    return ref_r1(v, d);
  endfunction

  function automatic coord_t step(coord_t v, port_e p);
    coord_t w = v;
    case (p)
      P_NORTH: w.y = v.y - 1;
      P_SOUTH: w.y = v.y + 1;
      P_EAST:  w.x = v.x + 1;
      P_WEST:  w.x = v.x - 1;
      P_UP:    w.z = v.z - 1;
      P_DOWN:  w.z = v.z + 1;
      default: ;
    endcase
    return w;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    coord_t s, d, v;
    // 1. point-wise comparison with the reference
    for (int sz = 0; sz < Z; sz++) for (int sy = 0; sy < Y; sy++) for (int sx = 0; sx < X; sx++)
    for (int dz = 0; dz < Z; dz++) for (int dy = 0; dy < Y; dy++) for (int dx = 0; dx < X; dx++) begin
      s = '{x: 4'(sx), y: 4'(sy), z: 4'(sz)};
      d = '{x: 4'(dx), y: 4'(dy), z: 4'(dz)};
      cur1 = s; dst1 = d; phi1 = phi_of(sz);
      cur2 = s; dst2 = d; phi2 = phi_of(sz);
      cur0 = s; dst0 = d;
      #1;
      check(p0 == ref_xyz(s, d), $sformatf("XYZ %p -> %p gave %s", s, d, p0.name()));
      check(p1 == ref_r1(s, d), $sformatf("R1 %p -> %p gave %s", s, d, p1.name()));
      check(p2 == ref_r2(s, d), $sformatf("R2 %p -> %p gave %s", s, d, p2.name()));
    end
    // 2. walk every packet with the block itself
    for (int alg = 0; alg < 3; alg++)
    for (int sz = 0; sz < Z; sz++) for (int sy = 0; sy < Y; sy++) for (int sx = 0; sx < X; sx++)
    for (int dz = 0; dz < Z; dz++) for (int dy = 0; dy < Y; dy++) for (int dx = 0; dx < X; dx++) begin
      int hops, min_h;
      bit via1, done;
      s = '{x: 4'(sx), y: 4'(sy), z: 4'(sz)};
      d = '{x: 4'(dx), y: 4'(dy), z: 4'(dz)};
      v = s; hops = 0; via1 = 0; done = 0;
      min_h = ((sx > dx) ? sx - dx : dx - sx) + ((sy > dy) ? sy - dy : dy - sy);
      while (!done && hops < 40) begin
        port_e p;
        if (alg == 0) begin cur1 = v; dst1 = d; phi1 = phi_of(int'(v.z)); #1; p = p1; end
        else if (alg == 1) begin cur2 = v; dst2 = d; phi2 = phi_of(int'(v.z)); #1; p = p2; end
        else          begin cur0 = v; dst0 = d; #1; p = p0; end
        if (p == P_LOCAL) done = 1;
        else begin
          v = step(v, p);
          hops++;
          if (v.z == 1) via1 = 1;
          if (v.x >= X || v.y >= Y || v.z >= Z) hops = 99;  // left the mesh
        end
      end
      check(done && v == d, $sformatf("alg %0d walk %p -> %p did not arrive", alg, s, d));
      if (alg == 1 && sz == 0 && dz == 0 && min_h > int'(PHI0)) begin
        // detour: down to layer 1, across, back up
        check(via1 && hops == min_h + 2, $sformatf("detour %p -> %p hops %0d", s, d, hops));
        detours++;
      end else begin
        // otherwise minimal: |dx|+|dy|+|dz|
        check(hops == min_h + ((sz > dz) ? sz - dz : dz - sz),
              $sformatf("alg %0d %p -> %p hops %0d", alg, s, d, hops));
      end
    end
    check(detours > 0, "no ZXYZ detour exercised");
    $display("detours=%0d", detours);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
