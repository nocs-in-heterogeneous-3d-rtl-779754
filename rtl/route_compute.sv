// route_compute: routing computation for the heterogeneous 3D NoC.
//
// Purely combinational. Given the address of the current router and the
// destination of a packet, it returns the output port the packet takes.
// Layers are ordered by speed: z = 0 is the slowest (top) layer and the
// faster layers lie below it, so "down" always leads to a faster layer.
//
//   ALGO = ALG_ZPXYZM, Z+(XY)Z- (routing function R1 of the paper):
//     destination in a lower (faster) layer  -> go down first,
//     otherwise route X, then Y, in the current layer, then go up.
//   ALGO = ALG_ZXYZ, ZXYZ (routing function R2 of the paper): as R1, but when
//     the destination is not below and its hop distance |dx|+|dy| exceeds the
//     layer's threshold phi, the packet first goes down, so that it crosses
//     the plane in the faster layer and climbs back at the end.
//   ALGO = ALG_XYZ, conventional dimension-order routing (X, then Y, then Z),
//     the baseline the paper measures R1 and R2 against; phi is ignored.
//
// phi is the paper's Phi(z, Lambda), a design-time constant per layer; PHI_INF
// (255) disables the detour, which is what the paper prescribes for the
// detour layer itself and every layer below it. Case order follows the
// paper's definitions: east/west before north/south (X before Y), up last.
// Interface: cur, dst (coord_t), phi (hop count), port (port_e). No clock.
module route_compute
  import noc_pkg::*;
#(
  parameter routing_e ALGO = ALG_ZXYZ
) (
  input  coord_t     cur,
  input  coord_t     dst,
  input  logic [7:0] phi,
  output port_e      port
);

  logic [COORD_W:0] dx, dy;
  logic [7:0]       hops;

  always_comb begin
    dx   = (cur.x > dst.x) ? {1'b0, cur.x - dst.x} : {1'b0, dst.x - cur.x};
    dy   = (cur.y > dst.y) ? {1'b0, cur.y - dst.y} : {1'b0, dst.y - cur.y};
    hops = 8'(dx) + 8'(dy);

    if (cur == dst)                             port = P_LOCAL;
    else if (ALGO == ALG_XYZ) begin
      if (cur.x < dst.x)                        port = P_EAST;
      else if (cur.x > dst.x)                   port = P_WEST;
      else if (cur.y > dst.y)                   port = P_NORTH;
      else if (cur.y < dst.y)                   port = P_SOUTH;
      else if (cur.z < dst.z)                   port = P_DOWN;
      else                                      port = P_UP;
    end
    else if (cur.z < dst.z)                     port = P_DOWN;   // Z+ : faster layer below
    else if (ALGO == ALG_ZXYZ && hops > phi)    port = P_DOWN;   // detour through faster layer
    else if (cur.x < dst.x)                     port = P_EAST;
    else if (cur.x > dst.x)                     port = P_WEST;
    else if (cur.y > dst.y)                     port = P_NORTH;
    else if (cur.y < dst.y)                     port = P_SOUTH;
    else                                        port = P_UP;     // Z- : same column and row
  end

endmodule
