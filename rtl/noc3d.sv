// noc3d: heterogeneous 3D mesh NoC with a slow mixed-signal layer on top.
//
// Z layers of X-by-Y meshes. Layer z = 0 is the mixed-signal layer whose
// routers run CF times slower than the digital layers below it; it uses the
// high vertical-throughput router (router with HVT = 1). Layers z >= 1 are
// digital and use the conventional router. Every router except those of the
// bottom layer has a bidirectional vertical link to the router with the same
// row and column in the next lower layer. Between layer 0 and layer 1 these
// links are the high-throughput vertical links (vlink_up / vlink_down, one
// pair per column position); between digital layers they are plain links.
//
// Routing is Z+(XY)Z-, ZXYZ or the XYZ baseline (ALGO); ZXYZ detours long
// packets of the slow layer through layer 1 when their hop distance exceeds
// PHI_SLOW.
// The default size, 4 x 3 x 3 routers with 32-bit flits, 8-flit input buffers
// and a clock ratio of 2, is the paper's evaluated NoC (three layers of twelve
// routers, digital at 1 GHz, mixed-signal at 0.5 GHz). PHI_SLOW = 4 follows
// from the paper's threshold formula for equal router pitch in both layers,
// a three-cycle router and a clock ratio of 2: phi = 11/3 pitches, so 4 hops.
//
// Clocking: one clock; the slow layer runs on the enable slow_tick (high one
// fast cycle in CF), see ratio_tick. Processing elements attach to the local
// ports, node n = (z*Y + y)*X + x. In layer 0 a local port is CF flits wide
// in both directions (the processing element hands over and takes whole
// groups), elsewhere only lane 0 is used. Injection: the element may write
// flits while it holds credits (DEPTH initially, returned on inj_cred).
// Ejection: the NoC holds PE_DEPTH credits per element, returned on ej_cred.
// For layer-0 nodes both sides act, and are sampled, only when slow_tick = 1.
module noc3d
  import noc_pkg::*;
#(
  parameter int unsigned X        = 4,
  parameter int unsigned Y        = 3,
  parameter int unsigned Z        = 3,
  parameter int unsigned CF       = 2,
  parameter int unsigned DEPTH    = 8,
  parameter int unsigned PE_DEPTH = 8,
  parameter int unsigned GROUPS   = 3,
  parameter routing_e    ALGO     = ALG_ZXYZ,
  parameter logic [7:0]  PHI_SLOW = 8'd4,
  localparam int unsigned NN      = X * Y * Z
) (
  input  logic                       clk,
  input  logic                       rst_n,
  output logic                       slow_tick,
  input  logic  [NN-1:0][CF-1:0]     inj_vld,
  input  flit_t [NN-1:0][CF-1:0]     inj_flit,
  output cred_t [NN-1:0]             inj_cred,
  output logic  [NN-1:0][CF-1:0]     ej_vld,
  output flit_t [NN-1:0][CF-1:0]     ej_flit,
  input  cred_t [NN-1:0]             ej_cred
);

  localparam int unsigned NXY = X * Y;

  function automatic int unsigned idx(int unsigned x, int unsigned y, int unsigned z);
    return (z * Y + y) * X + x;
  endfunction

  // credits an output starts with = size of the buffer behind the link (0 = no link)
  function automatic logic [NPORTS-1:0][CRED_W-1:0] out_cred_of(int unsigned x, int unsigned y,
                                                               int unsigned z);
    logic [NPORTS-1:0][CRED_W-1:0] c;
    c = '0;
    c[P_LOCAL] = CRED_W'(PE_DEPTH);
    c[P_NORTH] = (y > 0)     ? CRED_W'(DEPTH) : '0;
    c[P_SOUTH] = (y < Y - 1) ? CRED_W'(DEPTH) : '0;
    c[P_WEST]  = (x > 0)     ? CRED_W'(DEPTH) : '0;
    c[P_EAST]  = (x < X - 1) ? CRED_W'(DEPTH) : '0;
    c[P_UP]    = (z == 1) ? CRED_W'(GROUPS * CF) : (z > 1) ? CRED_W'(DEPTH) : '0;
    c[P_DOWN]  = (z == 0 && Z > 1) ? CRED_W'(GROUPS * CF) : (z < Z - 1) ? CRED_W'(DEPTH) : '0;
    return c;
  endfunction

  logic  [NN-1:0][NPORTS-1:0][CF-1:0] r_in_vld, r_out_vld;
  flit_t [NN-1:0][NPORTS-1:0][CF-1:0] r_in_flit, r_out_flit;
  cred_t [NN-1:0][NPORTS-1:0]         r_in_cred, r_out_cred;

  // high-throughput vertical links between layer 0 and layer 1
  logic  [NXY-1:0][CF-1:0] up_s_vld;
  flit_t [NXY-1:0][CF-1:0] up_s_flit;
  cred_t [NXY-1:0]         up_f_cred, dn_s_cred;
  logic  [NXY-1:0]         dn_f_vld;
  flit_t [NXY-1:0]         dn_f_flit;

  ratio_tick #(.CF(CF)) u_tick (.clk(clk), .rst_n(rst_n), .tick(slow_tick));

  // ------------------------------------------------------------ routers
  for (genvar z = 0; z < Z; z++) begin : g_z
    for (genvar y = 0; y < Y; y++) begin : g_y
      for (genvar x = 0; x < X; x++) begin : g_x
        localparam int unsigned N = (z * Y + y) * X + x;
        router #(
          .CF       (CF),
          .DEPTH    (DEPTH),
          .HVT      (z == 0),
          .CX       (COORD_W'(x)),
          .CY       (COORD_W'(y)),
          .CZ       (COORD_W'(z)),
          .ALGO     (ALGO),
          .PHI      ((z == 0 && Z > 1) ? PHI_SLOW : PHI_INF),
          .OUT_CRED (out_cred_of(x, y, z))
        ) u_router (
          .clk      (clk),
          .rst_n    (rst_n),
          .en       ((z == 0) ? slow_tick : 1'b1),
          .in_vld   (r_in_vld[N]),
          .in_flit  (r_in_flit[N]),
          .in_cred  (r_in_cred[N]),
          .out_vld  (r_out_vld[N]),
          .out_flit (r_out_flit[N]),
          .out_cred (r_out_cred[N])
        );
      end
    end
  end

  // ------------------------------------------------------------ vertical links 0 <-> 1
  if (Z > 1) begin : g_vl
    for (genvar k = 0; k < NXY; k++) begin : g_k
      localparam int unsigned F = NXY + k;   // router below, layer 1
      vlink_up #(.CF(CF), .SLOW_DEPTH(DEPTH), .GROUPS(GROUPS)) u_up (
        .clk     (clk),
        .rst_n   (rst_n),
        .en_slow (slow_tick),
        .f_vld   (r_out_vld[F][P_UP][0]),
        .f_flit  (r_out_flit[F][P_UP][0]),
        .f_cred  (up_f_cred[k]),
        .s_vld   (up_s_vld[k]),
        .s_flit  (up_s_flit[k]),
        .s_cred  (r_in_cred[k][P_DOWN])
      );
      vlink_down #(.CF(CF), .FAST_DEPTH(DEPTH), .GROUPS(GROUPS)) u_down (
        .clk     (clk),
        .rst_n   (rst_n),
        .en_slow (slow_tick),
        .s_vld   (r_out_vld[k][P_DOWN]),
        .s_flit  (r_out_flit[k][P_DOWN]),
        .s_cred  (dn_s_cred[k]),
        .f_vld   (dn_f_vld[k]),
        .f_flit  (dn_f_flit[k]),
        .f_cred  (r_in_cred[F][P_UP])
      );
    end
  end else begin : g_novl
    assign up_s_vld  = '0;
    assign up_s_flit = '0;
    assign up_f_cred = '0;
    assign dn_s_cred = '0;
    assign dn_f_vld  = '0;
    assign dn_f_flit = '0;
  end

  // ------------------------------------------------------------ wiring
  always_comb begin
    r_in_vld   = '0;
    r_in_flit  = '0;
    r_out_cred = '0;
    ej_vld     = '0;
    ej_flit    = '0;
    inj_cred   = '0;
    for (int unsigned z = 0; z < Z; z++) begin
      for (int unsigned y = 0; y < Y; y++) begin
        for (int unsigned x = 0; x < X; x++) begin
          int unsigned n;
          n = idx(x, y, z);
          // local port
          r_in_vld[n][P_LOCAL]   = inj_vld[n];
          r_in_flit[n][P_LOCAL]  = inj_flit[n];
          inj_cred[n]            = r_in_cred[n][P_LOCAL];
          ej_vld[n]              = r_out_vld[n][P_LOCAL];
          ej_flit[n]             = r_out_flit[n][P_LOCAL];
          r_out_cred[n][P_LOCAL] = ej_cred[n];
          // horizontal neighbours
          if (x + 1 < X) begin
            r_in_vld[n][P_EAST]   = r_out_vld[idx(x + 1, y, z)][P_WEST];
            r_in_flit[n][P_EAST]  = r_out_flit[idx(x + 1, y, z)][P_WEST];
            r_out_cred[n][P_EAST] = r_in_cred[idx(x + 1, y, z)][P_WEST];
          end
          if (x > 0) begin
            r_in_vld[n][P_WEST]   = r_out_vld[idx(x - 1, y, z)][P_EAST];
            r_in_flit[n][P_WEST]  = r_out_flit[idx(x - 1, y, z)][P_EAST];
            r_out_cred[n][P_WEST] = r_in_cred[idx(x - 1, y, z)][P_EAST];
          end
          if (y + 1 < Y) begin
            r_in_vld[n][P_SOUTH]   = r_out_vld[idx(x, y + 1, z)][P_NORTH];
            r_in_flit[n][P_SOUTH]  = r_out_flit[idx(x, y + 1, z)][P_NORTH];
            r_out_cred[n][P_SOUTH] = r_in_cred[idx(x, y + 1, z)][P_NORTH];
          end
          if (y > 0) begin
            r_in_vld[n][P_NORTH]   = r_out_vld[idx(x, y - 1, z)][P_SOUTH];
            r_in_flit[n][P_NORTH]  = r_out_flit[idx(x, y - 1, z)][P_SOUTH];
            r_out_cred[n][P_NORTH] = r_in_cred[idx(x, y - 1, z)][P_SOUTH];
          end
          // vertical neighbours
          if (z == 0 && Z > 1) begin
            r_in_vld[n][P_DOWN]   = up_s_vld[y * X + x];
            r_in_flit[n][P_DOWN]  = up_s_flit[y * X + x];
            r_out_cred[n][P_DOWN] = dn_s_cred[y * X + x];
          end
          if (z == 1) begin
            r_in_vld[n][P_UP][0]  = dn_f_vld[y * X + x];
            r_in_flit[n][P_UP][0] = dn_f_flit[y * X + x];
            r_out_cred[n][P_UP]   = up_f_cred[y * X + x];
          end
          if (z >= 1 && z + 1 < Z) begin
            r_in_vld[n][P_DOWN]   = r_out_vld[idx(x, y, z + 1)][P_UP];
            r_in_flit[n][P_DOWN]  = r_out_flit[idx(x, y, z + 1)][P_UP];
            r_out_cred[n][P_DOWN] = r_in_cred[idx(x, y, z + 1)][P_UP];
          end
          if (z >= 2) begin
            r_in_vld[n][P_UP]   = r_out_vld[idx(x, y, z - 1)][P_DOWN];
            r_in_flit[n][P_UP]  = r_out_flit[idx(x, y, z - 1)][P_DOWN];
            r_out_cred[n][P_UP] = r_in_cred[idx(x, y, z - 1)][P_DOWN];
          end
        end
      end
    end
  end

endmodule
