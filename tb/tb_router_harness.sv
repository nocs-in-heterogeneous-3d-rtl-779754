// tb_router_harness: drives one router with a source and a sink on every
// port that has a link, for tb_router.
//
// The router sits at (CX, CY, CZ) of a 4 x 3 x 3 NoC with ZXYZ routing; EN_DIV
// sets how often its clock enable is high (2: the slow layer). Every source
// injects packets of random length (1..9 flits) to random destinations,
// respecting credits; wide ports of the high vertical-throughput router
// inject two flits at a time. Every sink checks that each packet arrives on
// the port the reference routing function picks, whole, contiguous and in
// order per input, and returns credits after a random delay. The harness
// also checks the zero-load head latency (two enabled cycles), counts
// two-flit transfers and checks that single-flit ports never use lane 1.
module tb_router_harness
  import noc_pkg::*;
#(
  parameter bit HVT    = 1'b1,
  parameter int CX     = 1,
  parameter int CY     = 1,
  parameter int CZ     = 0,
  parameter int EN_DIV = 2,
  parameter int NPKT   = 40
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   wide_xfers,
  output bit   done
);
  localparam int CF = 2, X = 4, Y = 3, Z = 3, DEPTH = 8;
  localparam logic [6:0] WIDE = HVT ? 7'b110_0001 : 7'b0;
  localparam logic [7:0] PHI = (CZ == 0) ? 8'd4 : PHI_INF;

  function automatic logic [NPORTS-1:0][CRED_W-1:0] ocred();
    logic [NPORTS-1:0][CRED_W-1:0] c;
    c = '0;
    c[P_LOCAL] = 8;
    c[P_NORTH] = (CY > 0) ? 8 : 0;
    c[P_SOUTH] = (CY < Y - 1) ? 8 : 0;
    c[P_WEST]  = (CX > 0) ? 8 : 0;
    c[P_EAST]  = (CX < X - 1) ? 8 : 0;
    c[P_UP]    = (CZ > 0) ? 8 : 0;
    c[P_DOWN]  = (CZ < Z - 1) ? 8 : 0;
    return c;
  endfunction
  localparam logic [NPORTS-1:0][CRED_W-1:0] OC = ocred();

  logic en;
  int   ecnt = 0;
  logic  [NPORTS-1:0][CF-1:0] in_vld, out_vld;
  flit_t [NPORTS-1:0][CF-1:0] in_flit, out_flit;
  cred_t [NPORTS-1:0]         in_cred, out_cred;

  router #(.CF(CF), .DEPTH(DEPTH), .HVT(HVT), .CX(4'(CX)), .CY(4'(CY)), .CZ(4'(CZ)),
           .ALGO(ALG_ZXYZ), .PHI(PHI), .OUT_CRED(OC)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .in_vld(in_vld), .in_flit(in_flit), .in_cred(in_cred),
    .out_vld(out_vld), .out_flit(out_flit), .out_cred(out_cred));

  always @(posedge clk) ecnt <= rst_n ? ecnt + 1 : 0;
  assign en = (ecnt % EN_DIV) == EN_DIV - 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL (%0d,%0d,%0d): %s", CX, CY, CZ, what); end
  endtask

  function automatic port_e ref_route(coord_t d);
    coord_t v;
    int h;
    v = '{x: 4'(CX), y: 4'(CY), z: 4'(CZ)};
    h = ((v.x > d.x) ? v.x - d.x : d.x - v.x) + ((v.y > d.y) ? v.y - d.y : d.y - v.y);
    if (v == d)                                  return P_LOCAL;
    if (v.z < d.z)                               return P_DOWN;
    if (h > int'(PHI))                           return P_DOWN;
    if (v.x < d.x)                               return P_EAST;
    if (v.x > d.x)                               return P_WEST;
    if (v.y > d.y)                               return P_NORTH;
    if (v.y < d.y)                               return P_SOUTH;
    return P_UP;
  endfunction

  typedef struct { coord_t dst; int len; int id; } pkt_t;
  pkt_t src_q [NPORTS][$];
  int   src_idx [NPORTS], src_cr [NPORTS];
  int   exp_q  [NPORTS][NPORTS][$];      // [in][out] ids in order
  int   snk_in [NPORTS], snk_id [NPORTS], snk_idx [NPORTS], snk_len [NPORTS], snk_pend [NPORTS];
  bit   snk_busy [NPORTS];
  int   n_sent = 0, n_recv = 0, next_id = 0;
  bit   backpressure = 1;
  int   inj_ecyc = -1, lat = -1;
  int   en_cycles = 0;

  function automatic bit port_ok(int p);
    return p == P_LOCAL || OC[p] != 0;
  endfunction

  function automatic flit_t mk(int p, pkt_t k, int i);
    flit_t f;
    head_t h;
    f.head = (i == 0);
    f.tail = (i == k.len - 1);
    if (i == 0) begin h.dst = k.dst; h.src = '0; h.tag = 8'(k.id); f.data = FLIT_W'(h); end
    else f.data = {4'(p), 4'h0, 8'(k.id), 16'(i)};
    return f;
  endfunction

  task automatic add_pkt(int p, coord_t d, int len);
    pkt_t k;
    k.dst = d; k.len = len; k.id = next_id++;
    src_q[p].push_back(k);
    exp_q[p][ref_route(d)].push_back(k.id & 255);
  endtask

  always @(negedge clk) if (rst_n) begin
    if (en) en_cycles++;
    for (int p = 0; p < NPORTS; p++) begin
      if (!port_ok(p)) begin in_vld[p] = '0; in_flit[p] = '0; out_cred[p] = '0; continue; end
      if (en) begin
        int k, lmax;
        // sink
        k = 0;
        for (int l = 0; l < CF; l++) if (out_vld[p][l]) begin
          flit_t f;
          f = out_flit[p][l];
          k++;
          if (f.head) begin
            head_t h;
            h = head_t'(f.data);
            check(!snk_busy[p], $sformatf("port %0d: head inside a packet", p));
            check(ref_route(h.dst) == port_e'(p), $sformatf("packet for %p left on port %0d", h.dst, p));
            snk_busy[p] = !f.tail; snk_id[p] = int'(h.tag); snk_idx[p] = 1; snk_in[p] = -1;
            if (f.tail) begin n_recv++; check_order(p, -1, int'(h.tag)); end
            if (lat < 0 && inj_ecyc >= 0) lat = en_cycles - inj_ecyc;
          end else begin
            check(snk_busy[p], $sformatf("port %0d: body flit outside a packet", p));
            if (snk_in[p] < 0) snk_in[p] = int'(f.data[31:28]);
            check(f.data == {4'(snk_in[p]), 4'h0, 8'(snk_id[p]), 16'(snk_idx[p])},
                  $sformatf("port %0d: flit %h corrupt", p, f.data));
            snk_idx[p]++;
            if (f.tail) begin snk_busy[p] = 0; n_recv++; check_order(p, snk_in[p], snk_id[p]); end
          end
        end
        check(WIDE[p] || !out_vld[p][1], $sformatf("single-flit port %0d used lane 1", p));
        if (k == 2) wide_xfers++;
        snk_pend[p] += k;
        begin
          int r;
          r = (backpressure && $urandom_range(2) == 0) ? 0 : snk_pend[p];
          out_cred[p] = cred_t'(r);
          snk_pend[p] -= r;
        end
        // source
        src_cr[p] += int'(in_cred[p]);
        lmax = WIDE[p] ? CF : 1;
        in_vld[p] = '0; in_flit[p] = '0;
        k = 0;
        while (k < lmax && src_cr[p] > 0 && src_q[p].size() > 0) begin
          in_vld[p][k] = 1'b1;
          in_flit[p][k] = mk(p, src_q[p][0], src_idx[p]);
          if (src_idx[p] == 0 && inj_ecyc < 0 && !backpressure) inj_ecyc = en_cycles;
          src_cr[p]--; src_idx[p]++; k++;
          if (src_idx[p] == src_q[p][0].len) begin src_idx[p] = 0; void'(src_q[p].pop_front()); n_sent++; end
        end
      end else begin
        out_cred[p] = '0; in_vld[p] = '0;
      end
    end
  end

  // the single-flit head+tail packet carries no input id; body flits carry it
  task automatic check_order(int p, int inp, int id);
    bit found;
    found = 0;
    for (int i = 0; i < NPORTS; i++)
      if ((inp < 0 || i == inp) && !found && exp_q[i][p].size() > 0 && exp_q[i][p][0] == id) begin
        void'(exp_q[i][p].pop_front()); found = 1;
      end
    check(found, $sformatf("port %0d: packet %0d from %0d out of order", p, id, inp));
  endtask

  initial begin
    checks = 0; failures = 0; wide_xfers = 0; done = 0;
    in_vld = '0; in_flit = '0; out_cred = '0;
    for (int p = 0; p < NPORTS; p++) begin
      src_idx[p] = 0; src_cr[p] = DEPTH; snk_busy[p] = 0; snk_pend[p] = 0;
    end
    @(posedge rst_n);
    repeat (6) @(posedge clk);
    // zero-load latency: one 4-flit packet from the west port to the local port
    backpressure = 0;
    add_pkt(P_WEST, '{x: 4'(CX), y: 4'(CY), z: 4'(CZ)}, 4);
    repeat (40) @(posedge clk);
    check(lat == 2, $sformatf("zero-load head latency %0d enabled cycles, expected 2", lat));
    // random traffic from every port to every legal destination
    backpressure = 1;
    for (int k = 0; k < NPKT; k++)
      for (int p = 0; p < NPORTS; p++) begin
        coord_t d;
        if (!port_ok(p)) continue;
        d = '{x: 4'($urandom_range(X - 1)), y: 4'($urandom_range(Y - 1)), z: 4'($urandom_range(Z - 1))};
        add_pkt(p, d, (p == P_LOCAL || p == P_DOWN) ? 8 : 1 + $urandom_range(8));
      end
    begin
      int t;
      t = 0;
      while (n_recv < next_id && t < 60000) begin @(posedge clk); t++; end
    end
    check(n_recv == next_id, $sformatf("%0d of %0d packets delivered", n_recv, next_id));
    done = 1;
  end
endmodule
