// router: input-buffered wormhole router with credit-based flow control, in
// its conventional form (HVT = 0, fast digital layers) and as the high
// vertical-throughput router of the slow layer (HVT = 1).
//
// Seven ports: local, north, east, south, west, up, down (noc_pkg::port_e).
// Every port is an array of CF lanes of one flit each. In a conventional
// router only lane 0 is used. In the high vertical-throughput router the
// local, up and down ports are "wide": their input buffers take and give up
// to CF flits per cycle and the crossbar's extra (CF-1)N-bit part moves up to
// CF flits of one packet between two wide ports in one cycle. Transfers that
// involve a horizontal port stay single-flit, exactly as in a conventional
// router. This is what lets a router clocked CF times slower than the digital
// layers match their flit rate between its processing element and the
// vertical link.
//
// Per cycle (of the layer's clock, i.e. a cycle with en = 1):
//   * each input buffer offers its oldest flits; a head flit is routed by
//     route_compute (Z+(XY)Z- or ZXYZ), and the port is remembered until the
//     tail flit leaves (wormhole switching);
//   * each output has a round-robin arbiter; an output is locked to one input
//     from head to tail; the winner sends n = min(flits of the packet waiting,
//     credits, CF or 1) flits, which are registered on the output link;
//   * a downstream buffer's free space is tracked by a credit counter per
//     output, initialised from OUT_CRED; in_cred returns, one cycle later, the
//     number of flits that left each input buffer.
// Head-flit latency is two cycles per router (buffer write, then allocation
// and crossbar traversal into the output register). One virtual channel per
// port; the four virtual channels of the paper's digital-layer routers are
// not part of this design. Turns that the routing functions exclude are not
// pruned from the crossbar; an assertion checks that no packet is routed to a
// port without a link (OUT_CRED = 0).
//
// Timing rule shared by the whole NoC: all state changes only in cycles where
// en = 1 (the slow layer gets en every CF-th cycle of the common clock), and
// inputs are sampled only in those cycles. Outputs are registered and hold
// between enabled cycles.
module router
  import noc_pkg::*;
#(
  parameter int unsigned        CF    = 2,
  parameter int unsigned        DEPTH = 8,
  parameter bit                 HVT   = 1'b0,
  parameter logic [COORD_W-1:0] CX    = '0,
  parameter logic [COORD_W-1:0] CY    = '0,
  parameter logic [COORD_W-1:0] CZ    = '0,
  parameter routing_e           ALGO  = ALG_ZXYZ,
  parameter logic [7:0]         PHI   = PHI_INF,
  parameter logic [NPORTS-1:0][CRED_W-1:0] OUT_CRED = {NPORTS{CRED_W'(8)}}
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic  [NPORTS-1:0][CF-1:0] in_vld,
  input  flit_t [NPORTS-1:0][CF-1:0] in_flit,
  output cred_t [NPORTS-1:0]         in_cred,
  output logic  [NPORTS-1:0][CF-1:0] out_vld,
  output flit_t [NPORTS-1:0][CF-1:0] out_flit,
  input  cred_t [NPORTS-1:0]         out_cred
);

  localparam logic [NPORTS-1:0] WIDE = HVT ? NPORTS'(7'b110_0001) : '0; // down, up, local
  localparam int unsigned CNTW = $clog2(CF + 1);
  localparam int unsigned BW   = $clog2(DEPTH + 1);
  localparam coord_t      HERE = '{x: CX, y: CY, z: CZ};

  flit_t [NPORTS-1:0][CF-1:0]  peek;
  logic  [NPORTS-1:0][BW-1:0]  bcount;
  logic  [NPORTS-1:0][CNTW-1:0] rd_cnt;
  port_e                       rc_port  [NPORTS];
  port_e                       route_i  [NPORTS];
  logic  [CNTW-1:0]            avail    [NPORTS];

  logic  [NPORTS-1:0]          active_q;
  port_e                       route_q  [NPORTS];
  logic  [NPORTS-1:0]          locked_q;
  logic  [NPORTS-1:0][2:0]     owner_q;
  logic  [NPORTS-1:0][CRED_W:0] credit_q;

  logic  [NPORTS-1:0][NPORTS-1:0] req_o, gnt;
  logic  [NPORTS-1:0]          can_send, tail_sent, stall;
  logic  [NPORTS-1:0][2:0]     winner;
  logic  [NPORTS-1:0][CNTW-1:0] n_send;
  logic  [NPORTS-1:0][NPORTS-1:0] sel;
  logic  [NPORTS-1:0][CF-1:0]  lanes;
  logic  [NPORTS-1:0][CF-1:0]  xb_vld;
  flit_t [NPORTS-1:0][CF-1:0]  xb_flit;

  // ---------------------------------------------------------------- inputs
  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    localparam int unsigned LN = WIDE[i] ? CF : 1;
    flit_t [LN-1:0] pk;

    input_buffer #(.DEPTH(DEPTH), .CF(LN)) u_buf (
      .clk     (clk),
      .rst_n   (rst_n),
      .en      (en),
      .wr_vld  (in_vld[i][LN-1:0]),
      .wr_flit (in_flit[i][LN-1:0]),
      .rd_cnt  (rd_cnt[i][$clog2(LN+1)-1:0]),
      .peek    (pk),
      .count   (bcount[i])
    );

    always_comb begin
      peek[i] = '0;
      for (int unsigned l = 0; l < LN; l++) peek[i][l] = pk[l];
    end

    route_compute #(.ALGO(ALGO)) u_rc (
      .cur  (HERE),
      .dst  (head_dst(peek[i][0])),
      .phi  (PHI),
      .port (rc_port[i])
    );

    // flits of the current packet waiting at the head, up to CF (stop at tail)
    always_comb begin
      logic stop;
      stop     = 1'b0;
      avail[i] = '0;
      for (int unsigned l = 0; l < CF; l++) begin
        if (!stop && BW'(l) < bcount[i]) begin
          avail[i] = avail[i] + 1'b1;
          if (peek[i][l].tail) stop = 1'b1;
        end
      end
      route_i[i] = active_q[i] ? route_q[i] : rc_port[i];
    end
  end

  // ---------------------------------------------------------------- allocation
  always_comb begin
    for (int unsigned o = 0; o < NPORTS; o++)
      for (int unsigned i = 0; i < NPORTS; i++)
        req_o[o][i] = (bcount[i] != 0) && (route_i[i] == port_e'(o)) &&
                      (locked_q[o] ? (owner_q[o] == 3'(i)) : !active_q[i]);
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_arb
    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .en      (en),
      .req     (req_o[o]),
      .advance (can_send[o]),
      .grant   (gnt[o])
    );
  end

  always_comb begin
    logic [CNTW-1:0] n;
    n         = '0;
    rd_cnt    = '0;
    sel       = '0;
    lanes     = '0;
    n_send    = '0;
    winner    = '0;
    tail_sent = '0;
    for (int unsigned o = 0; o < NPORTS; o++) begin
      can_send[o] = (|gnt[o]) && (credit_q[o] != 0);
      stall[o]    = (|req_o[o]) && (credit_q[o] == 0);
      for (int unsigned i = 0; i < NPORTS; i++) begin
        if (can_send[o] && gnt[o][i]) begin
          n = avail[i];
          if (!(WIDE[i] && WIDE[o]) && n > 1) n = CNTW'(1);
          if ((CRED_W+1)'(n) > credit_q[o]) n = CNTW'(credit_q[o]);
          n_send[o]    = n;
          winner[o]    = 3'(i);
          sel[o][i]    = 1'b1;
          rd_cnt[i]    = n;
          tail_sent[o] = peek[i][n-1].tail;
          for (int unsigned l = 0; l < CF; l++) lanes[o][l] = (CNTW'(l) < n);
        end
      end
    end
  end

  crossbar #(.NP(NPORTS), .CF(CF), .WIDE(WIDE)) u_xbar (
    .in_flit  (peek),
    .sel      (sel),
    .lanes    (lanes),
    .out_vld  (xb_vld),
    .out_flit (xb_flit)
  );

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= '0;
      locked_q <= '0;
      owner_q  <= '0;
      out_vld  <= '0;
      out_flit <= '0;
      in_cred  <= '0;
      for (int unsigned p = 0; p < NPORTS; p++) begin
        route_q[p]  <= P_LOCAL;
        credit_q[p] <= (CRED_W+1)'(OUT_CRED[p]);
      end
    end else if (en) begin
      for (int unsigned i = 0; i < NPORTS; i++) begin
        in_cred[i] <= cred_t'(rd_cnt[i]);
        if (rd_cnt[i] != 0) begin
          active_q[i] <= !peek[i][rd_cnt[i] - 1'b1].tail;
          route_q[i]  <= route_i[i];
        end
      end
      for (int unsigned o = 0; o < NPORTS; o++) begin
        credit_q[o] <= credit_q[o] - (CRED_W+1)'(n_send[o]) + (CRED_W+1)'(out_cred[o]);
        if (can_send[o]) begin
          locked_q[o] <= !tail_sent[o];
          owner_q[o]  <= winner[o];
        end
      end
      out_vld  <= xb_vld;
      out_flit <= xb_flit;
    end
  end

  // ---------------------------------------------------------------- checks
  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    // routing never selects a port without a link
    if (OUT_CRED[o] == 0) begin : g_nolink
      assert property (@(posedge clk) disable iff (!rst_n) en |-> !(|req_o[o]));
    end
    // credits never exceed the downstream buffer size
    assert property (@(posedge clk) disable iff (!rst_n) credit_q[o] <= (CRED_W+1)'(OUT_CRED[o]));
  end

endmodule
