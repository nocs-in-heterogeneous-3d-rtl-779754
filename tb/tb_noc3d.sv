// tb_noc3d: end-to-end test of the heterogeneous 3D NoC at its default size.
//
// Every node has a processing-element model: it injects wormhole packets of
// PKT_LEN = 32 flits (one head flit) through the credit-based local port and
// ejects what arrives, returning credits after a random delay so that the
// NoC also sees back-pressure. Elements of the slow layer (z = 0) act only in
// slow cycles and hand over two flits at a time.
//
// Phase 1, zero load, one packet at a time:
//   * a packet inside a digital layer: head latency = 2 cycles per router on
//     the path, including source and destination (two-stage routers);
//   * slow layer -> the digital router below: the whole packet arrives at the
//     fast rate (tail 31..35 fast cycles after head), not at the slow one;
//   * digital router -> slow layer above: likewise, two flits per slow cycle;
//   * a slow-layer packet longer than the ZXYZ threshold (5 hops > 4) takes
//     the detour through layer 1 and still arrives.
// Phase 2, random uniform traffic from all 36 elements.
// Every packet is checked flit by flit (source, sequence number, index, tail
// position) and per source/destination pair in order; all must arrive.
// Mechanisms counted (each must occur): ZXYZ detour, Z+ first hop down from
// the slow layer, Z- hop up, two-flit transfers on the down and up vertical
// links, two-flit injection and ejection in the slow layer, single-flit
// ejection in the slow layer (from a horizontal port), and a credit stall.
module tb_noc3d;
  import noc_pkg::*;

  localparam int X = 4, Y = 3, Z = 3, CF = 2, DEPTH = 8;
  localparam int NN = X * Y * Z, NXY = X * Y;
  localparam int PKT_LEN = 32;
  localparam int NPKT_RND = 5;   // packets per element in the random phase

  logic clk = 0, rst_n = 0;
  logic slow_tick;
  logic  [NN-1:0][CF-1:0] inj_vld, ej_vld;
  flit_t [NN-1:0][CF-1:0] inj_flit, ej_flit;
  cred_t [NN-1:0]         inj_cred, ej_cred;

  noc3d dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ element models
  typedef struct { int dst; int seq; } pkt_t;
  pkt_t   txq     [NN][$];          // packets waiting to be injected
  int     tx_idx  [NN];             // next flit index of the packet in flight
  int     tx_cr   [NN];             // injection credits
  int     seq_ctr [NN];
  int     expq    [NN][NN][$];      // [src][dst] sequence numbers in flight
  int     rx_src  [NN], rx_seq [NN], rx_idx [NN];
  int     rx_pend [NN];             // flits received, credits not yet returned
  int     sent = 0, recvd = 0;
  bit     slow_backpressure = 1;
  longint head_in_t [NN], head_out_t [NN], tail_out_t [NN];

  // mechanism counters
  int m_detour = 0, m_zdown = 0, m_zup = 0, m_wide_dn = 0, m_wide_up = 0;
  int m_wide_inj = 0, m_wide_ej = 0, m_single_ej = 0, m_stall = 0;

  function automatic coord_t co(int n);
    coord_t c;
    c.x = 4'(n % X); c.y = 4'((n / X) % Y); c.z = 4'(n / NXY);
    return c;
  endfunction

  function automatic flit_t mk_flit(int src, int dst, int seq, int i);
    flit_t f;
    head_t h;
    f.head = (i == 0);
    f.tail = (i == PKT_LEN - 1);
    if (i == 0) begin
      h.dst = co(dst); h.src = co(src); h.tag = 8'(seq);
      f.data = FLIT_W'(h);
    end else f.data = {8'(src), 8'(seq), 16'(i)};
    return f;
  endfunction

  task automatic send(int src, int dst);
    pkt_t p;
    p.dst = dst; p.seq = seq_ctr[src]; seq_ctr[src]++;
    txq[src].push_back(p);
    expq[src][dst].push_back(p.seq & 255);
  endtask

  function automatic bit node_en(int n);
    return (n < NXY) ? slow_tick : 1'b1;
  endfunction

  // receive one flit at node n
  task automatic rx(int n, flit_t f);
    if (f.head) begin
      head_t h;
      h = head_t'(f.data);
      check(h.dst == co(n), $sformatf("node %0d got head for %p", n, h.dst));
      rx_src[n] = int'(h.src.x) + X * int'(h.src.y) + NXY * int'(h.src.z);
      rx_seq[n] = int'(h.tag);
      rx_idx[n] = 1;
      head_out_t[n] = cyc;
      check(!f.tail, "head flit marked tail");
    end else begin
      check(f.data == {8'(rx_src[n]), 8'(rx_seq[n]), 16'(rx_idx[n])},
            $sformatf("node %0d flit %0d from %0d corrupt: %h", n, rx_idx[n], rx_src[n], f.data));
      check(f.tail == (rx_idx[n] == PKT_LEN - 1), $sformatf("node %0d tail position", n));
      rx_idx[n]++;
      if (f.tail) begin
        int s;
        s = rx_src[n];
        tail_out_t[n] = cyc;
        check(expq[s][n].size() > 0 && expq[s][n][0] == rx_seq[n],
              $sformatf("packet %0d->%0d seq %0d unexpected", s, n, rx_seq[n]));
        if (expq[s][n].size() > 0) void'(expq[s][n].pop_front());
        recvd++;
      end
    end
  endtask

  initial begin
    inj_vld = '0; inj_flit = '0; ej_cred = '0;
    for (int n = 0; n < NN; n++) begin
      tx_idx[n] = 0; tx_cr[n] = DEPTH; seq_ctr[n] = 0; rx_pend[n] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
  end

  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < NN; n++) begin
      if (node_en(n)) begin
        int lanes_max, k;
        // credits returned by the NoC for the local input buffer
        tx_cr[n] += int'(inj_cred[n]);
        // ejection: take what arrived, return credits (sometimes late)
        k = 0;
        for (int l = 0; l < CF; l++) if (ej_vld[n][l]) begin rx(n, ej_flit[n][l]); k++; end
        if (n < NXY && k == 2) m_wide_ej++;
        if (n < NXY && k == 1 && ej_flit[n][0].head) begin
          head_t h; h = head_t'(ej_flit[n][0].data);
          if (h.src.z == 0) m_single_ej++;
        end
        rx_pend[n] += k;
        begin
          int r;
          r = (slow_backpressure && $urandom_range(3) == 0) ? 0 : rx_pend[n];
          if (r > 15) r = 15;
          ej_cred[n] = cred_t'(r);
          rx_pend[n] -= r;
        end
        // injection
        lanes_max = (n < NXY) ? CF : 1;
        inj_vld[n] = '0;
        inj_flit[n] = '0;
        k = 0;
        while (k < lanes_max && tx_cr[n] > 0 && txq[n].size() > 0) begin
          inj_vld[n][k]  = 1'b1;
          inj_flit[n][k] = mk_flit(n, txq[n][0].dst, txq[n][0].seq, tx_idx[n]);
          if (tx_idx[n] == 0) head_in_t[n] = cyc;
          tx_cr[n]--;
          tx_idx[n]++;
          k++;
          if (tx_idx[n] == PKT_LEN) begin tx_idx[n] = 0; void'(txq[n].pop_front()); sent++; end
        end
        if (k == 2) m_wide_inj++;
      end else begin
        ej_cred[n] = '0;
        inj_vld[n] = '0;
      end
    end
  end

  // ------------------------------------------------------------ mechanism probes
  always @(negedge clk) if (rst_n) begin
    if (slow_tick) begin
      for (int k = 0; k < NXY; k++) begin
        if (dut.r_out_vld[k][P_DOWN][0] && dut.r_out_flit[k][P_DOWN][0].head) begin
          if (head_dst(dut.r_out_flit[k][P_DOWN][0]).z == 0) m_detour++;
          else m_zdown++;
        end
        if (dut.r_out_vld[k][P_DOWN] == 2'b11) m_wide_dn++;
        if (dut.up_s_vld[k] == 2'b11) m_wide_up++;
      end
    end
    for (int n = NXY; n < NN; n++)
      if (dut.r_out_vld[n][P_UP][0] && dut.r_out_flit[n][P_UP][0].head) m_zup++;
  end

  for (genvar z = 0; z < Z; z++) begin : g_pz
    for (genvar y = 0; y < Y; y++) begin : g_py
      for (genvar x = 0; x < X; x++) begin : g_px
        always @(negedge clk)
          if (rst_n && (z > 0 || slow_tick) && (|dut.g_z[z].g_y[y].g_x[x].u_router.stall)) m_stall++;
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  task automatic drain(int limit);
    int t;
    t = 0;
    while (recvd < sent + txq_total() && t < limit) begin @(posedge clk); t++; end
    repeat (20) @(posedge clk);
  endtask

  function automatic int txq_total();
    int s;
    s = 0;
    for (int n = 0; n < NN; n++) s += txq[n].size();
    return s;
  endfunction

  function automatic int nid(int x, int y, int z);
    return x + X * y + NXY * z;
  endfunction

  initial begin
    int s, d;
    longint lat;
    @(posedge rst_n);
    repeat (10) @(posedge clk);
    slow_backpressure = 0;

    // zero-load latency inside digital layer 2: (0,0,2) -> (3,2,2), 5 hops, 6 routers
    s = nid(0, 0, 2); d = nid(3, 2, 2);
    send(s, d); drain(2000);
    lat = head_out_t[d] - head_in_t[s];
    check(lat == 2 * 6, $sformatf("zero-load head latency %0d, expected %0d", lat, 2 * 6));
    check(tail_out_t[d] - head_out_t[d] == PKT_LEN - 1,
          $sformatf("digital layer packet spread %0d", tail_out_t[d] - head_out_t[d]));

    // slow -> fast directly below: packet must stream at the fast rate
    s = nid(1, 1, 0); d = nid(1, 1, 1);
    send(s, d); drain(4000);
    lat = tail_out_t[d] - head_out_t[d];
    check(lat >= PKT_LEN - 1 && lat <= PKT_LEN + 3,
          $sformatf("slow->fast packet spread %0d fast cycles (slow-clock rate would be %0d)", lat,
                    2 * (PKT_LEN - 1)));

    // fast -> slow directly above
    s = nid(2, 1, 1); d = nid(2, 1, 0);
    send(s, d); drain(4000);
    lat = tail_out_t[d] - head_out_t[d];
    check(lat >= PKT_LEN - 2 && lat <= PKT_LEN + 3,
          $sformatf("fast->slow packet spread %0d fast cycles (slow-clock rate would be %0d)", lat,
                    2 * (PKT_LEN - 1)));

    // ZXYZ detour: (0,0,0) -> (3,2,0), 5 hops > threshold 4
    s = nid(0, 0, 0); d = nid(3, 2, 0);
    send(s, d); drain(4000);
    check(m_detour > 0, "ZXYZ detour not taken");

    // short slow-layer packet (2 hops): stays in the slow layer
    s = nid(0, 0, 0); d = nid(1, 1, 0);
    send(s, d); drain(4000);

    check(recvd == 5, $sformatf("zero-load phase delivered %0d of 5", recvd));

    // random uniform traffic with back-pressure
    slow_backpressure = 1;
    for (int k = 0; k < NPKT_RND; k++)
      for (int n = 0; n < NN; n++) begin
        do d = $urandom_range(NN - 1); while (d == n);
        send(n, d);
      end
    drain(150000);

    check(recvd == sent, $sformatf("delivered %0d of %0d packets", recvd, sent));
    for (int a = 0; a < NN; a++) for (int b = 0; b < NN; b++)
      if (expq[a][b].size() != 0) check(0, $sformatf("packets %0d->%0d missing", a, b));

    $display("packets=%0d detour=%0d zdown=%0d zup=%0d wide_dn=%0d wide_up=%0d wide_inj=%0d wide_ej=%0d single_ej=%0d stall=%0d",
             recvd, m_detour, m_zdown, m_zup, m_wide_dn, m_wide_up, m_wide_inj, m_wide_ej, m_single_ej, m_stall);
    check(m_detour > 0,    "mechanism: ZXYZ detour never happened");
    check(m_zdown > 0,     "mechanism: Z+ first hop never happened");
    check(m_zup > 0,       "mechanism: Z- hop never happened");
    check(m_wide_dn > 0,   "mechanism: parallel transfer down never happened");
    check(m_wide_up > 0,   "mechanism: parallel transfer up never happened");
    check(m_wide_inj > 0,  "mechanism: parallel injection never happened");
    check(m_wide_ej > 0,   "mechanism: parallel ejection never happened");
    check(m_single_ej > 0, "mechanism: single-flit ejection in slow layer never happened");
    check(m_stall > 0,     "mechanism: credit stall never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
