// vlink_up: high-throughput vertical link from a fast layer up to the slow layer.
//
// The fast router's up output delivers one N-bit flit per fast cycle. The link
// collects them in a shift-in register in the fast layer; once per slow-layer
// cycle (the fast cycle with en_slow = 1, which is the slow clock's edge) the
// oldest up to CF flits cross a CF*N-bit wide MIV/TSV array in parallel and
// are written, all at once, into the slow router's modified down input buffer.
// So the slow router receives CF flits per slow cycle, which is the fast
// layer's flit rate when the clock ratio is CF.
//
// The register holds GROUPS*CF flits (default 3*CF: a CF-flit shift-in stage
// plus skid space) so that the fast side never waits for the credit round trip
// across the clock ratio; the paper's figure shows only the CF-flit register,
// the extra stage is this design's choice. Flow control: the link holds
// credits for the slow router's input buffer (SLOW_DEPTH flits) and transfers
// only as many flits as it has credits; it returns credits to the fast router
// (which starts with GROUPS*CF) in the cycle flits leave towards the slow layer.
// Credits from the slow router (slow_cred) are counted only when en_slow = 1.
// A group may hold flits of two packets; the slow router's buffer keeps them
// in order.
module vlink_up
  import noc_pkg::*;
#(
  parameter int unsigned CF         = 2,
  parameter int unsigned SLOW_DEPTH = 8,
  parameter int unsigned GROUPS     = 3   // register size in groups of CF flits
) (
  input  logic            clk,        // fast layer clock
  input  logic            rst_n,
  input  logic            en_slow,    // slow layer clock edge
  // fast side: router up output
  input  logic            f_vld,
  input  flit_t           f_flit,
  output cred_t           f_cred,
  // slow side: wide MIV array into the slow router's down input
  output logic  [CF-1:0]  s_vld,
  output flit_t [CF-1:0]  s_flit,
  input  cred_t           s_cred
);

  localparam int unsigned QN = GROUPS * CF;
  localparam int unsigned CW = $clog2(QN + 1);
  localparam int unsigned SW = $clog2(SLOW_DEPTH + 1) + 1;

  flit_t [QN-1:0] q_q;
  logic  [CW-1:0] cnt_q;
  logic  [SW-1:0] scr_q;   // credits for the slow router's input buffer
  int unsigned    n_xfer;

  always_comb begin
    int unsigned m;
    m = (int'(cnt_q) < CF) ? int'(cnt_q) : CF;
    if (m > int'(scr_q)) m = int'(scr_q);
    n_xfer = en_slow ? m : 0;
    for (int unsigned l = 0; l < CF; l++) begin
      s_flit[l] = q_q[l];
      s_vld[l]  = en_slow && (l < m);
    end
    f_cred = cred_t'(n_xfer);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_q   <= '0;
      cnt_q <= '0;
      scr_q <= SW'(SLOW_DEPTH);
    end else begin
      // shift out the transferred flits, then append the arriving one
      for (int unsigned k = 0; k < QN; k++) begin
        if (k + n_xfer < QN) q_q[k] <= q_q[k + n_xfer];
      end
      if (f_vld) q_q[int'(cnt_q) - n_xfer] <= f_flit;
      cnt_q <= cnt_q - CW'(n_xfer) + CW'(f_vld);
      scr_q <= scr_q - SW'(n_xfer) + (en_slow ? SW'(s_cred) : '0);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) f_vld |-> (int'(cnt_q) - n_xfer < QN));

endmodule
