// vlink_down: high-throughput vertical link from the slow layer down to a fast layer.
//
// Once per slow-layer cycle the slow router's down output may place up to CF
// flits of one packet on a CF*N-bit wide MIV/TSV array. In the fast layer
// they are captured in parallel (in the fast cycle with en_slow = 1, the slow
// clock's edge) into a shift register that hands one N-bit flit per fast
// cycle to the fast router's up input. Hence a packet leaves the slow layer at
// the fast layer's flit rate instead of the slow clock's.
//
// The register holds GROUPS*CF flits (default 3*CF: a group being
// serialised, one being received, and slack for the credit return delay); the
// paper's figure shows a CF-flit register, the extra space is this design's
// choice so that the slow side can send a group every slow cycle. Flow
// control: the slow router holds credits for these GROUPS*CF slots; credits
// for flits that left during a slow cycle are accumulated in the fast layer
// and presented on s_cred until the next slow edge. Towards the fast router
// the link holds FAST_DEPTH credits and sends only with a credit. The serial
// output is registered.
module vlink_down
  import noc_pkg::*;
#(
  parameter int unsigned CF         = 2,
  parameter int unsigned FAST_DEPTH = 8,
  parameter int unsigned GROUPS     = 3   // register size in groups of CF flits
) (
  input  logic            clk,        // fast layer clock
  input  logic            rst_n,
  input  logic            en_slow,    // slow layer clock edge
  // slow side: wide MIV array from the slow router's down output
  input  logic  [CF-1:0]  s_vld,
  input  flit_t [CF-1:0]  s_flit,
  output cred_t           s_cred,
  // fast side: router up input
  output logic            f_vld,
  output flit_t           f_flit,
  input  cred_t           f_cred
);

  localparam int unsigned QN = GROUPS * CF;
  localparam int unsigned CW = $clog2(QN + 1);
  localparam int unsigned FW = $clog2(FAST_DEPTH + 1) + 1;

  flit_t [QN-1:0] q_q;
  logic  [CW-1:0] cnt_q;
  logic  [FW-1:0] fcr_q;   // credits for the fast router's input buffer
  cred_t          acc_q;   // credits collected for the slow side
  logic           pop;
  int unsigned    n_in;
  logic  [CW-1:0] base;    // occupancy after this cycle's pop

  always_comb begin
    pop  = (cnt_q != 0) && (fcr_q != 0);
    n_in = 0;
    if (en_slow)
      for (int unsigned l = 0; l < CF; l++) if (s_vld[l]) n_in = n_in + 1;
    base = cnt_q - CW'(pop);
  end

  assign s_cred = acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_q    <= '0;
      cnt_q  <= '0;
      fcr_q  <= FW'(FAST_DEPTH);
      acc_q  <= '0;
      f_vld  <= 1'b0;
      f_flit <= '0;
    end else begin
      for (int unsigned k = 0; k + 1 < QN; k++) if (pop) q_q[k] <= q_q[k + 1];
      if (en_slow)
        for (int unsigned l = 0; l < CF; l++) if (s_vld[l]) q_q[CW'(base + CW'(l))] <= s_flit[l];
      cnt_q  <= base + CW'(n_in);
      fcr_q  <= fcr_q - FW'(pop) + FW'(f_cred);
      acc_q  <= (en_slow ? '0 : acc_q) + cred_t'(pop);
      f_vld  <= pop;
      f_flit <= q_q[0];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   en_slow |-> (int'(cnt_q) - (pop ? 1 : 0) + n_in <= QN));
  assert property (@(posedge clk) disable iff (!rst_n) ((s_vld & (s_vld + 1'b1)) == '0));

endmodule
