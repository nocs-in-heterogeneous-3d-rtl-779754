// tb_vlink_up: fast-to-slow high-throughput vertical link, clock ratio 2.
//
// The fast side sends numbered flits, one per fast cycle when it has credits
// (it starts with 3*CF). A model of the slow router's down input buffer
// (8 flits) accepts the parallel groups in slow cycles only and frees up to
// CF flits per slow cycle, returning credits with the slow router's timing
// (registered, held for one slow period). Checks: every flit arrives once
// and in order, no group exceeds the buffer, groups of two flits occur, and
// with a free-running slow side 200 flits cross in about 200 fast cycles,
// i.e. at the fast layer's rate rather than the slow clock's.
module tb_vlink_up;
  import noc_pkg::*;

  localparam int CF = 2, SD = 8, QN = 3 * CF;

  logic clk = 0, rst_n = 0, en_slow;
  logic f_vld;
  flit_t f_flit;
  cred_t f_cred, s_cred;
  logic [CF-1:0] s_vld;
  flit_t [CF-1:0] s_flit;

  int checks = 0, failures = 0;
  int cnt = 0;
  int tx_next = 0, rx_next = 0, fcr = QN, occ = 0, pairs = 0;
  bit throttle = 1;
  int phase_tx = 400;

  vlink_up #(.CF(CF), .SLOW_DEPTH(SD)) dut (.*);

  always #5 clk = ~clk;
  assign en_slow = (cnt % CF) == CF - 1;
  always @(posedge clk) cnt <= rst_n ? cnt + 1 : 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fast side
  always @(negedge clk) if (rst_n) begin
    fcr += int'(f_cred);
    if (fcr > 0 && tx_next < phase_tx && (!throttle || $urandom_range(3) != 0)) begin
      f_vld = 1; f_flit = '{head: 1'b0, tail: 1'b0, data: 32'(tx_next)}; tx_next++; fcr--;
    end else begin
      f_vld = 0; f_flit = '0;
    end
  end

  // slow side: buffer model; captures and frees only at en_slow
  always @(posedge clk) if (rst_n && en_slow) begin
    int k, fr;
    k = 0;
    for (int l = 0; l < CF; l++) if (s_vld[l]) begin
      check(s_flit[l].data == 32'(rx_next), $sformatf("got %0d expected %0d", s_flit[l].data, rx_next));
      rx_next++; k++;
    end
    check((s_vld & (s_vld + 1'b1)) == '0, "lanes not contiguous");
    if (k == CF) pairs++;
    fr = (throttle && $urandom_range(2) == 0) ? 0 : ((occ < CF) ? occ : CF);
    occ = occ + k - fr;
    check(occ <= SD, "slow buffer overflow");
    s_cred <= cred_t'(fr);
  end

  initial begin
    longint t0;
    f_vld = 0; f_flit = '0; s_cred = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rx_next == 400 || tx_next < 0);
    repeat (20) @(posedge clk);
    check(rx_next == 400, "flits lost");
    check(pairs > 0, "no parallel group transferred");
    // rate: slow side free-running, fast side sending whenever it can
    throttle = 0;
    phase_tx = 600;
    t0 = 0;
    @(posedge clk);
    while (rx_next < 600 && t0 < 2000) begin @(posedge clk); t0++; end
    check(rx_next == 600, "rate phase incomplete");
    check(t0 <= 200 + 8, $sformatf("200 flits took %0d fast cycles", t0));
    $display("rate phase: 200 flits in %0d fast cycles", t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
