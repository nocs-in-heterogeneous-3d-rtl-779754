// tb_vlink_down: slow-to-fast high-throughput vertical link, clock ratio 2.
//
// A model of the slow router's down output sends groups of up to CF numbered
// flits, registered and held for a slow period, as its credits (3*CF at
// start, returned on s_cred and counted in slow cycles) allow. A model of the
// fast router's up input buffer (8 flits) drains at random and returns one
// credit per freed flit. Checks: order, no loss, the fast-side credit
// limit, and with no back-pressure 200 flits cross in about 200 fast cycles,
// i.e. the serial side runs at the fast rate.
module tb_vlink_down;
  import noc_pkg::*;

  localparam int CF = 2, FD = 8, QN = 3 * CF;

  logic clk = 0, rst_n = 0, en_slow;
  logic [CF-1:0] s_vld;
  flit_t [CF-1:0] s_flit;
  cred_t s_cred, f_cred;
  logic f_vld;
  flit_t f_flit;

  int checks = 0, failures = 0;
  int cnt = 0;
  int tx_next = 0, rx_next = 0, scr = QN, occ = 0, maxocc = 0;
  bit throttle = 1;
  int limit = 400;

  vlink_down #(.CF(CF), .FAST_DEPTH(FD)) dut (.*);

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

  // slow side: registered output, updated only at slow edges
  always @(posedge clk) if (rst_n && en_slow) begin
    int k;
    scr += int'(s_cred);
    k = 0;
    s_vld <= '0;
    for (int l = 0; l < CF; l++)
      if (scr > 0 && tx_next < limit && (!throttle || $urandom_range(3) != 0)) begin
        s_vld[k]  <= 1'b1;
        s_flit[k] <= '{head: 1'b0, tail: 1'b0, data: 32'(tx_next)};
        tx_next++; scr--; k++;
      end
  end

  // fast side: router input buffer model
  always @(posedge clk) if (rst_n) begin
    int fr;
    if (f_vld) begin
      check(f_flit.data == 32'(rx_next), $sformatf("got %0d expected %0d", f_flit.data, rx_next));
      rx_next++; occ++;
    end
    if (occ > maxocc) maxocc = occ;
    fr = (occ > 0 && (!throttle || $urandom_range(2) == 0)) ? 1 : 0;
    occ -= fr;
    f_cred <= cred_t'(fr);
  end

  initial begin
    longint t0;
    s_vld = '0; s_flit = '0; f_cred = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rx_next == 400);
    repeat (20) @(posedge clk);
    check(maxocc <= FD, $sformatf("fast buffer overflow %0d", maxocc));
    throttle = 0;
    limit = 600;
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
