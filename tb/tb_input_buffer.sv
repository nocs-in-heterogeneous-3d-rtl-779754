// tb_input_buffer: random write/read traffic against a reference queue.
//
// The modified buffer (DEPTH 8, CF 2) is written with 0..2 flits and read with
// 0..2 flits per enabled cycle, never beyond what the reference queue allows,
// with en low in about a quarter of the cycles (nothing may change then).
// peek and count are compared with the reference after every cycle, and a
// burst phase checks that two flits per cycle go in and out, i.e. the buffer
// sustains CF flits per cycle.
module tb_input_buffer;
  import noc_pkg::*;

  localparam int DEPTH = 8, CF = 2;

  logic clk = 0, rst_n = 0, en;
  logic  [CF-1:0] wr_vld;
  flit_t [CF-1:0] wr_flit;
  logic  [1:0]    rd_cnt;
  flit_t [CF-1:0] peek;
  logic  [3:0]    count;

  int checks = 0, failures = 0;
  flit_t refq[$];
  int moved = 0;

  input_buffer #(.DEPTH(DEPTH), .CF(CF)) dut (.*);

  always #5 clk = ~clk;

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

  function automatic flit_t rnd_flit();
    flit_t f;
    f.head = 1'($urandom); f.tail = 1'($urandom); f.data = $urandom;
    return f;
  endfunction

  initial begin
    wr_vld = '0; wr_flit = '0; rd_cnt = '0; en = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int nr, nw, room;
      bit burst;
      burst = (cyc >= 2000 && cyc < 2100);
      @(negedge clk);
      en = burst ? 1'b1 : ($urandom_range(3) != 0);
      nr = burst ? ((refq.size() >= 2) ? 2 : refq.size()) : $urandom_range(2);
      if (nr > refq.size()) nr = refq.size();
      room = DEPTH - refq.size() + nr;
      nw = burst ? 2 : $urandom_range(2);
      if (nw > room) nw = room;
      rd_cnt = 2'(nr);
      for (int l = 0; l < CF; l++) begin
        wr_vld[l]  = (l < nw);
        wr_flit[l] = rnd_flit();
      end
      @(posedge clk);
      #1;
      if (en) begin
        for (int k = 0; k < nr; k++) void'(refq.pop_front());
        for (int l = 0; l < nw; l++) refq.push_back(wr_flit[l]);
        if (burst) moved += nr;
      end
      check(int'(count) == refq.size(), $sformatf("cycle %0d count %0d ref %0d", cyc, count, refq.size()));
      for (int l = 0; l < CF; l++)
        if (l < refq.size()) check(peek[l] == refq[l], $sformatf("cycle %0d lane %0d peek", cyc, l));
    end
    // 100 burst cycles: first one may read only what was there, then 2 per cycle
    check(moved >= 2 * 100 - 4, $sformatf("burst moved only %0d flits in 100 cycles", moved));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
