// tb_rr_arbiter: random requests against a reference round-robin model.
//
// Each cycle the expected grant is the first requester at or after the
// reference pointer; the pointer moves past the winner when advance and en
// are high. Also checks that a constantly requesting input waits at most N-1
// grants (fairness).
module tb_rr_arbiter;
  localparam int N = 7;

  logic clk = 0, rst_n = 0, en, advance;
  logic [N-1:0] req, grant;
  int checks = 0, failures = 0;
  int ptr = 0;
  int wait0 = 0, max_wait0 = 0;

  rr_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; en = 1; advance = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      logic [N-1:0] exp;
      int win;
      @(negedge clk);
      req = N'($urandom);
      req[0] = 1'b1;                       // requester 0 always asks
      en = ($urandom_range(3) != 0);
      advance = ($urandom_range(4) != 0);
      #1;
      exp = '0; win = -1;
      for (int k = 0; k < N; k++) begin
        int i;
        i = (ptr + k) % N;
        if (win < 0 && req[i]) begin win = i; exp[i] = 1'b1; end
      end
      check(grant == exp, $sformatf("cycle %0d req %b grant %b exp %b", cyc, req, grant, exp));
      @(posedge clk);
      if (en && advance && win >= 0) begin
        ptr = (win + 1) % N;
        if (win == 0) begin
          if (wait0 > max_wait0) max_wait0 = wait0;
          wait0 = 0;
        end else wait0++;
      end
    end
    check(max_wait0 <= N - 1, $sformatf("requester 0 waited %0d grants", max_wait0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
