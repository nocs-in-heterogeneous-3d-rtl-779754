// tb_router: the router in both of its forms.
//
// One high vertical-throughput router of the slow layer (HVT = 1, position
// (1,1,0), clock enable every second cycle) and one conventional router of a
// digital layer (HVT = 0, position (2,1,1), enabled every cycle), each driven
// by tb_router_harness. The slow router must use two-flit transfers (local to
// down, down to local); the conventional one must never.
module tb_router;
  logic clk = 0, rst_n = 0;
  int c0, f0, w0, c1, f1, w1;
  bit d0, d1;
  int checks, failures;

  always #5 clk = ~clk;

  tb_router_harness #(.HVT(1'b1), .CX(1), .CY(1), .CZ(0), .EN_DIV(2)) h_slow (
    .clk(clk), .rst_n(rst_n), .checks(c0), .failures(f0), .wide_xfers(w0), .done(d0));
  tb_router_harness #(.HVT(1'b0), .CX(2), .CY(1), .CZ(1), .EN_DIV(1)) h_fast (
    .clk(clk), .rst_n(rst_n), .checks(c1), .failures(f1), .wide_xfers(w1), .done(d1));

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1);
    checks = c0 + c1 + 2;
    failures = f0 + f1 + ((w0 > 0) ? 0 : 1) + ((w1 == 0) ? 0 : 1);
    $display("slow router two-flit transfers=%0d, conventional=%0d", w0, w1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
