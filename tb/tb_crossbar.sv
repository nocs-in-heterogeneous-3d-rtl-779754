// tb_crossbar: random selections through the modified crossbar.
//
// WIDE marks local, up and down (as in the slow-layer router). For random
// one-hot selections and lane masks the outputs are compared with a
// reference: lane 0 always follows the selection; lanes 1.. only between two
// wide ports, and are zero otherwise.
module tb_crossbar;
  import noc_pkg::*;

  localparam int NP = 7, CF = 2;
  localparam logic [NP-1:0] WIDE = 7'b110_0001;

  flit_t [NP-1:0][CF-1:0] in_flit, out_flit;
  logic  [NP-1:0][NP-1:0] sel;
  logic  [NP-1:0][CF-1:0] lanes, out_vld;
  int checks = 0, failures = 0, wide_seen = 0, cut_seen = 0;

  crossbar #(.NP(NP), .CF(CF), .WIDE(WIDE)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int src [NP];
      for (int i = 0; i < NP; i++)
        for (int l = 0; l < CF; l++)
          in_flit[i][l] = flit_t'({2'($urandom), 32'($urandom)});
      sel = '0;
      for (int o = 0; o < NP; o++) begin
        src[o] = $urandom_range(NP);       // NP = idle
        if (src[o] < NP) sel[o][src[o]] = 1'b1;
        lanes[o] = ($urandom_range(1)) ? 2'b11 : 2'b01;
      end
      #1;
      for (int o = 0; o < NP; o++) begin
        for (int l = 0; l < CF; l++) begin
          bit pass;
          pass = (src[o] < NP) && lanes[o][l] && (l == 0 || (WIDE[src[o]] && WIDE[o]));
          if (pass) begin
            check(out_vld[o][l] && out_flit[o][l] == in_flit[src[o]][l],
                  $sformatf("t%0d out %0d lane %0d", t, o, l));
            if (l > 0) wide_seen++;
          end else begin
            check(!out_vld[o][l] && out_flit[o][l] == '0, $sformatf("t%0d out %0d lane %0d not zero", t, o, l));
            if (l > 0 && src[o] < NP && lanes[o][l]) cut_seen++;
          end
        end
      end
    end
    check(wide_seen > 0 && cut_seen > 0, "wide and single-flit transfers both exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
