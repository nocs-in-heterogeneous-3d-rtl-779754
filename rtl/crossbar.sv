// crossbar: the modified router crossbar of the high vertical-throughput router.
//
// Lane 0 of every port is switched by an ordinary N-bit crossbar between all
// NP ports. Lanes 1..CF-1 form a second, (CF-1)N-bit crossbar that exists
// only between the ports flagged in WIDE (local, up and down in the slow
// layer): a transfer between two wide ports moves up to CF flits at once,
// every other transfer moves one flit and the extra lanes of its output stay
// zero, as the paper prescribes. With WIDE = 0 it is a plain N-bit crossbar.
//
// sel[o] is the one-hot input chosen for output o (all zero: output idle);
// lanes[o] marks which lanes of that transfer carry flits. Combinational.
module crossbar
  import noc_pkg::*;
#(
  parameter int unsigned NP   = 7,
  parameter int unsigned CF   = 2,
  parameter logic [NP-1:0] WIDE = '0
) (
  input  flit_t [NP-1:0][CF-1:0] in_flit,
  input  logic  [NP-1:0][NP-1:0] sel,
  input  logic  [NP-1:0][CF-1:0] lanes,
  output logic  [NP-1:0][CF-1:0] out_vld,
  output flit_t [NP-1:0][CF-1:0] out_flit
);

  always_comb begin
    for (int unsigned o = 0; o < NP; o++) begin
      for (int unsigned l = 0; l < CF; l++) begin
        out_flit[o][l] = '0;
        out_vld[o][l]  = 1'b0;
        for (int unsigned i = 0; i < NP; i++) begin
          // lane 0: full N-bit crossbar; lanes >= 1: wide ports only
          if (sel[o][i] && lanes[o][l] && (l == 0 || (WIDE[i] && WIDE[o]))) begin
            out_flit[o][l] = out_flit[o][l] | in_flit[i][l];
            out_vld[o][l]  = 1'b1;
          end
        end
      end
    end
  end

endmodule
