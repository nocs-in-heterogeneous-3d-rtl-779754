// ratio_tick: clock-enable generator for a layer clocked CF times slower.
//
// The NoC assumes an integer ratio CF between the digital layers' clock and
// the slow layer's clock with a constant phase. This design runs every layer
// from one fast clock and gives the slow layer a clock enable that is high in
// one of every CF fast cycles (the last one of each slow period, i.e. the
// cycle that ends at the slow clock's edge). Reset starts a fresh period.
module ratio_tick #(
  parameter int unsigned CF = 2
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);

  localparam int unsigned W = (CF > 1) ? $clog2(CF) : 1;

  logic [W-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               cnt_q <= '0;
    else if (int'(cnt_q) == CF - 1) cnt_q <= '0;
    else                      cnt_q <= cnt_q + 1'b1;
  end

  assign tick = (int'(cnt_q) == CF - 1);

endmodule
