// input_buffer: router input FIFO that can move one or up to CF flits at once.
//
// With CF = 1 it is the conventional input buffer of a wormhole router. With
// CF = c_f > 1 it is the modified buffer of the high vertical-throughput
// router: up to CF flits are written in one cycle (lanes 0..k-1 of wr_vld,
// which must be contiguous from lane 0) and up to CF flits are read in one
// cycle (rd_cnt). peek shows the CF oldest entries, so the single output
// (lane 0) and the parallel output (all lanes) of the paper's figure are the
// same bus, and the reader takes 1 or more flits from it.
//
// Storage is a circular array of DEPTH flits (8 in the evaluated router).
// The upstream sender holds credits for DEPTH flits, so a write never meets
// a full buffer; an assertion checks this. Writes and reads happen in the same
// cycle; a read only sees flits written in earlier cycles. All state changes
// only in cycles where en (the layer's clock enable) is high.
module input_buffer
  import noc_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned CF    = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic  [CF-1:0]            wr_vld,
  input  flit_t [CF-1:0]            wr_flit,
  input  logic  [$clog2(CF+1)-1:0]  rd_cnt,
  output flit_t [CF-1:0]            peek,
  output logic  [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  flit_t         mem [DEPTH];
  logic [PW-1:0] rd_ptr_q, wr_ptr_q;
  logic [CW-1:0] count_q;
  logic [CW-1:0] n_wr;

  // pointer + offset (offset <= CF <= DEPTH) folded back into 0..DEPTH-1
  function automatic logic [PW-1:0] wrap(input logic [PW:0] a);
    return PW'((a >= (PW+1)'(DEPTH)) ? a - (PW+1)'(DEPTH) : a);
  endfunction

  always_comb begin
    n_wr = '0;
    for (int unsigned l = 0; l < CF; l++) if (wr_vld[l]) n_wr = n_wr + 1'b1;
    for (int unsigned l = 0; l < CF; l++) peek[l] = mem[wrap((PW+1)'(rd_ptr_q) + (PW+1)'(l))];
  end

  assign count = count_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr_q <= '0;
      wr_ptr_q <= '0;
      count_q  <= '0;
    end else if (en) begin
      rd_ptr_q <= wrap((PW+1)'(rd_ptr_q) + (PW+1)'(rd_cnt));
      wr_ptr_q <= wrap((PW+1)'(wr_ptr_q) + (PW+1)'(n_wr));
      count_q  <= count_q + n_wr - CW'(rd_cnt);
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int unsigned l = 0; l < CF; l++)
        if (wr_vld[l]) mem[wrap((PW+1)'(wr_ptr_q) + (PW+1)'(l))] <= wr_flit[l];
    end
  end

  // Flow-control rules: no overflow, no read of absent flits, contiguous lanes.
  assert property (@(posedge clk) disable iff (!rst_n)
                   en |-> (int'(count_q) + int'(n_wr) - int'(rd_cnt) <= DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n) en |-> (CW'(rd_cnt) <= count_q));
  assert property (@(posedge clk) disable iff (!rst_n) ((wr_vld & (wr_vld + 1'b1)) == '0));

endmodule
