// ppac_row_alu: the row ALU at the end of every PPAC row. The row's adder tree
// delivers p = number of bit-cells whose XNOR output is 1, i.e. the number of
// positions where the stored bit of x and the z bit agree. With both vectors
// read as +-1 entries the inner product is p - (N - p) = 2p - N. As drawn in the
// paper, a 2:1 multiplexer selects p (en = 1) or the constant N/2 (en = 0, row
// muted), a register stores it, and the output is (register << 1) - N, so a muted
// row contributes exactly 0. One cycle of latency; the register runs every cycle.
module ppac_row_alu
  import ra_pkg::*;
#(
  parameter int unsigned N = 2*B            // bit-cells per row
)(
  input  logic                         clk,
  input  logic                         en,
  input  logic [$clog2(N+1)-1:0]       pop,
  output logic signed [$clog2(N)+1:0]  ip     // 2*pop - N, registered
);
  localparam int unsigned PW = $clog2(N+1);
  logic [PW-1:0] sel_q;

  always_ff @(posedge clk) sel_q <= en ? pop : PW'(N/2);

  logic signed [PW+1:0] ipw;
  assign ipw = $signed({1'b0, sel_q, 1'b0}) - $signed((PW+2)'(N));
  assign ip  = ($clog2(N)+2)'(ipw);   // |2*pop - N| <= N fits
endmodule
