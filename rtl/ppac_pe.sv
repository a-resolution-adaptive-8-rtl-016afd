// ppac_pe: processing element for the real or the imaginary part of one UE.
// XB_MAX = 4 PPAC rows hold the four bit-planes of the UE's row of X^H (row k is
// bit k, weight 2^k, all entries read as mid-rise +-1 digits). For one z bit-plane
// the row results are combined as sum_k ip_k << k = x_u^H z_dot. The accumulator
// then builds x_u^H z bit-serially, MSB first: acc <= sum + (acc ? acc << 1 : 0),
// where the acc input is 0 for the first (most significant) bit-plane.
//
// Timing: z bit-plane in cycle t, row registers in t+1, accumulator updated at the
// end of t+1 when upd = 1 (upd and acc must be the framing of cycle t delayed by
// one cycle; ppac_instance does that). Writes go to row wrow with the row's
// group mask. Rows, shifts <<0..<<3 and the acc-gated feedback follow the paper;
// the accumulator's update enable (it must hold over the idle sampling cycles)
// is this design's addition.
module ppac_pe
  import ra_pkg::*;
#(
  parameter int unsigned N = 2*B
)(
  input  logic                     clk,
  input  logic                     we,
  input  logic [1:0]               wrow,
  input  logic [N/CG-1:0]          wmask,
  input  logic [N-1:0]             wdata,
  input  logic [N-1:0]             z,
  input  logic [XB_MAX-1:0]        en,
  input  logic                     upd,
  input  logic                     acc,
  output logic signed [ACCW-1:0]   result
);
  localparam int unsigned IPW = $clog2(N) + 2;
  logic signed [IPW-1:0] ip [XB_MAX];
  logic [N-1:0] xbits_unused [XB_MAX];
  logic signed [PEW-1:0] psum;
  logic signed [ACCW-1:0] acc_q, fb;

  for (genvar k = 0; k < XB_MAX; k++) begin : g_row
    ppac_row #(.N(N)) u_row (
      .clk(clk), .we(we && (wrow == 2'(k))), .wmask(wmask), .wdata(wdata),
      .z(z), .en(en[k]), .ip(ip[k]), .xbits(xbits_unused[k]));
  end

  always_comb begin
    psum = '0;
    for (int k = 0; k < XB_MAX; k++) psum += PEW'(ip[k]) <<< k;
    fb = acc ? (acc_q <<< 1) : '0;
  end

  always_ff @(posedge clk)
    if (upd) acc_q <= fb + ACCW'(psum);

  assign result = acc_q;
endmodule
