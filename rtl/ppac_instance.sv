// ppac_instance: one PPAC instance, computing X^H z for one z vector. It holds
// 2U processing elements: PE 2u computes Re(x_u^H z), PE 2u+1 Im(x_u^H z). All PEs
// see the same 2B-bit z bit-plane, ordered [Re z_1..Re z_B, Im z_1..Im z_B].
// The complex product is folded into the real rows by what is stored: with
// x_u = xr + j xi,
//   real PE row = [xr ; xi]   gives  sum(xr zr + xi zi) = Re(x_u^H z)
//   imag PE row = [-xi ; xr]  gives  sum(xr zi - xi zr) = Im(x_u^H z)
// and -xi of a mid-rise number is its bitwise complement, so the writer stores
// ~xi bits. This data layout is this design's choice; the paper shows one real
// and one imaginary PE per UE without the layout.
//
// Framing: bvalid/bfirst/blast mark the q bit-plane cycles of one sample, MSB
// first. Two cycles after the blast cycle, out_valid pulses for one cycle with
// result holding X^H z (it stays until the next sample's first bit-plane reaches
// the accumulators). Writes: we with wpe (PE index), wrow (bit-plane), wmask.
module ppac_instance
  import ra_pkg::*;
#(
  parameter int unsigned N    = 2*B,
  parameter int unsigned NPE  = 2*U
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(NPE)-1:0]   wpe,
  input  logic [1:0]               wrow,
  input  logic [N/CG-1:0]          wmask,
  input  logic [N-1:0]             wdata,
  input  logic [N-1:0]             z,
  input  logic [XB_MAX-1:0]        en,
  input  logic                     bvalid,
  input  logic                     bfirst,
  input  logic                     blast,
  output logic signed [ACCW-1:0]   result [NPE],
  output logic                     out_valid
);
  logic v1, f1, l1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= bvalid; f1 <= bfirst; l1 <= blast;
      out_valid <= v1 && l1;
    end
  end

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    ppac_pe #(.N(N)) u_pe (
      .clk(clk), .we(we && (wpe == $clog2(NPE)'(p))), .wrow(wrow), .wmask(wmask),
      .wdata(wdata), .z(z), .en(en), .upd(v1), .acc(!f1), .result(result[p]));
  end

  // framing rules: first and last only inside a valid bit-plane
  assert property (@(posedge clk) disable iff (!rst_n) bfirst |-> bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) blast |-> bvalid);
endmodule
