// spatial_equalizer: the PPAC-based finite-alphabet spatial equalizer, NINST = 4
// PPAC instances, each fed by its own converter phase of the ADC array (instance
// k processes the samples taken by converter k of every channel), so together they
// sustain four z vectors per sample period P. The equalization matrix X^H is
// written once through a port shared by all instances (a write goes to every
// instance, which all hold the same matrix). The X^H resolution xres = 1..4 bits
// enables PPAC rows 0..xres-1 of every PE and mutes the others; X^H entries are
// then sum_{k<xres} 2^k d_k with +-1 digits d_k.
//
// Each instance is bit-serial: q cycles per q-bit z, results two cycles after its
// last bit-plane (see ppac_instance). The four instances, the row muting and the
// up-to-8-bit z follow the paper; the broadcast write port and which rows are
// muted for fewer bits are this design's choices. The per-UE scaling mu of
// finite-alphabet equalization is not applied here (left to the consumer).
module spatial_equalizer
  import ra_pkg::*;
#(
  parameter int unsigned N    = 2*B,
  parameter int unsigned NPE  = 2*U,
  parameter int unsigned NI   = NINST
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [2:0]               xres,         // 1..4 bits per X^H entry
  input  logic                     we,
  input  logic [$clog2(NPE)-1:0]   wpe,
  input  logic [1:0]               wrow,
  input  logic [N/CG-1:0]          wmask,
  input  logic [N-1:0]             wdata,
  input  logic [N-1:0]             z      [NI],
  input  logic [NI-1:0]            bvalid,
  input  logic [NI-1:0]            bfirst,
  input  logic [NI-1:0]            blast,
  output logic signed [ACCW-1:0]   result [NI][NPE],
  output logic [NI-1:0]            out_valid
);
  logic [XB_MAX-1:0] en;

  always_comb
    for (int k = 0; k < XB_MAX; k++) en[k] = (3'(k) < xres);

  for (genvar i = 0; i < NI; i++) begin : g_inst
    ppac_instance #(.N(N), .NPE(NPE)) u_ppac (
      .clk(clk), .rst_n(rst_n), .we(we), .wpe(wpe), .wrow(wrow), .wmask(wmask),
      .wdata(wdata), .z(z[i]), .en(en), .bvalid(bvalid[i]), .bfirst(bfirst[i]),
      .blast(blast[i]), .result(result[i]), .out_valid(out_valid[i]));
  end
endmodule
