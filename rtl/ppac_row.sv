// ppac_row: one PPAC row, the processing-in-memory element of the equalizer.
// It holds N one-bit cells (bit-cells); each stores one bit of a row of X^H and
// XNORs it with the matching bit of the current z bit-plane. The z inputs are
// gated with the row enable so a muted row does not toggle its cells. Cells come
// in groups of CG = 4 behind one clock gate, so a write touches only the groups
// selected in wmask. A two-level adder tree (one adder per group, then one over
// the groups) counts the XNOR ones, and ppac_row_alu turns the count into the +-1
// inner product 2*count - N, registered.
//
// Write: with we = 1, every group g with wmask[g] = 1 takes wdata[CG*g +: CG] at
// the clock edge. Compute: z is applied in cycle t, ip holds the result in t+1.
// Structure (bit-cells with storage and XNOR, clock-gate groups of four, group
// adders, row ALU, input gating by en) follows the paper's figure. The chip's
// storage is latch based with gated write clocks; here it is a flip-flop with a
// per-group write enable, which is this design's substitution.
module ppac_row
  import ra_pkg::*;
#(
  parameter int unsigned N = 2*B
)(
  input  logic                         clk,
  input  logic                         we,
  input  logic [N/CG-1:0]              wmask,
  input  logic [N-1:0]                 wdata,
  input  logic [N-1:0]                 z,
  input  logic                         en,
  output logic signed [$clog2(N)+1:0]  ip,
  output logic [N-1:0]                 xbits   // stored contents, for read-back
);
  localparam int unsigned NG = N / CG;
  localparam int unsigned PW = $clog2(N+1);

  logic [N-1:0] x_q, zin, match;
  logic [$clog2(CG+1)-1:0] gsum [NG];
  logic [PW-1:0] pop;

  // bit-cell storage behind the per-group clock gates
  for (genvar g = 0; g < NG; g++) begin : g_grp
    always_ff @(posedge clk)
      if (we && wmask[g]) x_q[CG*g +: CG] <= wdata[CG*g +: CG];
  end

  always_comb begin
    zin   = z & {N{en}};
    match = ~(x_q ^ zin);
    pop   = '0;
    for (int g = 0; g < NG; g++) begin
      gsum[g] = '0;
      for (int i = 0; i < CG; i++) gsum[g] += $clog2(CG+1)'(match[CG*g+i]);
      pop += PW'(gsum[g]);
    end
  end

  ppac_row_alu #(.N(N)) u_alu (.clk(clk), .en(en), .pop(pop), .ip(ip));

  assign xbits = x_q;

  initial assert (N % CG == 0) else $error("ppac_row: N must be a multiple of CG");
endmodule
