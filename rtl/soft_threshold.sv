// soft_threshold: the threshold step of BEACHES. The scan unit's tau* is
// subtracted from the magnitude of a beamspace entry, and a multiplexer passes
// the difference when it is positive and 0 otherwise: out = max(a - tau, 0).
// The angle is left untouched (it goes around this block), so the entry keeps its
// direction and only shrinks towards zero. Combinational. Subtractor and zero
// multiplexer follow the paper's block diagram.
module soft_threshold
  import ra_pkg::*;
(
  input  logic [MW-1:0] a,
  input  logic [MW-1:0] tau,
  output logic [MW-1:0] y
);
  logic [MW:0] diff;
  always_comb begin
    diff = {1'b0, a} - {1'b0, tau};
    y    = diff[MW] ? '0 : diff[MW-1:0];
  end
endmodule
