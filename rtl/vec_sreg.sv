// vec_sreg: the shift registers of the BEACHES engine, which convert between the
// parallel vectors of the FFT/IFFT and the one-entry-per-cycle stream of the
// CORDIC, threshold path.
//   * load = 1: the whole vector din is taken; then entry 0, 1, ... 31 appears on
//     sout, one per cycle, with sout_valid, starting the cycle after the load.
//     A new load may arrive in the cycle the last entry is shown.
//   * sin_valid = 1: sin is shifted in at the top; after B such cycles, dout[0]
//     holds the first entry shifted in and dout_valid pulses for one cycle.
// A shift register takes only one of the two roles at a time (the engine uses
// separate instances). The paper only names these registers; this parallel/serial
// behaviour is inferred from where they sit in its block diagram.
module vec_sreg
  import ra_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  cplx_t  din       [B],
  input  logic   sin_valid,
  input  cplx_t  sin,
  output cplx_t  sout,
  output logic   sout_valid,
  output cplx_t  dout      [B],
  output logic   dout_valid
);
  cplx_t r [B];
  logic [$clog2(B):0] cnt;      // entries still to shift out, or shifted in

  always_ff @(posedge clk) begin
    if (load) r <= din;
    else if (sout_valid || sin_valid) begin
      for (int i = 0; i < B-1; i++) r[i] <= r[i+1];
      r[B-1] <= sin;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= 1'b0;
      if (load) cnt <= ($clog2(B)+1)'(B);
      else if (sin_valid) begin
        if (cnt == ($clog2(B)+1)'(B-1)) begin
          cnt        <= '0;
          dout_valid <= 1'b1;
        end else cnt <= cnt + 1'b1;
      end else if (sout_valid) cnt <= cnt - 1'b1;
    end
  end

  logic shifting_out;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) shifting_out <= 1'b0;
    else if (load) shifting_out <= 1'b1;
    else if (sout_valid && cnt == ($clog2(B)+1)'(1)) shifting_out <= 1'b0;

  assign sout       = r[0];
  assign sout_valid = shifting_out;
  assign dout       = r;

  assert property (@(posedge clk) disable iff (!rst_n) !(load && sin_valid));
endmodule
