// ti_ctrl: sampling-clock and framing controller of the ADC array and the PPAC
// instances (the CTRL block of the chip).
//
// A q-bit sample takes P = S + q cycles: S sampling cycles and q conversion
// cycles, with (S, q, P) = (2, 6, 8) for 6-bit and (1, 3, 4) for 3-bit samples,
// as the paper gives. Four converters are interleaved: converter k samples in
// cycles [k*S, k*S+S-1] of every P-cycle frame (sw[k] high, one after another,
// non-overlapping) and delivers its bits MSB first in the q cycles that follow.
// For each PPAC instance k this controller marks those q cycles with bvalid[k],
// the MSB cycle with bfirst[k] and the LSB cycle with blast[k]; during the S
// sampling cycles the instance is idle.
//
// Outputs come from registers (frame counter and the sw register). run = 0 resets
// the frame and clears the "has sampled" flags, so no bits are marked before a
// converter has taken its first sample. res6 may only change while run = 0.
// The frame arithmetic is derived from the paper's cycle counts; the run/reset
// behaviour is this design's choice.
module ti_ctrl
  import ra_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic             res6,
  output logic [NINST-1:0] sw,
  output logic [NINST-1:0] bvalid,
  output logic [NINST-1:0] bfirst,
  output logic [NINST-1:0] blast
);
  logic [2:0] cyc, nxt_cyc, last_cyc;
  logic [1:0] s;                 // sampling cycles
  logic [NINST-1:0] sampled, sw_nxt;

  always_comb begin
    s        = res6 ? 2'd2 : 2'd1;
    last_cyc = res6 ? 3'd7 : 3'd3;
    nxt_cyc  = (cyc == last_cyc) ? 3'd0 : cyc + 3'd1;
    for (int k = 0; k < NINST; k++)
      sw_nxt[k] = ({1'b0, nxt_cyc} >= 4'(k*s)) && ({1'b0, nxt_cyc} < 4'(k*s + s));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc     <= '0;
      sw      <= '0;
      sampled <= '0;
    end else if (!run) begin
      cyc     <= last_cyc;       // next frame starts at cycle 0 once run rises
      sw      <= '0;
      sampled <= '0;
    end else begin
      cyc     <= nxt_cyc;
      sw      <= sw_nxt;
      sampled <= sampled | sw;
    end
  end

  // bit framing: cycle offset within converter k's conversion window
  always_comb begin
    for (int k = 0; k < NINST; k++) begin
      logic [3:0] off;   // (cyc - k*S - S) mod P
      off = ({1'b0, cyc} + 4'(res6 ? 8 : 4) - 4'(k*s + s)) & (res6 ? 4'd7 : 4'd3);
      bvalid[k] = run && sampled[k] && !sw[k] && (off < (res6 ? 4'd6 : 4'd3));
      bfirst[k] = bvalid[k] && (off == 4'd0);
      blast[k]  = bvalid[k] && (off == (res6 ? 4'd5 : 4'd2));
    end
  end

  // the sampling clocks never overlap
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(sw));
endmodule
