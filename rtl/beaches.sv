// beaches: the BEACHES channel-denoising engine. A least-squares channel vector
// h~ (B = 32 antenna entries) goes to beamspace with the FFT, where mmWave channels
// are sparse; the entries are soft-thresholded in magnitude with a threshold tau*
// chosen per vector by Stein's unbiased risk estimate (SURE), and the IFFT takes
// the denoised vector back to the antenna domain.
//
// Data path, in order (one vector per B cycles sustained):
//   smul_fft (parallel) -> vec_sreg (parallel to serial) -> cordic_vec
//   -> sort_unit -> scan_unit -> tau*            (threshold branch)
//   -> fifo_buffer (magnitude, angle)           (data branch, waits for tau*)
//   -> soft_threshold -> cordic_rot -> vec_sreg (serial to parallel)
//   -> smul_fft (inverse) -> vec_sreg (parallel to serial) -> h*_b stream
// When tau* of a vector is known the engine pops that vector's B entries from the
// FIFO in one burst.
//
// Interface: in_valid with h_re/h_im takes a vector when in_ready is 1 (in_ready
// falls for B-1 cycles after each accepted vector); n0, the vector's noise
// variance, is sampled with it. The result streams out as
// hs (entries 0..B-1, hs_idx) with hs_valid, about 5 vector times later; tau and
// tau_valid report each vector's threshold in CORDIC magnitude units.
// Block structure follows the paper's BEACHES diagram; all widths, the FIFO burst
// read and the handshake are this design's choices.
module beaches
  import ra_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [HW-1:0]  h_re [B],
  input  logic signed [HW-1:0]  h_im [B],
  input  logic [NW-1:0]         n0,
  output logic                  hs_valid,
  output cplx_t                 hs,
  output logic [$clog2(B)-1:0]  hs_idx,
  output logic                  tau_valid,
  output logic [MW-1:0]         tau
);
  // input pacing
  logic [$clog2(B)-1:0] gap;
  logic accept;
  assign in_ready = (gap == '0);
  assign accept   = in_valid && in_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      gap <= '0;
    else if (accept) gap <= $clog2(B)'(B-1);
    else if (gap != '0) gap <= gap - 1'b1;

  cplx_t hin [B];
  always_comb
    for (int b = 0; b < B; b++) begin
      hin[b].re = DW'(h_re[b]);
      hin[b].im = DW'(h_im[b]);
    end

  // forward transform and serialisation
  cplx_t hb [B], hb_s, unused_d0 [B], unused_d1 [B];
  logic fft_v, hb_v, unused_v0, unused_v1;
  smul_fft #(.INV(1'b0)) u_fft (.clk(clk), .rst_n(rst_n), .in_valid(accept), .x(hin),
                                .out_valid(fft_v), .y(hb));
  vec_sreg u_sr_fft (.clk(clk), .rst_n(rst_n), .load(fft_v), .din(hb), .sin_valid(1'b0),
                     .sin('0), .sout(hb_s), .sout_valid(hb_v), .dout(unused_d0),
                     .dout_valid(unused_v0));

  // magnitude and angle
  logic pv;
  logic [MW-1:0] pmag;
  logic [ANGW-1:0] pang;
  cordic_vec u_cv (.clk(clk), .rst_n(rst_n), .in_valid(hb_v), .din(hb_s),
                   .out_valid(pv), .mag(pmag), .ang(pang));

  // threshold branch
  logic sdone, sbusy_unused;
  logic [MW-1:0] sa [B];
  logic [RW-1:0] sr [B];
  logic [RW+$clog2(B)-1:0] srsum;
  sort_unit u_sort (.clk(clk), .rst_n(rst_n), .in_valid(pv), .mag(pmag), .done(sdone),
                    .a(sa), .r(sr), .rsum(srsum));
  // each vector's noise variance travels with it: pushed on accept, used by the scan
  logic [NW-1:0] n0_v;
  logic n0_empty, n0_full;
  fifo_buffer #(.W(NW), .DEPTH(8)) u_n0q (
    .clk(clk), .rst_n(rst_n), .push(accept), .din(n0), .pop(sdone),
    .dout(n0_v), .empty(n0_empty), .full(n0_full));
  scan_unit u_scan (.clk(clk), .rst_n(rst_n), .start(sdone), .a_in(sa), .r_in(sr),
                    .rsum_in(srsum), .n0(n0_v), .tau_valid(tau_valid), .tau(tau),
                    .busy(sbusy_unused));

  // data branch
  logic pop, f_empty, f_full;
  logic [MW+ANGW-1:0] f_dout;
  logic [$clog2(B):0] popcnt;
  logic [MW-1:0] tau_q, thr;
  fifo_buffer #(.W(MW+ANGW), .DEPTH(4*B)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(pv), .din({pmag, pang}), .pop(pop),
    .dout(f_dout), .empty(f_empty), .full(f_full));

  assign pop = (popcnt != '0);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      popcnt <= '0;
      tau_q  <= '0;
    end else if (tau_valid) begin
      popcnt <= ($clog2(B)+1)'(B);
      tau_q  <= tau;
    end else if (pop) popcnt <= popcnt - 1'b1;

  soft_threshold u_thr (.a(f_dout[MW+ANGW-1:ANGW]), .tau(tau_q), .y(thr));

  // back to Cartesian, collect, inverse transform, serialise
  logic rv, col_v, ifft_v;
  cplx_t rdat, col [B], hs_vec [B], unused_d2 [B], unused_s;
  cordic_rot u_cr (.clk(clk), .rst_n(rst_n), .in_valid(pop), .mag(thr),
                   .ang(f_dout[ANGW-1:0]), .out_valid(rv), .dout(rdat));
  vec_sreg u_sr_col (.clk(clk), .rst_n(rst_n), .load(1'b0), .din(unused_d1),
                     .sin_valid(rv), .sin(rdat), .sout(unused_s), .sout_valid(unused_v1),
                     .dout(col), .dout_valid(col_v));
  smul_fft #(.INV(1'b1)) u_ifft (.clk(clk), .rst_n(rst_n), .in_valid(col_v), .x(col),
                                 .out_valid(ifft_v), .y(hs_vec));
  logic unused_v2;
  vec_sreg u_sr_out (.clk(clk), .rst_n(rst_n), .load(ifft_v), .din(hs_vec),
                     .sin_valid(1'b0), .sin('0), .sout(hs), .sout_valid(hs_valid),
                     .dout(unused_d2), .dout_valid(unused_v2));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        hs_idx <= '0;
    else if (ifft_v)   hs_idx <= '0;
    else if (hs_valid) hs_idx <= hs_idx + 1'b1;

  always_comb for (int b = 0; b < B; b++) unused_d1[b] = '0;

  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !f_empty);
  assert property (@(posedge clk) disable iff (!rst_n) sdone |-> !n0_empty);
endmodule
