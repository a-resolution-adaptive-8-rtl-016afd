// ra_receiver: the resolution-adaptive all-digital mmWave massive MU-MIMO
// receiver, B = 32 antennas, up to U = 16 UEs.
//
// The I and Q voltages of the 32 antennas enter 2B = 64 ADC channels (behavioural
// models of the PGA and of four time-interleaved SAR converters each). Converter
// phase k of every channel feeds PPAC instance k one bit per cycle, MSB first,
// so the four PPAC instances of the spatial equalizer compute X^H z for four
// consecutive samples while the converters resolve them. ti_ctrl drives the
// sampling clocks and marks the bit cycles. Resolution is set at run time:
//   res6 = 1: 6-bit samples, 8 cycles per sample per instance (2 sampling)
//   res6 = 0: 3-bit samples, 4 cycles per sample per instance (1 sampling)
//   xres = 1..4: bits per X^H entry (unused PPAC rows are muted)
// A test source (zsrc_ext = 1) replaces the ADC bits by external bit-planes with
// their own framing, for z resolutions of up to 8 bits (ext_q).
// For channel estimation, chest_capture takes one sample of instance cap_inst
// during a pilot, forms the LS estimate, and the BEACHES engine denoises it and
// streams out h*.
//
// z bit-plane order in each instance: [I of antenna 0..31, Q of antenna 0..31].
// X^H is written per PE (2u: real part of UE u, 2u+1: imaginary part) and per
// bit-plane row; see ppac_instance for the data layout. eq_result[i][p] is valid
// when eq_valid[i] pulses, two cycles after instance i's last bit-plane.
// The on-chip test SRAM and the chip's pads/configuration interface are not part
// of this RTL: configuration, X writes and results are plain ports.
module ra_receiver
  import ra_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  logic                     run,
  input  logic                     res6,
  input  logic [2:0]               pga_gain,
  input  logic [2:0]               xres,
  // baseband inputs (+-2^15 = ADC full scale)
  input  logic signed [AW-1:0]     y_re [B],
  input  logic signed [AW-1:0]     y_im [B],
  // external bit-serial z source
  input  logic                     zsrc_ext,
  input  logic [3:0]               ext_q,
  input  logic [2*B-1:0]           ext_z      [NINST],
  input  logic [NINST-1:0]         ext_bvalid,
  input  logic [NINST-1:0]         ext_bfirst,
  input  logic [NINST-1:0]         ext_blast,
  // equalization matrix write port
  input  logic                     x_we,
  input  logic [$clog2(2*U)-1:0]   x_pe,
  input  logic [1:0]               x_row,
  input  logic [2*B/CG-1:0]        x_mask,
  input  logic [2*B-1:0]           x_data,
  // equalizer outputs
  output logic signed [ACCW-1:0]   eq_result [NINST][2*U],
  output logic [NINST-1:0]         eq_valid,
  // channel estimation
  input  logic                     cap_req,
  input  logic [1:0]               cap_inst,
  input  logic [1:0]               pilot,
  input  logic [NW-1:0]            n0,
  output logic                     cap_busy,
  output logic                     hs_valid,
  output cplx_t                    hs,
  output logic [$clog2(B)-1:0]     hs_idx,
  output logic                     tau_valid,
  output logic [MW-1:0]            tau
);
  // sampling control
  logic [NINST-1:0] sw, a_bvalid, a_bfirst, a_blast;
  ti_ctrl u_ctrl (.clk(clk), .rst_n(rst_n), .run(run), .res6(res6), .sw(sw),
                  .bvalid(a_bvalid), .bfirst(a_bfirst), .blast(a_blast));

  // ADC array: channel c < B is I of antenna c, channel B+c is Q of antenna c
  logic [NINST-1:0] zbit [2*B];
  for (genvar c = 0; c < 2*B; c++) begin : g_adc
    adc_channel u_adc (.clk(clk), .vin((c < B) ? y_re[c % B] : y_im[c % B]),
                       .gain(pga_gain), .res6(res6), .sw(sw), .zbit(zbit[c]));
  end

  // z source selection
  logic [2*B-1:0] z [NINST];
  logic [NINST-1:0] bvalid, bfirst, blast;
  always_comb begin
    for (int k = 0; k < NINST; k++)
      for (int c = 0; c < 2*B; c++)
        z[k][c] = zsrc_ext ? ext_z[k][c] : zbit[c][k];
    bvalid = zsrc_ext ? ext_bvalid : a_bvalid;
    bfirst = zsrc_ext ? ext_bfirst : a_bfirst;
    blast  = zsrc_ext ? ext_blast  : a_blast;
  end

  spatial_equalizer u_eq (
    .clk(clk), .rst_n(rst_n), .xres(xres), .we(x_we), .wpe(x_pe), .wrow(x_row),
    .wmask(x_mask), .wdata(x_data), .z(z), .bvalid(bvalid), .bfirst(bfirst),
    .blast(blast), .result(eq_result), .out_valid(eq_valid));

  // channel estimation
  logic [3:0] q;
  logic signed [HW-1:0] h_re [B], h_im [B];
  logic h_valid, bx_ready;
  assign q = zsrc_ext ? ext_q : (res6 ? 4'd6 : 4'd3);

  chest_capture u_cap (
    .clk(clk), .rst_n(rst_n), .q(q), .cap_req(cap_req), .cap_inst(cap_inst),
    .pilot(pilot), .z(z), .bvalid(bvalid), .bfirst(bfirst), .blast(blast),
    .h_re(h_re), .h_im(h_im), .h_valid(h_valid), .busy(cap_busy));

  beaches u_bx (
    .clk(clk), .rst_n(rst_n), .in_valid(h_valid), .in_ready(bx_ready),
    .h_re(h_re), .h_im(h_im), .n0(n0), .hs_valid(hs_valid), .hs(hs),
    .hs_idx(hs_idx), .tau_valid(tau_valid), .tau(tau));

  // captures are paced by the pilot rate; the engine must be free for each one
  assert property (@(posedge clk) disable iff (!rst_n) h_valid |-> bx_ready);
endmodule
