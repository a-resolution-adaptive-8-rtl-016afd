// adc_channel: behavioural model of one of the 2B = 64 ADC channels (the I or Q
// part of one antenna): a PGA followed by four time-interleaved SAR ADCs whose
// sampling switches are driven by the non-overlapping clocks sw[0..3]. Converter
// k feeds PPAC instance k, one bit per clock cycle (see sar_adc_model). The
// structure (PGA, four TI-SAR converters, one per PPAC instance) is the chip's;
// everything is an ideal model of analog circuitry.
module adc_channel
  import ra_pkg::*;
(
  input  logic                 clk,
  input  logic signed [AW-1:0] vin,          // baseband voltage of this channel
  input  logic        [2:0]    gain,         // PGA gain, log2, 0..5
  input  logic                 res6,         // 1: 6-bit, 0: 3-bit
  input  logic [NINST-1:0]     sw,           // sampling clocks
  output logic [NINST-1:0]     zbit          // one SAR decision per converter
);
  logic signed [AW-1:0] vamp;
  logic [5:0] code_unused [NINST];

  pga_model u_pga (.vin(vin), .gain(gain), .vout(vamp));

  for (genvar k = 0; k < NINST; k++) begin : g_sar
    sar_adc_model u_sar (.clk(clk), .sw(sw[k]), .res6(res6), .vin(vamp),
                         .bit_o(zbit[k]), .code_o(code_unused[k]));
  end
endmodule
