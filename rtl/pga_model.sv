// pga_model: behavioural model of the two-stage programmable gain amplifier that
// heads every ADC channel (a transconductance stage with switchable cells, then a
// fixed-gain inverter amplifier). This is an analog block; the model only gives
// its transfer function: out = in * 2^gain, gain = 0..5 (1x to 32x in powers of
// two as on the chip), clipped at the +-2^15 full scale of the following ADC.
// The "analog" voltages are carried as signed 16-bit words where +-2^15 is the
// ADC full scale; that representation, the ideal gain and the hard clipping are
// modelling choices. Combinational, no clock.
module pga_model
  import ra_pkg::*;
(
  input  logic signed [AW-1:0] vin,   // baseband input voltage
  input  logic        [2:0]    gain,  // log2 of the gain, 0..5 (6, 7 act as 5)
  output logic signed [AW-1:0] vout   // amplified, clipped voltage
);
  logic signed [AW+5:0] amp;
  logic [2:0] g;

  always_comb begin
    g    = (gain > 3'd5) ? 3'd5 : gain;
    amp  = {{6{vin[AW-1]}}, vin} <<< g;
    if (amp > $signed((AW+6)'(2**(AW-1) - 1)))
      vout = AW'(2**(AW-1) - 1);
    else if (amp < -$signed((AW+6)'(2**(AW-1))))
      vout = {1'b1, {(AW-1){1'b0}}};
    else
      vout = amp[AW-1:0];
  end
endmodule
