// sar_adc_model: behavioural model of one sampling switch, its hold capacitor and
// the SAR ADC behind it (one of the four time-interleaved converters of an ADC
// channel). Analog part, modelled only at its ports.
//
// While the sampling clock sw is high the hold capacitor tracks vin; the value at
// the last rising clock edge with sw high is held. After that the converter
// resolves one bit per clock cycle, most significant bit first, as a SAR does:
// in the first cycle with sw low, bit_o is the MSB, then the next bit each cycle.
// Quantisation is mid-rise with q = 6 (res6 = 1) or q = 3 bits: the code is
// c = floor((v + 2^15) / 2^(16-q)), which stands for the odd value 2c - (2^q-1).
// Mid-rise quantisation, 3/6 bits and bit-serial MSB-first output follow the
// paper; the exact sample instant and the ideal (noise-free) comparator are
// modelling choices.
module sar_adc_model
  import ra_pkg::*;
(
  input  logic                 clk,
  input  logic                 sw,     // sampling clock of this converter
  input  logic                 res6,   // 1: 6-bit, 0: 3-bit conversion
  input  logic signed [AW-1:0] vin,    // PGA output
  output logic                 bit_o,  // current SAR decision
  output logic [5:0]           code_o  // whole held code, for observation
);
  logic [5:0] code;
  logic [2:0] idx;
  logic [AW:0] shifted;

  always_comb shifted = {1'b0, vin} + (AW+1)'(2**(AW-1));  // 0 .. 2^16-1

  always_ff @(posedge clk) begin
    if (sw) begin
      code <= res6 ? shifted[AW-1 -: 6] : {3'b000, shifted[AW-1 -: 3]};
      idx  <= res6 ? 3'd5 : 3'd2;
    end else if (idx != 3'd0) begin
      idx  <= idx - 3'd1;
    end
  end

  assign bit_o  = code[idx];
  assign code_o = code;
endmodule
