// tb_sar_adc_model: drives the sampling switch of one SAR model with the 3-bit
// (1 sampling cycle) and 6-bit (2 sampling cycles) patterns, and checks that the
// bits that follow are the mid-rise code of the held input, MSB first, one per
// cycle, and that the input changing after the sampling window has no effect.
module tb_sar_adc_model;
  import ra_pkg::*;
  logic clk = 0, sw = 0, res6 = 0, bit_o;
  logic signed [AW-1:0] vin = '0;
  logic [5:0] code_o;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  sar_adc_model dut (.clk(clk), .sw(sw), .res6(res6), .vin(vin), .bit_o(bit_o), .code_o(code_o));

  function automatic int ref_code(int v, int q);
    return (v + 32768) >> (16 - q);
  endfunction

  initial begin
    for (int n = 0; n < 400; n++) begin
      int q, s, v, c;
      res6 = n[0];
      q = res6 ? 6 : 3;
      s = res6 ? 2 : 1;
      v = $signed(16'($urandom));
      if (n == 2) v = 32767;
      if (n == 3) v = -32768;
      @(negedge clk);
      sw = 1; vin = AW'(v);
      repeat (s) @(negedge clk);
      sw = 0; vin = AW'($urandom);        // must not disturb the held sample
      c = ref_code(v, q);
      for (int i = q - 1; i >= 0; i--) begin
        checks++;
        if (bit_o != c[i]) begin
          failures++;
          if (failures < 10) $display("v=%0d q=%0d bit %0d got %0b", v, q, i, bit_o);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
