// tb_adc_channel: drives one ADC channel with the interleaved sampling clocks of
// both resolutions and an input that changes every cycle, and checks that
// converter k resolves the PGA-amplified (and clipped) value present at the last
// clock edge of its own sampling window, MSB first, in the q cycles after it.
module tb_adc_channel;
  import ra_pkg::*;
  logic clk = 0, res6 = 1;
  logic signed [AW-1:0] vin = '0;
  logic [2:0] gain = '0;
  logic [NINST-1:0] sw = '0, zbit;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  adc_channel dut (.clk(clk), .vin(vin), .gain(gain), .res6(res6), .sw(sw), .zbit(zbit));

  function automatic int ref_code(int v, int g, int q);
    longint t;
    t = longint'(v) * (1 << g);
    if (t > 32767) t = 32767;
    if (t < -32768) t = -32768;
    return (int'(t) + 32768) >> (16 - q);
  endfunction

  initial begin
    for (int rep = 0; rep < 40; rep++) begin
      int s, q, p, held [NINST], j [NINST];
      res6 = rep[0];
      gain = 3'(rep % 6);
      s = res6 ? 2 : 1; q = 3 * s; p = 4 * s;
      for (int k = 0; k < NINST; k++) j[k] = 99;
      for (int t = 0; t < 6 * p; t++) begin
        int c;
        c = t % p;
        @(negedge clk);
        // check the current cycle's bits
        for (int k = 0; k < NINST; k++)
          if (!sw[k] && j[k] < q) begin
            checks++;
            if (zbit[k] != held[k][q - 1 - j[k]]) begin
              failures++;
              if (failures < 10) $display("rep %0d t %0d conv %0d bit %0d", rep, t, k, q-1-j[k]);
            end
          end
        // inputs of the next cycle
        for (int k = 0; k < NINST; k++) sw[k] = (c >= k*s) && (c < k*s + s);
        vin = AW'($signed(16'($urandom)) >>> $urandom_range(0, 5));
        @(posedge clk);
        for (int k = 0; k < NINST; k++)
          if (sw[k]) begin held[k] = ref_code(int'(vin), int'(gain), q); j[k] = 0; end
          else if (j[k] < 99) j[k]++;
      end
      @(negedge clk);
      sw = '0;
      @(posedge clk);
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
