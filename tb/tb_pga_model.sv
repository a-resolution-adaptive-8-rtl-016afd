// tb_pga_model: checks the PGA model's gain and clipping against an integer
// reference, for all six gain settings and random plus edge-case inputs.
module tb_pga_model;
  import ra_pkg::*;
  logic signed [AW-1:0] vin, vout;
  logic [2:0] gain;
  int checks = 0, failures = 0;

  pga_model dut (.vin(vin), .gain(gain), .vout(vout));

  function automatic int ref_out(int v, int g);
    longint t;
    t = longint'(v) * (1 << g);
    if (t > 32767) t = 32767;
    if (t < -32768) t = -32768;
    return int'(t);
  endfunction

  initial begin
    for (int g = 0; g < 6; g++) begin
      for (int n = 0; n < 300; n++) begin
        int v;
        v = (n < 4) ? ((n == 0) ? 32767 : (n == 1) ? -32768 : (n == 2) ? 0 : -1)
                    : $signed(16'($urandom)) >>> $urandom_range(0, 6);
        vin = AW'(v); gain = 3'(g);
        #1;
        checks++;
        if (int'(vout) != ref_out(v, g)) begin
          failures++;
          if (failures < 10) $display("mismatch g=%0d v=%0d got %0d exp %0d", g, v, vout, ref_out(v, g));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
