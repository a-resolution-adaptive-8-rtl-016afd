// tb_smul_fft: random complex vectors through the forward (full scale) and the
// inverse (scaled by 1/32) transform, compared with a floating-point DFT/IDFT
// computed here; the error must stay within a few LSBs of fixed-point rounding.
// Also checks the 5-cycle latency and that a new vector is accepted every cycle.
module tb_smul_fft;
  import ra_pkg::*;
  logic clk = 0, rst_n = 0, iv = 0, ov_f, ov_i;
  cplx_t x [B], yf [B], yi [B];
  int checks = 0, failures = 0;
  real maxerr_f = 0.0, maxerr_i = 0.0;

  always #5 clk = ~clk;
  smul_fft #(.INV(1'b0)) dut_f (.clk(clk), .rst_n(rst_n), .in_valid(iv), .x(x), .out_valid(ov_f), .y(yf));
  smul_fft #(.INV(1'b1)) dut_i (.clk(clk), .rst_n(rst_n), .in_valid(iv), .x(x), .out_valid(ov_i), .y(yi));

  localparam real PI = 3.14159265358979;
  int xr [$], xim [$];   // queued inputs, B per vector
  int vcnt = 0, ocnt = 0, cyc = 0, incyc [$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    #1;
    if (ov_f != ov_i) failures++;
    if (ov_f) begin
      int ar [B], ai [B], lc;
      lc = incyc.pop_front();
      checks++;
      if (cyc - lc != 5) begin failures++; $display("latency %0d", cyc - lc); end
      for (int b = 0; b < B; b++) begin ar[b] = xr.pop_front(); ai[b] = xim.pop_front(); end
      for (int k = 0; k < B; k++) begin
        real fr, fi, ir, ii, ef, ei;
        fr = 0; fi = 0; ir = 0; ii = 0;
        for (int b = 0; b < B; b++) begin
          real c, s;
          c = $cos(2.0 * PI * b * k / B);
          s = $sin(2.0 * PI * b * k / B);
          fr += ar[b] * c + ai[b] * s;
          fi += ai[b] * c - ar[b] * s;
          ir += (ar[b] * c - ai[b] * s) / B;
          ii += (ai[b] * c + ar[b] * s) / B;
        end
        ef = (fr - yf[k].re) ** 2 + (fi - yf[k].im) ** 2;
        ei = (ir - yi[k].re) ** 2 + (ii - yi[k].im) ** 2;
        if (ef > maxerr_f) maxerr_f = ef;
        if (ei > maxerr_i) maxerr_i = ei;
        checks += 2;
        if (ef > 12.0 * 12.0) begin failures++; if (failures < 10) $display("fwd k=%0d err %f", k, $sqrt(ef)); end
        if (ei > 4.0 * 4.0)   begin failures++; if (failures < 10) $display("inv k=%0d err %f", k, $sqrt(ei)); end
      end
      ocnt++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      for (int b = 0; b < B; b++) begin
        int r, i;
        if (n == 0)      begin r = (b == 0) ? 510 : 0; i = 0; end          // impulse
        else if (n == 1) begin r = 510; i = -510; end                      // constant
        else if (n < 30) begin
          // sparse: one beam plus small noise
          r = int'(300.0 * $cos(2.0 * PI * b * (n % B) / B)) + $urandom_range(0, 20) - 10;
          i = int'(300.0 * $sin(2.0 * PI * b * (n % B) / B)) + $urandom_range(0, 20) - 10;
        end else begin r = $urandom_range(0, 1020) - 510; i = $urandom_range(0, 1020) - 510; end
        x[b].re = DW'(r); x[b].im = DW'(i);
        xr.push_back(r); xim.push_back(i);
      end
      iv = (n % 5 != 4);        // mostly back to back
      if (!iv) repeat (B) begin void'(xr.pop_back()); void'(xim.pop_back()); end
      else incyc.push_back(cyc);
      if (iv) vcnt++;
    end
    @(negedge clk); iv = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (ocnt != vcnt) begin failures++; $display("vectors in %0d out %0d", vcnt, ocnt); end
    $display("max error fwd %f inv %f", $sqrt(maxerr_f), $sqrt(maxerr_i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
