// tb_cordic_rot: random magnitudes and angles (all quadrants, axes) streamed one
// per cycle; the output must be (mag/K) * (cos, sin)(angle), i.e. the value that
// undoes the gain K left in by the vectoring CORDIC, within a few LSBs plus the angle resolution of 14 iterations, after
// exactly 16 cycles; large values saturate to the data word.
module tb_cordic_rot;
  import ra_pkg::*;
  logic clk = 0, rst_n = 0, iv = 0, ov;
  logic [MW-1:0] mag = '0;
  logic [ANGW-1:0] ang = '0;
  cplx_t dout;
  int checks = 0, failures = 0, cyc = 0;
  localparam real PI = 3.14159265358979;
  localparam real K = 1.6467602540312922;
  int qm [$], qa [$], qc [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  cordic_rot dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .mag(mag), .ang(ang), .out_valid(ov), .dout(dout));

  function automatic real sat(real v);
    if (v > 32767.0) return 32767.0;
    if (v < -32768.0) return -32768.0;
    return v;
  endfunction

  always @(posedge clk) begin
    #1;
    if (ov) begin
      int m, a, c, gr, gi;
      real er, ei, th, tol;
      gr = int'(dout.re); gi = int'(dout.im);
      m = qm.pop_front(); a = qa.pop_front(); c = qc.pop_front();
      th = real'(a) / 65536.0 * 2.0 * PI;
      er = sat(real'(m) / K * $cos(th));
      ei = sat(real'(m) / K * $sin(th));
      checks += 3;
      if (cyc - c != 16) failures++;
      // angle resolution of 14 iterations: about 4e-4 rad worst case
      tol = 3.0 + 4.0e-4 * real'(m) / K;
      if ((gr - er) > tol || (gr - er) < -tol || (gi - ei) > tol || (gi - ei) < -tol) begin
        failures += 2;
        if (failures < 10) $display("m=%0d a=%0d got (%0d,%0d) exp (%f,%f)", m, a, gr, gi, er, ei);
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int m, a;
      @(negedge clk);
      m = (n < 8) ? 30000 : (n < 12) ? 0 : $urandom_range(0, (n % 3 == 0) ? 70000 : 40000);
      a = (n < 8) ? n * 8192 : $urandom_range(0, 65535);
      mag = MW'(m); ang = ANGW'(a);
      iv = (n % 13 != 7);
      if (iv) begin qm.push_back(m); qa.push_back(a); qc.push_back(cyc); end
    end
    @(negedge clk); iv = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (qm.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
