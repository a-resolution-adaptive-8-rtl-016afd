// tb_cordic_vec: random points in all four quadrants (and on the axes) streamed
// one per cycle; the magnitude must be K*|h| and the angle atan2(im, re) (in
// 2^-16 turns) within the CORDIC's resolution, after exactly 15 cycles.
module tb_cordic_vec;
  import ra_pkg::*;
  logic clk = 0, rst_n = 0, iv = 0, ov;
  cplx_t din;
  logic [MW-1:0] mag;
  logic [ANGW-1:0] ang;
  int checks = 0, failures = 0, cyc = 0;
  localparam real PI = 3.14159265358979;
  localparam real K = 1.6467602540312922;
  int qr [$], qi [$], qc [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  cordic_vec dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .din(din), .out_valid(ov), .mag(mag), .ang(ang));

  always @(posedge clk) begin
    #1;
    if (ov) begin
      int r, i, c;
      real m, a, da;
      r = qr.pop_front(); i = qi.pop_front(); c = qc.pop_front();
      m = K * $sqrt(real'(r) * r + real'(i) * i);
      a = $atan2(real'(i), real'(r)) / (2.0 * PI) * 65536.0;
      da = real'($signed(ang)) - a;
      if (da > 32768.0) da -= 65536.0;
      if (da < -32768.0) da += 65536.0;
      checks += 3;
      if (cyc - c != 15) failures++;
      if ((real'(mag) - m) > 4.0 || (real'(mag) - m) < -4.0) begin
        failures++; if (failures < 10) $display("(%0d,%0d) mag %0d exp %f", r, i, mag, m);
      end
      if (m > 200.0 && (da > 8.0 || da < -8.0)) begin
        failures++; if (failures < 10) $display("(%0d,%0d) ang %0d exp %f", r, i, $signed(ang), a);
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int r, i;
      @(negedge clk);
      case (n)
        0: begin r = 1000; i = 0; end
        1: begin r = -1000; i = 0; end
        2: begin r = 0; i = 1000; end
        3: begin r = 0; i = -1000; end
        4: begin r = -32768; i = -32768; end
        5: begin r = 32767; i = 32767; end
        default: begin r = $signed(16'($urandom)); i = $signed(16'($urandom)); end
      endcase
      din.re = DW'(r); din.im = DW'(i);
      iv = (n % 11 != 5);
      if (iv) begin qr.push_back(r); qi.push_back(i); qc.push_back(cyc); end
    end
    @(negedge clk); iv = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (qr.size() != 0) failures++;
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
