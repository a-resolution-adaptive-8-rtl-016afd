// tb_vec_sreg: parallel-to-serial (load, then B entries in order, reloading right
// as the last entry shows) and serial-to-parallel (B entries in, with gaps, then a
// one-cycle dout_valid with the vector in arrival order) on two instances.
module tb_vec_sreg;
  import ra_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load = 0, sv = 0, so_v, dv, so_v2, dv2;
  cplx_t din [B], sin, so, dout [B], so2, dout2 [B];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  vec_sreg p2s (.clk(clk), .rst_n(rst_n), .load(load), .din(din), .sin_valid(1'b0), .sin('0),
                .sout(so), .sout_valid(so_v), .dout(dout), .dout_valid(dv));
  vec_sreg s2p (.clk(clk), .rst_n(rst_n), .load(1'b0), .din(din), .sin_valid(sv), .sin(sin),
                .sout(so2), .sout_valid(so_v2), .dout(dout2), .dout_valid(dv2));

  initial begin
    cplx_t v [B];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // parallel to serial, three vectors back to back
    for (int n = 0; n < 3; n++) begin
      for (int b = 0; b < B; b++) begin v[b].re = DW'($urandom); v[b].im = DW'($urandom); end
      din = v; load = 1;
      @(negedge clk); load = 0;
      for (int b = 0; b < B; b++) begin
        checks++;
        if (!so_v || so != v[b]) begin failures++; if (failures < 10) $display("p2s n=%0d b=%0d", n, b); end
        if (b < B - 1) @(negedge clk);
      end
    end
    @(negedge clk);
    checks++;
    if (so_v) failures++;
    // serial to parallel with gaps
    for (int n = 0; n < 3; n++) begin
      for (int b = 0; b < B; b++) begin
        v[b].re = DW'($urandom); v[b].im = DW'($urandom);
        sin = v[b]; sv = 1;
        @(negedge clk);
        sv = 0;
        if (b % 7 == 3 && b < B - 1) @(negedge clk);
        checks++;
        if (b < B - 1 && dv2) failures++;
      end
      checks++;
      if (!dv2 || dout2 != v) begin failures++; $display("s2p n=%0d", n); end
      checks++;
      if (so_v2) failures++;
    end
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
