// tb_ppac_row: writes random contents into one PPAC row (whole-row writes and
// writes with random clock-gate group masks, tracked by a reference copy), then
// applies random z bit-planes and checks that one cycle later the row reports
// sum_i (+-1 of x_i) * (+-1 of z_i), or 0 when the row is muted.
module tb_ppac_row;
  import ra_pkg::*;
  localparam int N = 2*B;
  logic clk = 0, we = 0, en = 0;
  logic [N/CG-1:0] wmask = '0;
  logic [N-1:0] wdata = '0, z = '0, xbits, xref;
  logic signed [$clog2(N)+1:0] ip;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  ppac_row #(.N(N)) dut (.clk(clk), .we(we), .wmask(wmask), .wdata(wdata), .z(z),
                         .en(en), .ip(ip), .xbits(xbits));

  initial begin
    // full write first
    @(negedge clk);
    we = 1; wmask = '1; wdata = {$urandom, $urandom}; xref = wdata;
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 600; n++) begin
      int expv;
      @(negedge clk);
      if (n % 5 == 0) begin
        we = 1; wmask = (N/CG)'($urandom); wdata = {$urandom, $urandom};
        for (int g = 0; g < N/CG; g++) if (wmask[g]) xref[CG*g +: CG] = wdata[CG*g +: CG];
        @(negedge clk);
        we = 0;
        checks++;
        if (xbits !== xref) failures++;
      end
      z  = (n == 1) ? xref : (n == 2) ? ~xref : {$urandom, $urandom};
      en = (n % 9 != 4);
      expv = 0;
      for (int i = 0; i < N; i++) expv += (xref[i] == z[i]) ? 1 : -1;
      if (!en) expv = 0;
      @(posedge clk); #1;
      checks++;
      if (int'(ip) != expv) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d exp %0d", n, ip, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
