// tb_ppac_row_alu: random popcounts and enables; the registered output must be
// 2*pop - N one cycle later, and exactly 0 whenever the row is muted.
module tb_ppac_row_alu;
  import ra_pkg::*;
  localparam int N = 2*B;
  logic clk = 0, en = 0;
  logic [$clog2(N+1)-1:0] pop = '0;
  logic signed [$clog2(N)+1:0] ip;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  ppac_row_alu #(.N(N)) dut (.clk(clk), .en(en), .pop(pop), .ip(ip));

  initial begin
    for (int n = 0; n < 500; n++) begin
      int p, e, expv;
      @(negedge clk);
      p = (n < 2) ? n * N : $urandom_range(0, N);
      e = (n % 7 == 3) ? 0 : 1;
      pop = 7'(p); en = e[0];
      expv = e ? 2 * p - N : 0;
      @(posedge clk); #1;
      checks++;
      if (int'(ip) != expv) begin
        failures++;
        if (failures < 10) $display("pop=%0d en=%0d got %0d exp %0d", p, e, ip, expv);
      end
    end
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
