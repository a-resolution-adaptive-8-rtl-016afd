// tb_soft_threshold: random and edge-case magnitude/threshold pairs; the output
// must be max(a - tau, 0).
module tb_soft_threshold;
  import ra_pkg::*;
  logic [MW-1:0] a, tau, y;
  int checks = 0, failures = 0;
  soft_threshold dut (.a(a), .tau(tau), .y(y));
  initial begin
    for (int n = 0; n < 3000; n++) begin
      int av, tv, ev;
      av = (n < 3) ? 0 : (n < 6) ? (1 << MW) - 1 : $urandom_range(0, (1 << MW) - 1);
      tv = (n % 3 == 0) ? av : (n % 3 == 1) ? $urandom_range(0, (1 << MW) - 1) : $urandom_range(0, av);
      a = MW'(av); tau = MW'(tv);
      #1;
      ev = (av > tv) ? av - tv : 0;
      checks++;
      if (int'(y) != ev) begin failures++; if (failures < 10) $display("a=%0d tau=%0d y=%0d", av, tv, y); end
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
