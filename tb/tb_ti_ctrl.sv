// tb_ti_ctrl: runs the sampling controller in 6-bit and 3-bit mode and checks,
// cycle by cycle, the sampling clocks (sw[k] high in cycles k*S..k*S+S-1 of each
// P-cycle frame, never two at once) and the framing of every PPAC instance (q
// valid cycles right after its sampling window, first = MSB cycle, last = LSB
// cycle, nothing before the first sample). It also counts one sample per
// instance every P cycles (P = 8 and 4).
module tb_ti_ctrl;
  import ra_pkg::*;
  logic clk = 0, rst_n = 0, run = 0, res6 = 1;
  logic [NINST-1:0] sw, bvalid, bfirst, blast;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  ti_ctrl dut (.clk(clk), .rst_n(rst_n), .run(run), .res6(res6), .sw(sw),
               .bvalid(bvalid), .bfirst(bfirst), .blast(blast));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("%t FAIL %s", $time, what);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int mode = 1; mode >= 0; mode--) begin
      int s, q, p, nlast [NINST];
      res6 = mode[0];
      s = res6 ? 2 : 1; q = 3 * s; p = 4 * s;
      run = 0;
      repeat (3) @(negedge clk);
      run = 1;
      for (int k = 0; k < NINST; k++) nlast[k] = 0;
      // the frame starts in the first cycle with run = 1
      @(posedge clk); #1;
      for (int t = 0; t < 20 * p; t++) begin
        int c;
        c = t % p;
        for (int k = 0; k < NINST; k++) begin
          int off;
          bit exp_sw, exp_v;
          exp_sw = (c >= k*s) && (c < k*s + s);
          off = (c - k*s - s + 2*p) % p;
          exp_v  = (t >= k*s + s) && !exp_sw && (off < q);
          chk(sw[k] == exp_sw, $sformatf("sw[%0d] t=%0d", k, t));
          chk(bvalid[k] == exp_v, $sformatf("bvalid[%0d] t=%0d", k, t));
          chk(bfirst[k] == (exp_v && off == 0), $sformatf("bfirst[%0d] t=%0d", k, t));
          chk(blast[k] == (exp_v && off == q - 1), $sformatf("blast[%0d] t=%0d", k, t));
          if (blast[k]) nlast[k]++;
        end
        chk($onehot0(sw), "sw overlap");
        @(posedge clk); #1;
      end
      for (int k = 0; k < NINST; k++)
        chk(nlast[k] >= 19 && nlast[k] <= 20, $sformatf("rate of instance %0d: %0d samples", k, nlast[k]));
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
