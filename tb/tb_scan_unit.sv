// tb_scan_unit: feeds sorted magnitude vectors (sparse beams over noise, flat
// noise, all equal, zeros) with their reciprocals and checks tau* against a
// reference SURE minimisation written here with its own loop over all B+1
// candidates (exact integer arithmetic, same 2^16 reciprocal scaling), together
// with a floating-point SURE check that the chosen threshold is within 0.1% of
// the best real-valued risk. Starts come every B cycles, as in the engine; every
// tau_valid must come B cycles after its start.
module tb_scan_unit;
  import ra_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, tau_valid, busy;
  logic [MW-1:0] a_in [B], tau;
  logic [RW-1:0] r_in [B];
  logic [RW+$clog2(B)-1:0] rsum_in = '0;
  logic [NW-1:0] n0 = '0;
  int checks = 0, failures = 0, cyc = 0;
  int expq [$], startq [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  scan_unit dut (.clk(clk), .rst_n(rst_n), .start(start), .a_in(a_in), .r_in(r_in),
                 .rsum_in(rsum_in), .n0(n0), .tau_valid(tau_valid), .tau(tau), .busy(busy));

  function automatic int ref_tau(int av [B], longint n0v, output real rel);
    logic signed [CW-1:0] best, c, psq, ps_r, tot;
    int bt, rr [B];
    real fbest, fsel, fc;
    tot = 0;
    for (int j = 0; j < B; j++) begin rr[j] = 65536 / ((av[j] == 0) ? 1 : av[j]); tot += rr[j]; end
    best = CW'(n0v) * CW'(2 * B) * 65536;
    bt = 0;
    fbest = 2.0 * B * n0v; fsel = fbest;
    for (int k = 1; k <= B; k++) begin
      psq = 0; ps_r = 0;
      for (int j = 0; j < k; j++) begin psq += CW'(av[j]) * CW'(av[j]); ps_r += rr[j]; end
      c = (psq + CW'(B - k) * CW'(av[k-1]) * CW'(av[k-1])) * 65536
          + CW'(n0v) * CW'(2 * (B - k)) * 65536 - CW'(n0v) * CW'(av[k-1]) * (tot - ps_r);
      if (c < best) begin best = c; bt = av[k-1]; end
      // floating-point SURE at the same candidate
      fc = 0.0;
      for (int j = 0; j < B; j++)
        if (av[j] <= av[k-1]) fc += real'(av[j]) ** 2;
        else fc += real'(av[k-1]) ** 2 + n0v * (2.0 - real'(av[k-1]) / av[j]);
      if (fc < fbest) fbest = fc;
    end
    // risk of the chosen threshold
    fsel = 0.0;
    for (int j = 0; j < B; j++)
      if (av[j] <= bt) fsel += real'(av[j]) ** 2;
      else fsel += real'(bt) ** 2 + n0v * (2.0 - ((bt == 0) ? 0.0 : real'(bt) / av[j]));
    rel = (fsel - fbest) / ((fbest > 1.0) ? fbest : 1.0);
    return bt;
  endfunction

  always @(posedge clk) begin
    #1;
    if (tau_valid) begin
      int e, s;
      e = expq.pop_front();
      s = startq.pop_front();
      checks += 2;
      if (int'(tau) != e) begin failures++; if (failures < 10) $display("tau %0d exp %0d", tau, e); end
      if (cyc - s != B + 1) begin failures++; $display("latency %0d", cyc - s); end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      int av [B], tv;
      longint n0v;
      real rel;
      n0v = (n % 4 == 0) ? 0 : $urandom_range(1000, 4000000);
      for (int b = 0; b < B; b++) begin
        case (n % 5)
          0, 1: av[b] = $urandom_range(0, 3000) + ((b < 3) ? 40000 : 0);   // sparse
          2:    av[b] = $urandom_range(0, 3000);                           // noise only
          3:    av[b] = 1234;                                              // all equal
          default: av[b] = (b < 8) ? 0 : $urandom_range(0, (1 << MW) - 1);
        endcase
      end
      av.sort();
      tv = ref_tau(av, n0v, rel);
      checks++;
      if (rel > 1.0e-3) begin failures++; $display("n=%0d SURE excess %f", n, rel); end
      rsum_in = '0;
      for (int b = 0; b < B; b++) begin
        a_in[b] = MW'(av[b]);
        r_in[b] = RW'(65536 / ((av[b] == 0) ? 1 : av[b]));
        rsum_in += (RW+$clog2(B))'(r_in[b]);
      end
      n0 = NW'(n0v);
      start = 1;
      expq.push_back(tv);
      startq.push_back(cyc);
      @(negedge clk);
      start = 0;
      for (int b = 0; b < B; b++) begin a_in[b] = '1; r_in[b] = '1; end
      repeat (B - 1) @(negedge clk);
    end
    repeat (B + 4) @(negedge clk);
    checks++;
    if (expq.size() != 0) failures++;
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
