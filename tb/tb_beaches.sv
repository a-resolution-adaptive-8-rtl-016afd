// tb_beaches: end-to-end test of the BEACHES denoiser. Sparse mmWave-like channel
// vectors (1-3 plane waves across the 32-antenna array, on and off the DFT grid)
// plus Gaussian noise are fed back to back at the full rate, along with a few
// noise-only and all-zero vectors. Checks:
//  - one accepted vector every B cycles and one tau per vector;
//  - a steady output stream: B entries per vector, hs_idx 0..B-1, constant latency;
//  - tau is 0 or one of the beamspace magnitudes (floating-point K*|FFT(h)|, within
//    the CORDIC error), and its SURE risk is within 2% (or 2 noise units) of the
//    best candidate in a floating-point SURE search;
//  - each output entry matches IFFT(softthreshold(FFT(h), tau/K)) in floating point;
//  - over the sparse vectors the denoised output is closer to the noiseless channel
//    than the noisy input (lower total squared error).
module tb_beaches;
  import ra_pkg::*;
  localparam real K = 1.6467602540312922;
  localparam real PI = 3.14159265358979323846;
  localparam int NV = 40;
  logic clk = 0, rst_n = 0, iv = 0, in_ready, hs_valid, tau_valid;
  logic signed [HW-1:0] h_re [B], h_im [B];
  logic [NW-1:0] n0 = '0;
  cplx_t hs;
  logic [$clog2(B)-1:0] hs_idx;
  logic [MW-1:0] tau;
  int checks = 0, failures = 0, cyc = 0;
  int xr [NV][B], xi [NV][B];           // noisy integer inputs
  real cr [NV][B], ci [NV][B];          // noiseless channel
  real br [NV][B], bi [NV][B];          // float beamspace of the noisy input
  real n0f [NV];
  int acc_cyc [NV], tau_got [NV];
  int nacc = 0, ntau = 0, nout = 0, first_out = -1, lat0 = -1;
  real err_in = 0.0, err_out = 0.0, maxdev = 0.0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  beaches dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .in_ready(in_ready), .h_re(h_re),
               .h_im(h_im), .n0(n0), .hs_valid(hs_valid), .hs(hs), .hs_idx(hs_idx),
               .tau_valid(tau_valid), .tau(tau));

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000001.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  function automatic real sure(int v, real t);
    real s, m;
    s = 0.0;
    for (int k = 0; k < B; k++) begin
      m = K * $sqrt(br[v][k] ** 2 + bi[v][k] ** 2);
      if (m <= t) s += m * m;
      else s += t * t + n0f[v] * (2.0 - t / m);
    end
    return s;
  endfunction

  initial begin
    for (int v = 0; v < NV; v++) begin
      int np;
      real sig;
      np = (v % 7 == 5) ? 0 : 1 + (v % 3);
      sig = (v % 7 == 6) ? 0.0 : (v % 2 == 0) ? 12.0 : 30.0;
      for (int b = 0; b < B; b++) begin cr[v][b] = 0.0; ci[v][b] = 0.0; end
      for (int p = 0; p < np; p++) begin
        real f, amp, ph;
        f = (v % 4 == 0) ? real'($urandom_range(0, B - 1)) : real'($urandom_range(0, 3199)) / 100.0;
        amp = (p == 0) ? 250.0 : 80.0 + real'($urandom_range(0, 60));
        ph = real'($urandom_range(0, 6283)) / 1000.0;
        for (int b = 0; b < B; b++) begin
          cr[v][b] += amp * $cos(2.0 * PI * f * b / B + ph);
          ci[v][b] += amp * $sin(2.0 * PI * f * b / B + ph);
        end
      end
      for (int b = 0; b < B; b++) begin
        real a, c;
        a = cr[v][b] + sig * gauss();
        c = ci[v][b] + sig * gauss();
        xr[v][b] = (a > 1023.0) ? 1023 : (a < -1024.0) ? -1024 : int'($floor(a + 0.5));
        xi[v][b] = (c > 1023.0) ? 1023 : (c < -1024.0) ? -1024 : int'($floor(c + 0.5));
      end
      for (int k = 0; k < B; k++) begin
        br[v][k] = 0.0; bi[v][k] = 0.0;
        for (int b = 0; b < B; b++) begin
          real w;
          w = -2.0 * PI * k * b / B;
          br[v][k] += xr[v][b] * $cos(w) - xi[v][b] * $sin(w);
          bi[v][k] += xr[v][b] * $sin(w) + xi[v][b] * $cos(w);
        end
      end
      // complex noise variance in beamspace, in squared CORDIC-magnitude units
      n0f[v] = K * K * B * 2.0 * sig * sig;
    end
  end

  // stimulus: present the next vector whenever in_ready
  initial begin
    int v;
    v = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (v < NV) begin
      @(negedge clk);
      if (in_ready) begin
        for (int b = 0; b < B; b++) begin h_re[b] = HW'(xr[v][b]); h_im[b] = HW'(xi[v][b]); end
        n0 = NW'(longint'(n0f[v]));
        iv = 1;
        acc_cyc[v] = cyc;
        v++;
      end else begin
        iv = 0;
        for (int b = 0; b < B; b++) begin h_re[b] = '1; h_im[b] = '1; end
        n0 = '1;
      end
    end
    @(negedge clk); iv = 0;
  end

  // throughput: accepted vectors B cycles apart
  always @(posedge clk) begin
    if (iv && in_ready) begin
      if (nacc > 0) begin
        checks++;
        if (cyc - acc_cyc[nacc - 1] != B) begin failures++; $display("input spacing %0d", cyc - acc_cyc[nacc - 1]); end
      end
      nacc++;
    end
  end

  // tau check
  always @(posedge clk) begin
    #1;
    if (tau_valid) begin
      real best, got, t, dmin;
      int v;
      v = ntau;
      tau_got[v] = int'(tau);
      got = sure(v, real'(tau));
      best = sure(v, 0.0);
      dmin = real'(tau);
      for (int k = 0; k < B; k++) begin
        t = K * $sqrt(br[v][k] ** 2 + bi[v][k] ** 2);
        if (sure(v, t) < best) best = sure(v, t);
        if ((t - tau > -(dmin)) && (t - tau < dmin)) dmin = (t > tau) ? t - tau : tau - t;
      end
      checks += 2;
      if (dmin > 8.0) begin failures++; $display("vector %0d tau %0d is not a candidate (%f away)", v, tau, dmin); end
      if (got - best > 0.02 * best + 2.0 * n0f[v] + 1.0) begin
        failures++; $display("vector %0d tau %0d risk %f best %f", v, tau, got, best);
      end
      ntau++;
    end
  end

  // output check
  always @(posedge clk) begin
    #1;
    if (hs_valid) begin
      int v, b, gr, gi;
      real er, ei, tt;
      v = nout / B;
      b = nout % B;
      if (b == 0) begin
        checks++;
        if (v >= ntau) begin failures++; $display("output %0d before its tau", v); end
        if (lat0 < 0) lat0 = cyc - acc_cyc[v];
        else if (cyc - acc_cyc[v] != lat0) begin failures++; $display("latency %0d vs %0d", cyc - acc_cyc[v], lat0); end
      end else begin
        checks++;
        if (cyc != first_out + 1) begin failures++; $display("output gap at vector %0d entry %0d", v, b); end
      end
      first_out = cyc;
      checks++;
      if (int'(hs_idx) != b) begin failures++; $display("hs_idx %0d exp %0d", hs_idx, b); end
      // reference: soft threshold in beamspace with the engine's tau, then IDFT
      tt = real'(tau_got[v]) / K;
      er = 0.0; ei = 0.0;
      for (int k = 0; k < B; k++) begin
        real m, g, w;
        m = $sqrt(br[v][k] ** 2 + bi[v][k] ** 2);
        g = (m > tt) ? (m - tt) / m : 0.0;
        w = 2.0 * PI * k * b / B;
        er += g * (br[v][k] * $cos(w) - bi[v][k] * $sin(w)) / B;
        ei += g * (br[v][k] * $sin(w) + bi[v][k] * $cos(w)) / B;
      end
      gr = int'(hs.re); gi = int'(hs.im);
      if ((gr - er) > maxdev) maxdev = gr - er;
      if ((er - gr) > maxdev) maxdev = er - gr;
      if ((gi - ei) > maxdev) maxdev = gi - ei;
      if ((ei - gi) > maxdev) maxdev = ei - gi;
      checks++;
      if ((gr - er) ** 2 + (gi - ei) ** 2 > 36.0) begin
        failures++; if (failures < 10) $display("v%0d b%0d got (%0d,%0d) exp (%f,%f)", v, b, gr, gi, er, ei);
      end
      if (v % 7 < 5) begin
        err_in  += (xr[v][b] - cr[v][b]) ** 2 + (xi[v][b] - ci[v][b]) ** 2;
        err_out += (gr - cr[v][b]) ** 2 + (gi - ci[v][b]) ** 2;
      end
      nout++;
    end
  end

  initial begin
    wait (nout == NV * B);
    repeat (5) @(posedge clk);
    checks += 3;
    if (ntau != NV) begin failures++; $display("tau count %0d", ntau); end
    if (nacc != NV) begin failures++; $display("accepted %0d", nacc); end
    if (!(err_out < err_in)) begin failures++; $display("no denoising gain"); end
    $display("latency %0d cycles, max output deviation %f, squared error in %f out %f",
             lat0, maxdev, err_in, err_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (NV * B + 2000) @(posedge clk);
    failures++;
    $display("watchdog: outputs %0d taus %0d", nout, ntau);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
