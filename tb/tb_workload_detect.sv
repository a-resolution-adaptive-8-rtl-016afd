// tb_workload_detect: uplink data detection through the whole receiver at full
// size, in two resolution configurations:
//   A. 16 UEs with 16-QAM, 6-bit ADC samples, 4-bit X^H   (the maximum-resolution
//      configuration: 16 UEs x 4 bits x 156 MS/s = 9.98 Gb/s at 312 MHz)
//   B. 4 UEs with QPSK, 3-bit ADC samples, 1-bit X^H       (a low-load,
//      lowest-resolution configuration)
// The channel is i.i.d. Rayleigh (B = 32 x U), received at high SNR. The
// testbench computes a zero-forcing matrix W = H (H^H H)^-1 in floating point,
// quantizes each user's row of W^H to xres-bit mid-rise codes with its own scale
// (finite-alphabet equalization: s_hat_u = mu_u * (X^H z)_u), writes it, streams
// symbol vectors through the ADCs at the full rate and slices mu_u * eq_result.
// mu_u is the inverse of the effective gain x_u^H h_u (in quantized units). The
// symbol error rate must stay below 1% in each configuration; the cycle count of
// each configuration's stream is also checked (one vector per instance every P
// cycles).
module tb_workload_detect;
  import ra_pkg::*;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0, run = 0, res6 = 1, zsrc_ext = 0;
  logic [2:0] pga_gain = 0, xres = 4;
  logic signed [AW-1:0] y_re [B], y_im [B];
  logic [3:0] ext_q = 8;
  logic [2*B-1:0] ext_z [NINST];
  logic [NINST-1:0] ext_bvalid = 0, ext_bfirst = 0, ext_blast = 0;
  logic x_we = 0;
  logic [$clog2(2*U)-1:0] x_pe = 0;
  logic [1:0] x_row = 0;
  logic [2*B/CG-1:0] x_mask = '1;
  logic [2*B-1:0] x_data = '0;
  logic signed [ACCW-1:0] eq_result [NINST][2*U];
  logic [NINST-1:0] eq_valid;
  logic cap_req = 0, cap_busy, hs_valid, tau_valid;
  logic [1:0] cap_inst = 0, pilot = 0;
  logic [NW-1:0] n0 = '0;
  cplx_t hs;
  logic [$clog2(B)-1:0] hs_idx;
  logic [MW-1:0] tau;

  ra_receiver dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  real hr [B][U], hi [B][U];             // channel
  real wr [U][B], wi [U][B];             // rows of W^H
  int  cr [U][B], ci [U][B];             // X^H codes
  real mur [U], mui [U];                 // per-UE scale (complex)
  int  nu, qam, nsym = 0, nerr = 0, nres = 0, first_res, last_res;
  int  symq [NINST][$];                  // transmitted symbol indices per instance
  bit  active = 0;

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000001.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  // constellation level of symbol component index (16-QAM: 0..3 -> -3,-1,1,3)
  function automatic int lvl(int idx);
    return (qam == 16) ? 2 * idx - 3 : 2 * idx - 1;
  endfunction
  function automatic int slice(real v);
    int i;
    if (qam == 16) begin
      i = int'($floor((v + 4.0) / 2.0));
      return (i < 0) ? 0 : (i > 3) ? 3 : i;
    end
    return (v < 0.0) ? 0 : 1;
  endfunction

  // zero forcing in floating point: W^H = (H^H H)^-1 H^H
  task automatic make_zf();
    real ar [U][2*U], ai [U][2*U];
    for (int i = 0; i < nu; i++)
      for (int j = 0; j < 2 * nu; j++) begin
        ar[i][j] = 0.0; ai[i][j] = 0.0;
        if (j < nu)
          for (int b = 0; b < B; b++) begin     // (H^H H)_ij = sum conj(h_bi) h_bj
            ar[i][j] += hr[b][i] * hr[b][j] + hi[b][i] * hi[b][j];
            ai[i][j] += hr[b][i] * hi[b][j] - hi[b][i] * hr[b][j];
          end
        else if (j - nu == i) ar[i][j] = 1.0;
      end
    for (int c = 0; c < nu; c++) begin         // Gauss-Jordan (Gram matrix: no pivoting needed)
      real pr, pim, d;
      d = ar[c][c] ** 2 + ai[c][c] ** 2;
      pr = ar[c][c] / d; pim = -ai[c][c] / d;
      for (int j = 0; j < 2 * nu; j++) begin
        real tr, ti;
        tr = ar[c][j] * pr - ai[c][j] * pim;
        ti = ar[c][j] * pim + ai[c][j] * pr;
        ar[c][j] = tr; ai[c][j] = ti;
      end
      for (int i = 0; i < nu; i++)
        if (i != c) begin
          real fr, fi;
          fr = ar[i][c]; fi = ai[i][c];
          for (int j = 0; j < 2 * nu; j++) begin
            ar[i][j] -= fr * ar[c][j] - fi * ai[c][j];
            ai[i][j] -= fr * ai[c][j] + fi * ar[c][j];
          end
        end
    end
    for (int u = 0; u < nu; u++)               // W^H = inv * H^H
      for (int b = 0; b < B; b++) begin
        wr[u][b] = 0.0; wi[u][b] = 0.0;
        for (int j = 0; j < nu; j++) begin     // inv[u][j] * conj(h_bj)
          wr[u][b] += ar[u][nu+j] * hr[b][j] + ai[u][nu+j] * hi[b][j];
          wi[u][b] += ai[u][nu+j] * hr[b][j] - ar[u][nu+j] * hi[b][j];
        end
      end
  endtask

  // finite-alphabet quantization of W^H and the per-UE scale
  task automatic quantize_x(int xb, real zscale);
    int lv;
    lv = (1 << xb) - 1;                        // largest mid-rise value
    for (int u = 0; u < U; u++) begin
      real m, gr, gi, d;
      m = 1.0e-9;
      if (u < nu)
        for (int b = 0; b < B; b++) begin
          if (wr[u][b] > m) m = wr[u][b];
          if (-wr[u][b] > m) m = -wr[u][b];
          if (wi[u][b] > m) m = wi[u][b];
          if (-wi[u][b] > m) m = -wi[u][b];
        end
      for (int b = 0; b < B; b++) begin
        real vr, vi;
        vr = (u < nu) ? wr[u][b] / m * lv : 0.0;
        vi = (u < nu) ? -wi[u][b] / m * lv : 0.0;   // stored x_u = conj of the W^H row
        cr[u][b] = int'($floor((vr + lv) / 2.0 + 0.5));
        ci[u][b] = int'($floor((vi + lv) / 2.0 + 0.5));
        if (cr[u][b] < 0) cr[u][b] = 0; if (cr[u][b] > lv) cr[u][b] = lv;
        if (ci[u][b] < 0) ci[u][b] = 0; if (ci[u][b] > lv) ci[u][b] = lv;
      end
      // effective gain g = x_u^H h_u in z units per unit symbol; mu = 1/g
      gr = 0.0; gi = 0.0;
      if (u < nu)
        for (int b = 0; b < B; b++) begin
          real xr, xi;
          xr = 2 * cr[u][b] - lv; xi = 2 * ci[u][b] - lv;
          gr += (xr * hr[b][u] + xi * hi[b][u]) * zscale;
          gi += (xr * hi[b][u] - xi * hr[b][u]) * zscale;
        end
      d = gr * gr + gi * gi + 1.0e-30;
      mur[u] = gr / d; mui[u] = -gi / d;
    end
    for (int p = 0; p < 2 * U; p++)
      for (int r = 0; r < XB_MAX; r++) begin
        @(negedge clk);
        x_we = 1; x_pe = 5'(p); x_row = 2'(r); x_mask = '1;
        for (int b = 0; b < B; b++) begin
          bit br, bi;
          br = (r < xb) ? cr[p/2][b][r] : 1'b0;
          bi = (r < xb) ? ci[p/2][b][r] : 1'b0;
          if (p % 2 == 0) begin x_data[b] = br; x_data[B+b] = bi; end
          else begin x_data[b] = !bi; x_data[B+b] = br; end
        end
      end
    @(negedge clk);
    x_we = 0;
  endtask

  // slicer on every result
  always @(posedge clk) begin
    #1;
    for (int k = 0; k < NINST; k++)
      if (eq_valid[k] && active) begin
        if (symq[k].size() < 2 * nu) begin
          failures++; $display("unexpected result on instance %0d", k);
        end else begin
          for (int u = 0; u < nu; u++) begin
            real er, ei;
            int sr, si;
            er = mur[u] * real'(eq_result[k][2*u]) - mui[u] * real'(eq_result[k][2*u+1]);
            ei = mur[u] * real'(eq_result[k][2*u+1]) + mui[u] * real'(eq_result[k][2*u]);
            sr = symq[k].pop_front();
            si = symq[k].pop_front();
            nsym++;
            if (slice(er) != sr || slice(ei) != si) nerr++;
          end
        end
        if (nres == 0) first_res = cyc;
        last_res = cyc;
        nres++;
      end
  end

  task automatic run_config(string name, int users, int constel, bit r6, int xb, int frames, real snr_db);
    int s, q, p;
    real amp, sig, zscale, es;
    nu = users; qam = constel;
    s = r6 ? 2 : 1; q = r6 ? 6 : 3; p = s + q;
    for (int b = 0; b < B; b++)
      for (int u = 0; u < U; u++) begin
        hr[b][u] = gauss() / $sqrt(2.0); hi[b][u] = gauss() / $sqrt(2.0);
      end
    make_zf();
    // received power per component: users * Es/2 * amp^2; aim at 1/4 of full scale rms
    es = (qam == 16) ? 10.0 : 2.0;
    amp = 32768.0 * 0.25 / $sqrt(nu * es / 2.0);
    sig = $sqrt(nu * es / 2.0) * amp / $pow(10.0, snr_db / 20.0);
    zscale = amp / (32768.0 / (1 << q));       // one symbol unit in z units (half-LSB steps)
    quantize_x(xb, zscale);
    nsym = 0; nerr = 0; nres = 0;
    for (int k = 0; k < NINST; k++) symq[k].delete();
    @(negedge clk);
    res6 = r6; xres = 3'(xb); pga_gain = 0; zsrc_ext = 0;
    run = 1; active = 1;
    for (int m = 0; m < frames * p; m++) begin
      @(negedge clk);
      if (m % s == 0) begin
        int si [U][2];
        for (int u = 0; u < nu; u++) begin
          si[u][0] = $urandom_range(0, (qam == 16) ? 3 : 1);
          si[u][1] = $urandom_range(0, (qam == 16) ? 3 : 1);
          symq[(m / s) % NINST].push_back(si[u][0]);
          symq[(m / s) % NINST].push_back(si[u][1]);
        end
        for (int b = 0; b < B; b++) begin
          real vr, vi;
          vr = sig * gauss(); vi = sig * gauss();
          for (int u = 0; u < nu; u++) begin
            vr += amp * (hr[b][u] * lvl(si[u][0]) - hi[b][u] * lvl(si[u][1]));
            vi += amp * (hr[b][u] * lvl(si[u][1]) + hi[b][u] * lvl(si[u][0]));
          end
          y_re[b] = AW'((vr > 32767.0) ? 32767 : (vr < -32768.0) ? -32768 : int'(vr));
          y_im[b] = AW'((vi > 32767.0) ? 32767 : (vi < -32768.0) ? -32768 : int'(vi));
        end
      end
    end
    @(negedge clk);
    run = 0;
    repeat (20) @(negedge clk);
    active = 0;
    checks += 3;
    if (real'(nerr) > 0.01 * nsym || nsym == 0) begin failures++; end
    // all but the cut-off last sample of each instance come out
    if (nres < 4 * frames - 4) begin failures++; $display("%s: only %0d results", name, nres); end
    // full rate: 4 results per P cycles
    if ((last_res - first_res) > (nres / 4 + 1) * p) begin failures++; $display("%s: results too slow", name); end
    $display("%s: %0d UEs, %0d symbols, %0d errors (SER %f), %0d equalized vectors in %0d cycles",
             name, nu, nsym, nerr, real'(nerr) / nsym, nres, last_res - first_res);
  endtask

  initial begin
    for (int b = 0; b < B; b++) begin y_re[b] = '0; y_im[b] = '0; end
    for (int k = 0; k < NINST; k++) ext_z[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_config("6-bit ADC, 4-bit X, 16-QAM", 16, 16, 1, 4, 100, 30.0);
    run_config("3-bit ADC, 1-bit X, QPSK", 4, 4, 0, 1, 200, 20.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
