// tb_ra_receiver: end-to-end test of the whole receiver at its default size
// (B = 32 antennas, U = 16 UEs, four PPAC instances, 64 ADC channels).
//
// The test drives baseband voltages, writes the equalization matrix X through the
// write port and checks every equalizer output against X^H z computed here in
// exact integer arithmetic from its own model of the PGA (gain 2^g, clipping at
// full scale), of the ADC (uniform mid-rise quantizer: code c stands for
// 2c - (2^q - 1)) and of the time-interleaved sampling: the input is held for S
// cycles per slot, and slot j of a run is taken by converter/instance j mod 4.
// Phases:
//   1. 6-bit ADC, 4-bit X, gain 1x            2. 6-bit, 2-bit X (rows 2,3 hold
//   3. 3-bit ADC (mode switch), 1-bit X, 4x      random bits: must be muted), 2x
//   4. 3-bit, 3-bit X, 1x                     5./6. external z source, q = 8 and 4
//   7. channel estimation: a sparse channel times a QPSK pilot is held at the
//      input, chest_capture takes one sample, BEACHES denoises it; h* is checked
//      against a floating-point LS + DFT + soft-threshold + IDFT reference that
//      uses the threshold the engine reports (6-bit and 3-bit captures).
// It also checks that each instance delivers one result per P cycles in a run.
// Each mechanism is counted and a mechanism that never happened counts a failure.
module tb_ra_receiver;
  import ra_pkg::*;
  localparam real K = 1.6467602540312922;
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
  // mechanism counters
  int n_res6 = 0, n_res3 = 0, n_switch = 0, n_mute = 0, n_ext = 0, n_gain = 0,
      n_clip = 0, n_cap = 0, n_hs = 0;

  int xv_re [U][B], xv_im [U][B];         // X values (mid-rise)
  int expq [NINST][$];                    // expected results, 2U per sample
  int tagq [NINST][$];                    // 0: ADC 6-bit, 1: ADC 3-bit, 2: external
  int last_v [NINST];
  int cur_p = 8;
  bit in_run = 0;

  function automatic int midrise_v(int c, int q);
    return 2 * c - ((1 << q) - 1);
  endfunction

  // ADC model: PGA, clip, q-bit code
  function automatic int adc_code(int v, int g, int q, ref int clips);
    longint a;
    a = longint'(v) * (longint'(1) << g);
    if (a > 32767) begin a = 32767; clips++; end
    if (a < -32768) begin a = -32768; clips++; end
    return int'((a + 32768) >> (16 - q));
  endfunction

  task automatic write_x(int xb);
    int cr [U][B], ci [U][B];
    for (int u = 0; u < U; u++)
      for (int b = 0; b < B; b++) begin
        cr[u][b] = $urandom_range(0, 15);
        ci[u][b] = $urandom_range(0, 15);
        xv_re[u][b] = midrise_v(cr[u][b] & ((1 << xb) - 1), xb);
        xv_im[u][b] = midrise_v(ci[u][b] & ((1 << xb) - 1), xb);
      end
    // rows at and above xb keep the random upper code bits: they must be muted
    for (int p = 0; p < 2 * U; p++)
      for (int r = 0; r < XB_MAX; r++) begin
        @(negedge clk);
        x_we = 1; x_pe = 5'(p); x_row = 2'(r); x_mask = '1;
        for (int b = 0; b < B; b++) begin
          bit br, bi;
          br = cr[p/2][b][r];
          bi = ci[p/2][b][r];
          if (p % 2 == 0) begin x_data[b] = br; x_data[B+b] = bi; end
          else begin x_data[b] = !bi; x_data[B+b] = br; end
        end
      end
    @(negedge clk);
    x_we = 0;
  endtask

  task automatic push_exp(int k, int zr [B], int zi [B], int tag);
    for (int u = 0; u < U; u++) begin
      int sre, sim;
      sre = 0; sim = 0;
      for (int b = 0; b < B; b++) begin
        sre += xv_re[u][b] * zr[b] + xv_im[u][b] * zi[b];
        sim += xv_re[u][b] * zi[b] - xv_im[u][b] * zr[b];
      end
      expq[k].push_back(sre);
      expq[k].push_back(sim);
    end
    tagq[k].push_back(tag);
  endtask

  // result checker
  always @(posedge clk) begin
    #1;
    for (int k = 0; k < NINST; k++)
      if (eq_valid[k]) begin
        int tag, bad;
        checks++;
        if (tagq[k].size() == 0) begin
          failures++; $display("instance %0d: unexpected result", k);
        end else begin
          tag = tagq[k].pop_front();
          bad = 0;
          for (int p = 0; p < 2 * U; p++) begin
            int e;
            e = expq[k].pop_front();
            if (int'(eq_result[k][p]) != e) begin
              bad++;
              if (failures < 10) $display("inst %0d pe %0d got %0d exp %0d (tag %0d)", k, p, eq_result[k][p], e, tag);
            end
          end
          checks += 2 * U - 1;
          failures += bad;
          if (tag == 0) n_res6++;
          if (tag == 1) n_res3++;
          if (tag == 2) n_ext++;
          if (xres < 4) n_mute++;
          if (pga_gain != 0 && tag != 2) n_gain++;
        end
        // one result per P cycles within a run
        if (in_run && !zsrc_ext && last_v[k] >= 0) begin
          checks++;
          if (cyc - last_v[k] != cur_p) begin failures++; $display("inst %0d result spacing %0d", k, cyc - last_v[k]); end
        end
        last_v[k] = cyc;
      end
  end

  task automatic drain();
    repeat (20) @(negedge clk);
    for (int k = 0; k < NINST; k++) begin
      checks++;
      if (tagq[k].size() > 1) begin failures++; $display("instance %0d lost %0d results", k, tagq[k].size()); end
      tagq[k].delete();
      expq[k].delete();
    end
  endtask

  // ----- channel estimation bookkeeping
  int caps_hr [$], caps_hi [$];          // LS estimates, B per capture
  int tauq [$];
  int nhs_in = 0;

  // one ADC run: slot j holds y for S cycles; a constant channel (cap) or random data
  task automatic adc_phase(bit r6, int g, int xb, int amp, int frames,
                           bit do_cap, int cinst, int cpil, int ch_re [B], int ch_im [B], real sig);
    int s, q, p, clips;
    bit prev;
    s = r6 ? 2 : 1; q = r6 ? 6 : 3; p = s + q;
    prev = res6;
    write_x(xb);
    @(negedge clk);
    res6 = r6; pga_gain = 3'(g); xres = 3'(xb); zsrc_ext = 0;
    cur_p = p;
    for (int k = 0; k < NINST; k++) last_v[k] = -1;
    if (prev != r6) n_switch++;
    run = 1;
    in_run = 1;
    for (int m = 0; m < frames * p; m++) begin
      @(negedge clk);
      cap_req = 0;
      if (m % s == 0) begin
        int zr [B], zi [B];
        clips = 0;
        for (int b = 0; b < B; b++) begin
          int vr, vi;
          if (do_cap) begin vr = ch_re[b]; vi = ch_im[b]; end
          else begin vr = $urandom_range(0, 2 * amp) - amp; vi = $urandom_range(0, 2 * amp) - amp; end
          y_re[b] = AW'(vr); y_im[b] = AW'(vi);
          zr[b] = midrise_v(adc_code(vr, g, q, clips), q);
          zi[b] = midrise_v(adc_code(vi, g, q, clips), q);
        end
        n_clip += clips;
        push_exp((m / s) % NINST, zr, zi, r6 ? 0 : 1);
        if (do_cap && m == 3 * p) begin
          // LS estimate with the QPSK pilot (sign bits), 1/sqrt(2) dropped
          int pr, pim;
          pr = cpil[0] ? -1 : 1; pim = cpil[1] ? -1 : 1;
          for (int b = 0; b < B; b++) begin
            caps_hr.push_back(pr * zr[b] + pim * zi[b]);
            caps_hi.push_back(pr * zi[b] - pim * zr[b]);
          end
          cap_req = 1; cap_inst = 2'(cinst); pilot = 2'(cpil);
          // beamspace noise variance in squared CORDIC units: LS noise is 2x
          // the per-component z noise (thermal plus quantization) per part
          begin
            real zs, vz;
            zs = 32768.0 / (1 << q);
            vz = (sig / zs) ** 2 + 1.0 / 3.0;
            n0 = NW'(longint'(K * K * B * 2.0 * 2.0 * vz));
          end
          n_cap++;
        end
      end
    end
    @(negedge clk);
    cap_req = 0;
    run = 0;
    in_run = 0;
    drain();
  endtask

  // external bit-serial source: each instance gets samples with random gaps
  task automatic ext_phase(int q, int xb, int nsamp);
    int bitn [NINST], gap [NINST], done_n [NINST];
    int code [NINST][2*B];
    write_x(xb);
    @(negedge clk);
    zsrc_ext = 1; ext_q = 4'(q); xres = 3'(xb);
    for (int k = 0; k < NINST; k++) begin bitn[k] = -1; gap[k] = 2 * k; done_n[k] = 0; end
    for (int t = 0; t < nsamp * (q + 4) + 40; t++) begin
      @(negedge clk);
      for (int k = 0; k < NINST; k++) begin
        ext_bvalid[k] = 0; ext_bfirst[k] = 0; ext_blast[k] = 0;
        ext_z[k] = {$urandom, $urandom};
        if (bitn[k] < 0 && gap[k] > 0) gap[k]--;
        else if (bitn[k] < 0 && done_n[k] < nsamp) begin
          int zr [B], zi [B];
          for (int c = 0; c < 2 * B; c++) code[k][c] = $urandom_range(0, (1 << q) - 1);
          for (int b = 0; b < B; b++) begin
            zr[b] = midrise_v(code[k][b], q);
            zi[b] = midrise_v(code[k][B+b], q);
          end
          push_exp(k, zr, zi, 2);
          bitn[k] = q - 1;
          done_n[k]++;
        end
        if (bitn[k] >= 0) begin
          for (int c = 0; c < 2 * B; c++) ext_z[k][c] = code[k][c][bitn[k]];
          ext_bvalid[k] = 1;
          ext_bfirst[k] = (bitn[k] == q - 1);
          ext_blast[k] = (bitn[k] == 0);
          bitn[k]--;
          if (bitn[k] < 0) gap[k] = $urandom_range(0, 3);
        end
      end
    end
    @(negedge clk);
    ext_bvalid = 0; ext_bfirst = 0; ext_blast = 0;
    drain();
    for (int k = 0; k < NINST; k++) begin
      checks++;
      if (done_n[k] != nsamp) failures++;
    end
    zsrc_ext = 0;
  endtask

  // threshold of each estimate
  always @(posedge clk) begin
    #1;
    if (tau_valid) tauq.push_back(int'(tau));
  end

  // h* check against the floating-point reference with the engine's threshold
  always @(posedge clk) begin
    #1;
    if (hs_valid) begin
      int v, b, gr, gi;
      real er, ei, tt, d;
      gr = int'(hs.re);
      gi = int'(hs.im);
      v = nhs_in / B;
      b = nhs_in % B;
      checks++;
      if (v >= tauq.size() || caps_hr.size() < (v + 1) * B) begin
        failures++; $display("h* entry without an estimate or threshold");
      end else begin
        tt = real'(tauq[v]) / K;
        er = 0.0; ei = 0.0;
        for (int k = 0; k < B; k++) begin
          real fr, fi, m, gg, w;
          fr = 0.0; fi = 0.0;
          for (int a = 0; a < B; a++) begin
            w = -2.0 * PI * k * a / B;
            fr += caps_hr[v*B+a] * $cos(w) - caps_hi[v*B+a] * $sin(w);
            fi += caps_hr[v*B+a] * $sin(w) + caps_hi[v*B+a] * $cos(w);
          end
          m = $sqrt(fr * fr + fi * fi);
          gg = (m > tt) ? (m - tt) / m : 0.0;
          w = 2.0 * PI * k * b / B;
          er += gg * (fr * $cos(w) - fi * $sin(w)) / B;
          ei += gg * (fr * $sin(w) + fi * $cos(w)) / B;
        end
        d = (gr - er) ** 2 + (gi - ei) ** 2;
        checks++;
        if (int'(hs_idx) != b) failures++;
        if (d > 36.0) begin
          failures++;
          if (failures < 20) $display("h* %0d[%0d] got (%0d,%0d) exp (%f,%f)", v, b, gr, gi, er, ei);
        end
        if (b == B - 1) n_hs++;
      end
      nhs_in++;
    end
  end

  // sparse channel times pilot, as input voltages
  task automatic make_cap(int cpil, real amp, real sig, output int cre [B], output int cim [B]);
    real hr [B], hi [B], pr, pim;
    int np;
    np = $urandom_range(1, 3);
    for (int b = 0; b < B; b++) begin hr[b] = 0.0; hi[b] = 0.0; end
    for (int p = 0; p < np; p++) begin
      real f, a, ph;
      f = real'($urandom_range(0, 3199)) / 100.0;
      a = (p == 0) ? amp : amp * 0.4;
      ph = real'($urandom_range(0, 6283)) / 1000.0;
      for (int b = 0; b < B; b++) begin
        hr[b] += a * $cos(2.0 * PI * f * b / B + ph);
        hi[b] += a * $sin(2.0 * PI * f * b / B + ph);
      end
    end
    pr = cpil[0] ? -1.0 : 1.0; pim = cpil[1] ? -1.0 : 1.0;
    for (int b = 0; b < B; b++) begin
      real vr, vi;
      vr = hr[b] * pr - hi[b] * pim + sig * ($urandom_range(0, 2000) - 1000) / 577.0;
      vi = hr[b] * pim + hi[b] * pr + sig * ($urandom_range(0, 2000) - 1000) / 577.0;
      cre[b] = (vr > 32767.0) ? 32767 : (vr < -32768.0) ? -32768 : int'(vr);
      cim[b] = (vi > 32767.0) ? 32767 : (vi < -32768.0) ? -32768 : int'(vi);
    end
  endtask

  initial begin
    int dre [B], dim [B];
    for (int b = 0; b < B; b++) begin y_re[b] = '0; y_im[b] = '0; dre[b] = 0; dim[b] = 0; end
    for (int k = 0; k < NINST; k++) begin ext_z[k] = '0; last_v[k] = -1; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    adc_phase(1, 0, 4, 32767, 30, 0, 0, 0, dre, dim, 0.0);
    adc_phase(1, 1, 2, 24000, 30, 0, 0, 0, dre, dim, 0.0);
    adc_phase(0, 2, 1, 12000, 30, 0, 0, 0, dre, dim, 0.0);
    adc_phase(0, 0, 3, 32000, 30, 0, 0, 0, dre, dim, 0.0);
    ext_phase(8, 4, 20);
    ext_phase(4, 3, 20);
    begin
      int cre [B], cim [B];
      make_cap(0, 6000.0, 600.0, cre, cim);
      adc_phase(1, 0, 4, 0, 40, 1, 0, 0, cre, cim, 600.0);
      make_cap(3, 5000.0, 300.0, cre, cim);
      adc_phase(1, 0, 2, 0, 40, 1, 3, 3, cre, cim, 300.0);
      make_cap(2, 7000.0, 800.0, cre, cim);
      adc_phase(0, 0, 4, 0, 80, 1, 1, 2, cre, cim, 800.0);
    end
    repeat (200) @(negedge clk);
    checks += 10;
    if (n_res6 == 0) begin failures++; $display("no 6-bit results"); end
    if (n_res3 == 0) begin failures++; $display("no 3-bit results"); end
    if (n_switch == 0) begin failures++; $display("no resolution switch"); end
    if (n_mute == 0) begin failures++; $display("no muted-row results"); end
    if (n_ext == 0) begin failures++; $display("no external-source results"); end
    if (n_gain == 0) begin failures++; $display("no PGA gain results"); end
    if (n_clip == 0) begin failures++; $display("no clipping"); end
    if (n_cap == 0) begin failures++; $display("no captures"); end
    if (n_hs != n_cap) begin failures++; $display("h* vectors %0d for %0d captures", n_hs, n_cap); end
    if (tauq.size() != n_cap) begin failures++; $display("thresholds %0d", tauq.size()); end
    $display("results: 6-bit %0d, 3-bit %0d, external %0d, muted rows %0d, gain %0d; switches %0d; clipped samples %0d; captures %0d, h* vectors %0d",
             n_res6, n_res3, n_ext, n_mute, n_gain, n_switch, n_clip, n_cap, n_hs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
