// tb_spatial_equalizer: the four PPAC instances with one random complex X^H and
// the interleaved framing of the ADC array (6-bit: 8-cycle frames, instance k's
// bits in cycles 2k+2..2k+7; 3-bit: 4-cycle frames), each instance getting its
// own random z vectors. Checks every result against x_u^H z from the entry values
// for X^H resolutions 4, 3, 2 and 1 (muted rows), and that every instance
// delivers one result per frame (four results per 8 or 4 cycles in total).
module tb_spatial_equalizer;
  import ra_pkg::*;
  localparam int N = 2*B, NPE = 2*U, NI = NINST;
  logic clk = 0, rst_n = 0, we = 0;
  logic [2:0] xres = 3'd4;
  logic [$clog2(NPE)-1:0] wpe = '0;
  logic [1:0] wrow = '0;
  logic [N/CG-1:0] wmask = '1;
  logic [N-1:0] wdata = '0;
  logic [N-1:0] z [NI];
  logic [NI-1:0] bvalid = '0, bfirst = '0, blast = '0, out_valid;
  logic signed [ACCW-1:0] result [NI][NPE];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  spatial_equalizer dut (.clk(clk), .rst_n(rst_n), .xres(xres), .we(we), .wpe(wpe),
    .wrow(wrow), .wmask(wmask), .wdata(wdata), .z(z), .bvalid(bvalid), .bfirst(bfirst),
    .blast(blast), .result(result), .out_valid(out_valid));

  logic [B-1:0] xrb [U][XB_MAX], xib [U][XB_MAX];
  int expq [NI][$];
  int nres [NI];
  int zc [NI][N];
  int q;

  function automatic int xval(logic [B-1:0] bits [XB_MAX], int b, int xr);
    int v = 0;
    for (int k = 0; k < xr; k++) v += (bits[k][b] ? 1 : -1) << k;
    return v;
  endfunction

  task automatic push_expect(int k);
    for (int u = 0; u < U; u++) begin
      int re = 0, im = 0;
      for (int b = 0; b < B; b++) begin
        int xr, xi, zr, zi;
        xr = xval(xrb[u], b, int'(xres));
        xi = xval(xib[u], b, int'(xres));
        zr = 2 * zc[k][b] - ((1 << q) - 1);
        zi = 2 * zc[k][B+b] - ((1 << q) - 1);
        re += xr * zr + xi * zi;
        im += xr * zi - xi * zr;
      end
      expq[k].push_back(re);
      expq[k].push_back(im);
    end
  endtask

  always @(posedge clk) begin
    #1;
    for (int k = 0; k < NI; k++)
      if (out_valid[k]) begin
        nres[k]++;
        for (int p = 0; p < NPE; p++) begin
          int ev;
          checks++;
          ev = (expq[k].size() > 0) ? expq[k].pop_front() : 32'h7fffffff;
          if (int'(result[k][p]) != ev) begin
            failures++;
            if (failures < 10) $display("inst %0d PE %0d got %0d exp %0d", k, p, result[k][p], ev);
          end
        end
      end
  end

  initial begin
    for (int k = 0; k < NI; k++) z[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int u = 0; u < U; u++)
      for (int r = 0; r < XB_MAX; r++) begin
        xrb[u][r] = $urandom; xib[u][r] = $urandom;
        @(negedge clk); we = 1; wpe = 5'(2*u);   wrow = 2'(r); wdata = {xib[u][r], xrb[u][r]};
        @(negedge clk); we = 1; wpe = 5'(2*u+1); wrow = 2'(r); wdata = {xrb[u][r], ~xib[u][r]};
      end
    @(negedge clk); we = 0;
    for (int pass = 0; pass < 8; pass++) begin
      int s, p, frames;
      xres = 3'(4 - (pass % 4));
      s = (pass < 4) ? 2 : 1; q = 3 * s; p = 4 * s;
      frames = 6;
      for (int k = 0; k < NI; k++) nres[k] = 0;
      // frame f, cycle c: instance k is in bit (c - k*s - s) mod p when < q
      for (int t = 0; t < frames * p + p; t++) begin
        int c;
        c = t % p;
        @(negedge clk);
        for (int k = 0; k < NI; k++) begin
          int off;
          off = (c - k*s - s + 2*p) % p;
          if (t >= k*s + s && off < q && t < frames * p) begin
            if (off == 0) for (int i = 0; i < N; i++) zc[k][i] = $urandom_range(0, (1 << q) - 1);
            for (int i = 0; i < N; i++) z[k][i] = zc[k][i][q - 1 - off];
            bvalid[k] = 1; bfirst[k] = (off == 0); blast[k] = (off == q - 1);
            if (off == q - 1) push_expect(k);
          end else begin
            bvalid[k] = 0; bfirst[k] = 0; blast[k] = 0;
          end
        end
      end
      @(negedge clk);
      bvalid = '0; bfirst = '0; blast = '0;
      repeat (4) @(negedge clk);
      for (int k = 0; k < NI; k++) begin
        checks++;
        if (nres[k] < frames - 1) begin
          failures++;
          $display("instance %0d delivered %0d results in %0d frames", k, nres[k], frames);
        end
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
