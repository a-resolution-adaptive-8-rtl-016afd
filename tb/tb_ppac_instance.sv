// tb_ppac_instance: one PPAC instance with a random complex X^H (2U PEs, layout
// [xr; xi] for the real and [-xi; xr] for the imaginary PE) and random complex
// mid-rise z vectors of q = 1..8 bits, sent back to back without idle cycles.
// Every result must equal the complex inner products x_u^H z worked out from the
// entry values, and out_valid must come exactly two cycles after the last
// bit-plane of each sample.
module tb_ppac_instance;
  import ra_pkg::*;
  localparam int N = 2*B, NPE = 2*U;
  logic clk = 0, rst_n = 0, we = 0;
  logic [$clog2(NPE)-1:0] wpe = '0;
  logic [1:0] wrow = '0;
  logic [N/CG-1:0] wmask = '1;
  logic [N-1:0] wdata = '0, z = '0;
  logic [XB_MAX-1:0] en = '1;
  logic bvalid = 0, bfirst = 0, blast = 0, out_valid;
  logic signed [ACCW-1:0] result [NPE];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  ppac_instance #(.N(N), .NPE(NPE)) dut (.clk(clk), .rst_n(rst_n), .we(we), .wpe(wpe),
    .wrow(wrow), .wmask(wmask), .wdata(wdata), .z(z), .en(en), .bvalid(bvalid),
    .bfirst(bfirst), .blast(blast), .result(result), .out_valid(out_valid));

  logic [B-1:0] xrb [U][XB_MAX], xib [U][XB_MAX];
  int xr [U][B], xi [U][B];
  int expq [$];
  int lastcyc [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // result checker
  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      int lc, ev;
      checks++;
      if (expq.size() < NPE) failures++;
      else begin
        lc = lastcyc.pop_front();
        if (cyc - lc != 2) begin
          failures++;
          $display("latency %0d", cyc - lc);
        end
        for (int p = 0; p < NPE; p++) begin
          checks++;
          ev = expq.pop_front();
          if (int'(result[p]) != ev) begin
            failures++;
            if (failures < 10) $display("PE %0d got %0d exp %0d", p, result[p], ev);
          end
        end
      end
    end
  end

  initial begin
    int xres, nres;
    repeat (2) @(negedge clk);
    rst_n = 1;
    xres = 4;
    for (int u = 0; u < U; u++)
      for (int k = 0; k < XB_MAX; k++) begin
        xrb[u][k] = $urandom; xib[u][k] = $urandom;
        @(negedge clk); we = 1; wpe = 5'(2*u);   wrow = 2'(k); wdata = {xib[u][k], xrb[u][k]};
        @(negedge clk); we = 1; wpe = 5'(2*u+1); wrow = 2'(k); wdata = {xrb[u][k], ~xib[u][k]};
      end
    @(negedge clk); we = 0;
    for (int pass = 0; pass < 4; pass++) begin
      xres = 4 - pass;
      for (int k = 0; k < XB_MAX; k++) en[k] = (k < xres);
      for (int u = 0; u < U; u++)
        for (int b = 0; b < B; b++) begin
          xr[u][b] = 0; xi[u][b] = 0;
          for (int k = 0; k < xres; k++) begin
            xr[u][b] += (xrb[u][k][b] ? 1 : -1) << k;
            xi[u][b] += (xib[u][k][b] ? 1 : -1) << k;
          end
        end
      for (int n = 0; n < 12; n++) begin
        int q, zc [N], e [NPE];
        q = 1 + ((n + pass) % 8);
        for (int i = 0; i < N; i++) zc[i] = $urandom_range(0, (1 << q) - 1);
        for (int u = 0; u < U; u++) begin
          int re, im;
          re = 0; im = 0;
          for (int b = 0; b < B; b++) begin
            int zr, zi;
            zr = 2 * zc[b] - ((1 << q) - 1);
            zi = 2 * zc[B+b] - ((1 << q) - 1);
            re += xr[u][b] * zr + xi[u][b] * zi;
            im += xr[u][b] * zi - xi[u][b] * zr;
          end
          e[2*u] = re; e[2*u+1] = im;
        end
        for (int bt = q - 1; bt >= 0; bt--) begin
          @(negedge clk);
          for (int i = 0; i < N; i++) z[i] = zc[i][bt];
          bvalid = 1; bfirst = (bt == q - 1); blast = (bt == 0);
          if (bt == 0) begin for (int p = 0; p < NPE; p++) expq.push_back(e[p]); lastcyc.push_back(cyc); end
        end
      end
      @(negedge clk);
      bvalid = 0; bfirst = 0; blast = 0;
      repeat (4) @(negedge clk);
    end
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
